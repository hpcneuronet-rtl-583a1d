// tb_cordic_polar: random complex values, including the axes and negative
// real parts, against magnitude K*sqrt(re^2+im^2) and atan2(im, re) computed
// with real arithmetic. Checks 18 clocks per band and holding under a busy sink.
module tb_cordic_polar;
  import hpc_pkg::*;
  localparam real K = 1.6467602578654548, PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  cplx_t s_data;
  polar_t m_data;
  int checks = 0, failures = 0;
  cordic_polar dut (.*);

  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int re, im, t0, dph;
    real em, ep;
    s_valid = 0; s_last = 0; m_ready = 0; s_data = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      case (i)
        0: begin re = 1000; im = 0; end
        1: begin re = 0; im = 1000; end
        2: begin re = -1000; im = 0; end
        3: begin re = 0; im = -1000; end
        4: begin re = -32768; im = -32768; end
        default: begin
          re = $signed($urandom_range(65535, 0)) - 32768;
          im = $signed($urandom_range(65535, 0)) - 32768;
          if (i % 3 == 0) begin re = re / 64; im = im / 64; end
        end
      endcase
      s_valid = 1; s_data.re = 16'(re); s_data.im = 16'(im); s_last = (i % 7 == 0);
      @(posedge clk); #1; s_valid = 0;
      t0 = 1;
      while (!m_valid) begin @(posedge clk); #1; t0++; end
      check(t0 == CORDIC_ITER + 1, $sformatf("latency %0d", t0));
      if (i % 2 == 1) begin   // busy sink: output must hold
        repeat (3) begin @(posedge clk); #1; check(m_valid, "hold"); end
      end
      em = K * $sqrt($itor(re)*$itor(re) + $itor(im)*$itor(im));
      ep = $atan2($itor(im), $itor(re)) / PI * 32768.0;
      dph = int'(m_data.phase) - int'($rtoi(ep));
      dph = ((dph + 32768) % 65536 + 65536) % 65536 - 32768;
      check(fabs($itor(m_data.mag) - em) <= 3.0 + em*2e-4,
            $sformatf("mag %0d,%0d got %0d exp %f", re, im, m_data.mag, em));
      // phase resolution is limited by the input: about 1/|X| radians
      if (em > 20.0)
        check(fabs($itor(dph)) <= 4.0 + 8000.0/em, $sformatf("phase %0d,%0d got %0d exp %f", re, im, $signed(m_data.phase), ep));
      check(m_last == (i % 7 == 0), "last");
      m_ready = 1; @(posedge clk); #1; m_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
