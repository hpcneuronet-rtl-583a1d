// tb_mask_combine: random magnitude (with CORDIC gain K), phase and gain,
// checked against (mag/K) * gain * (cos, sin)(phase) computed with real
// arithmetic. Gains of 0 and 1.0 are included, and the two input streams
// are offered at different times to check the join. 18 clocks per band.
module tb_mask_combine;
  import hpc_pkg::*;
  localparam real K = 1.6467602578654548, PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic p_valid, p_ready, p_last, g_valid, g_ready, m_valid, m_ready, m_last;
  polar_t p_data;
  logic [15:0] g_data;
  cplx_t m_data;
  int checks = 0, failures = 0;
  mask_combine dut (.*);

  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int mag, ph, g, t0;
    real r, er, ei;
    p_valid = 0; g_valid = 0; m_ready = 0; p_data = '0; g_data = '0; p_last = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      mag = $urandom_range(76000, 0);
      if (i % 4 == 0) mag = mag / 100;
      ph  = $signed($urandom_range(65535, 0)) - 32768;
      g   = (i == 0) ? 0 : (i == 1) ? 32768 : $urandom_range(32768, 0);
      p_data = '{mag: 18'(mag), phase: 16'(ph)}; p_last = (i % 5 == 4);
      g_data = 16'(g);
      // offer one stream first, the other two clocks later
      if (i % 2) p_valid = 1; else g_valid = 1;
      repeat (2) begin @(posedge clk); #1; check(!m_valid, "no start before both"); end
      p_valid = 1; g_valid = 1;
      @(posedge clk); #1; p_valid = 0; g_valid = 0;
      t0 = 1;
      while (!m_valid) begin @(posedge clk); #1; t0++; end
      check(t0 == CORDIC_ITER + 1, $sformatf("latency %0d", t0));
      r  = $itor(mag) / K * $itor(g) / 32768.0;
      er = r * $cos($itor(ph) / 32768.0 * PI);
      ei = r * $sin($itor(ph) / 32768.0 * PI);
      if (er > 32767.0) er = 32767.0;
      if (ei > 32767.0) ei = 32767.0;
      if (er < -32768.0) er = -32768.0;
      if (ei < -32768.0) ei = -32768.0;
      check(fabs($itor($signed(m_data.re)) - er) <= 2.5 + r*1e-3 &&
            fabs($itor($signed(m_data.im)) - ei) <= 2.5 + r*1e-3,
            $sformatf("mag %0d ph %0d g %0d got %0d,%0d exp %f,%f", mag, ph, g,
                      $signed(m_data.re), $signed(m_data.im), er, ei));
      check(m_last == (i % 5 == 4), "last");
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
