// tb_istft: random cleaned bands for six frames; the expected output is
// computed in the testbench as the real inverse DFT of the Hermitian
// 512-point spectrum (bin 256 zero), overlap-added with hop 128 and divided
// by 4. Checks every output sample (within 1.5 LSB), m_last and the number
// of samples per frame, with a randomly stalling sink.
module tb_istft;
  import hpc_pkg::*;
  localparam int N = 512, HOP = 128, NB = 256, FRAMES = 6;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  cplx_t s_data;
  logic signed [15:0] m_sample;
  int checks = 0, failures = 0;
  istft dut (.*);

  real br[FRAMES][NB], bi[FRAMES][NB];
  real y[HOP*(FRAMES+3)];

  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    real acc, ang;
    int idx;
    for (int i = 0; i < HOP*(FRAMES+3); i++) y[i] = 0.0;
    for (int f = 0; f < FRAMES; f++) begin
      for (int k = 0; k < NB; k++) begin
        br[f][k] = $itor($signed($urandom_range(160, 0)) - 80);
        bi[f][k] = (k == 0) ? 0.0 : $itor($signed($urandom_range(160, 0)) - 80);
      end
      // frame f covers output positions HOP*f .. HOP*f+N-1 (position = time + 384)
      for (int n = 0; n < N; n++) begin
        acc = br[f][0];
        for (int k = 1; k < NB; k++) begin
          ang = 2.0 * PI * $itor((k*n) % N) / N;
          acc += 2.0 * (br[f][k]*$cos(ang) - bi[f][k]*$sin(ang));
        end
        y[HOP*f + n] += acc;
      end
    end
    s_valid = 0; s_last = 0; s_data = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int k = 0; k < NB; k++) begin
        s_valid = 1; s_last = (k == NB-1);
        s_data.re = 16'($rtoi(br[f][k])); s_data.im = 16'($rtoi(bi[f][k]));
        #1;
        while (!s_ready) begin @(posedge clk); #1; end
        @(posedge clk); #1;
      end
    s_valid = 0;
  end

  // frame f releases positions HOP*f .. HOP*f+127, complete from f >= 3
  initial begin
    real e;
    m_ready = 0;
    wait (rst_n);
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < HOP; n++) begin
        m_ready = $urandom_range(3, 0) != 0;
        #1;
        while (!(m_valid && m_ready)) begin
          @(posedge clk); #1; m_ready = $urandom_range(3, 0) != 0; #1;
        end
        e = y[HOP*f + n] / 4.0;
        check(fabs($itor(m_sample) - e) <= 1.5, $sformatf("frame %0d n %0d got %0d exp %f", f, n, m_sample, e));
        check(m_last == (n == HOP-1), "last");
        @(posedge clk); #1;
      end
    m_ready = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
