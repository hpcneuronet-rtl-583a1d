// tb_fft_core: checks the FFT engine against a direct DFT computed in the
// testbench with real arithmetic. Frame 1: forward transform of random 16-bit
// samples (expected X[k]/N). Frame 2: inverse transform of a small random
// spectrum (expected the unscaled inverse DFT). Also checks that computing
// takes (N/2)*log2(N) clocks and that m_last marks the final beat.
module tb_fft_core;
  import hpc_pkg::*;
  localparam int N = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inverse, s_valid, s_ready, m_valid, m_ready, m_last;
  cplx_t s_data, m_data;
  int checks = 0, failures = 0;

  fft_core dut (.*);

  real xr[N], xi[N];
  int  last_in_cyc, first_out_cyc, cyc;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run_frame(input bit inv, input int amp);
    real er, ei, ang, tol;
    for (int n = 0; n < N; n++) begin
      xr[n] = $itor($signed($urandom_range(2*amp, 0)) - amp);
      xi[n] = inv ? $itor($signed($urandom_range(2*amp, 0)) - amp) : 0.0;
    end
    inverse = inv;
    for (int n = 0; n < N; n++) begin
      s_valid = 1; s_data.re = 16'($rtoi(xr[n])); s_data.im = 16'($rtoi(xi[n]));
      @(posedge clk); #1;
    end
    s_valid = 0;
    last_in_cyc = cyc;
    while (!m_valid) begin @(posedge clk); #1; end
    first_out_cyc = cyc;
    check(first_out_cyc - last_in_cyc == (N/2)*$clog2(N), $sformatf("calc cycles %0d", first_out_cyc - last_in_cyc));
    m_ready = 1;
    for (int k = 0; k < N; k++) begin
      er = 0; ei = 0;
      for (int n = 0; n < N; n++) begin
        ang = (inv ? 2.0 : -2.0) * 3.14159265358979 * $itor((k*n) % N) / N;
        er += xr[n]*$cos(ang) - xi[n]*$sin(ang);
        ei += xr[n]*$sin(ang) + xi[n]*$cos(ang);
      end
      if (!inv) begin er = er / N; ei = ei / N; end
      tol = inv ? 6.0 + 0.001*(fabs(er)+fabs(ei)) : 1.6;
      check(m_valid, "m_valid during unload");
      check(fabs($itor(m_data.re) - er) <= tol && fabs($itor(m_data.im) - ei) <= tol,
            $sformatf("inv=%0d bin %0d got %0d,%0d exp %f,%f", inv, k, $signed(m_data.re), $signed(m_data.im), er, ei));
      check(m_last == (k == N-1), "m_last");
      @(posedge clk); #1;
    end
    m_ready = 0;
  endtask

  initial begin
    cyc = 0; s_valid = 0; m_ready = 0; inverse = 0; s_data = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    run_frame(0, 20000);
    run_frame(1, 60);
    run_frame(0, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
