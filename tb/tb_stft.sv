// tb_stft: streams random audio into the STFT and checks each frame's 256
// bins against a DFT (scaled by 1/512) of the last 512 samples computed in the
// testbench, with samples before the start taken as zero. Also checks that
// a frame comes out every 128 samples and that m_last marks bin 255.
module tb_stft;
  import hpc_pkg::*;
  localparam int N = 512, HOP = 128, NB = 256, FRAMES = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, m_valid, m_ready, m_last;
  logic signed [15:0] s_sample;
  cplx_t m_data;
  int checks = 0, failures = 0;

  stft dut (.*);

  int x[HOP*FRAMES];
  int frames_seen = 0, sent = 0;

  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Source
  initial begin
    s_valid = 0; s_sample = 0;
    for (int i = 0; i < HOP*FRAMES; i++) x[i] = $signed($urandom_range(40000, 0)) - 20000;
    wait (rst_n);
    while (sent < HOP*FRAMES) begin
      s_valid = 1; s_sample = 16'(x[sent]);
      @(posedge clk);
      if (s_ready) sent++;
      #1;
    end
    s_valid = 0;
  end

  // Sink and checker
  initial begin
    real er, ei, ang, v;
    m_ready = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1; m_ready = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int k = 0; k < NB; k++) begin
        while (!m_valid) begin @(posedge clk); #1; end
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          int t;
          t = HOP*(f+1) - N + n;
          v = (t >= 0) ? $itor(x[t]) : 0.0;
          ang = -2.0 * 3.14159265358979 * $itor((k*n) % N) / N;
          er += v*$cos(ang); ei += v*$sin(ang);
        end
        er = er / N; ei = ei / N;
        check(fabs($itor($signed(m_data.re)) - er) <= 1.6 && fabs($itor($signed(m_data.im)) - ei) <= 1.6,
              $sformatf("frame %0d bin %0d got %0d,%0d exp %f,%f", f, k, $signed(m_data.re), $signed(m_data.im), er, ei));
        check(m_last == (k == NB-1), "m_last");
        @(posedge clk); #1;
      end
      frames_seen++;
    end
    check(frames_seen == FRAMES, "frame count");
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
