// tb_hpcneuronet_top: end-to-end test of the denoiser at its default sizes.
// The input is a 1250 Hz tone (exactly STFT bin 40) plus uniform noise. Each
// phase resets the pipeline, loads a clip of 2048 samples, plays it and
// collects the output, which should be the input delayed by 384 samples.
//   A  pass-through: rate coding, threshold 1, so every band gets gain 1.0;
//      output must match the noisy input (SNR > 35 dB).
//   B  noise gate, rate coding with leak: noise bands stay below threshold,
//      the tone band fires in every step; the output must be much closer to
//      the clean tone than the input was (>= 10 dB less noise).
//   C  the same gate with time-to-first-spike coding.
//   D  external feature path (bypass off): the testbench loops feat_out back
//      to feat_in with random delays and one long pause, which fills the
//      delay units; the output sink stalls at random. Pass-through check.
//   E  rate-coded gate with a recovery period of 2 steps and reset to zero:
//      a neuron can then fire at most at steps 0, 3, .., 15, so the largest
//      gain must be exactly 6/16 (12288), which the tone band reaches.
// Mechanisms counted (each must occur): frames in rate mode, frames in TTFS
// mode, delay units full, output back-pressure, frames through the external
// feature path, bands gated to zero, bands at full gain, neuron steps spent
// in the recovery period. Also checks the
// frame interval against 50 frames/s at 250 MHz (5e6 clocks) and the event
// rate while the encoder runs against 8.76 Mevents/s at 250 MHz, the
// figures given for the original system.
module tb_hpcneuronet_top;
  import hpc_pkg::*;
  localparam int LEN = 2048, DLY = 384;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start, busy, w_we, xf_bypass;
  logic [15:0] wr_addr, length;
  logic signed [15:0] wr_data, out_sample;
  code_mode_e mode;
  logic [23:0] threshold;
  logic [3:0] leak_shift, refrac;
  logic reset_zero;
  logic [7:0] w_addr;
  logic [15:0] w_data;
  logic feat_out_valid, feat_out_ready, feat_in_valid, feat_in_ready;
  logic [MAG_W-1:0] feat_out_data, feat_in_data;
  logic out_valid, out_ready, out_last;

  hpcneuronet_top dut (.*);

  int checks = 0, failures = 0;
  int n_rate = 0, n_ttfs = 0, n_full = 0, n_bp = 0, n_ext = 0, n_gated = 0, n_unity = 0;
  int n_rest = 0, max_gain = 0;
  int cyc = 0, last_frame_cyc = 0, max_interval = 0;
  longint n_events = 0, run_clocks = 0;
  int clean[LEN], noisy[LEN], outs[LEN];
  int nout;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // mechanism counters
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.ev_valid && dut.ev_ready && dut.ev.eof) begin
        if (dut.ev.mode == CODE_RATE) n_rate++; else n_ttfs++;
      end
      if (dut.dm_full) n_full++;
      if (int'(dut.u_enc.state) == 1) run_clocks++;   // S_RUN
      if (dut.ev_valid && dut.ev_ready && !dut.ev.eof) n_events++;
      if (out_valid && !out_ready) n_bp++;
      if (feat_in_valid && feat_in_ready && dut.u_enc.band == '0) n_ext++;
      if (int'(dut.u_enc.state) == 1 && dut.u_enc.resting && dut.u_enc.advance) n_rest++;
      if (dut.g_valid && dut.g_ready) begin
        if (int'(dut.g_data) > max_gain) max_gain = int'(dut.g_data);
        if (dut.g_data == 16'd0) n_gated++;
        if (dut.g_data == 16'd32768) n_unity++;
      end
      if (out_valid && out_ready && out_last) begin
        if (last_frame_cyc != 0 && cyc - last_frame_cyc > max_interval) max_interval = cyc - last_frame_cyc;
        last_frame_cyc <= cyc;
      end
    end
  end

  // external feature path model: a FIFO with random delay and one long pause
  logic [MAG_W-1:0] fq[$];
  int pause;
  always @(posedge clk) begin
    if (feat_out_valid && feat_out_ready) fq.push_back(feat_out_data);
    if (feat_in_valid && feat_in_ready) void'(fq.pop_front());
  end
  always @(negedge clk) begin
    feat_out_ready = ($urandom_range(3, 0) != 0);
    if (pause > 0) pause--;
    feat_in_valid  = (fq.size() > 0) && (pause == 0) && ($urandom_range(3, 0) != 0);
    feat_in_data   = (fq.size() > 0) ? fq[0] : '0;
  end

  task automatic make_signal();
    for (int i = 0; i < LEN; i++) begin
      clean[i] = $rtoi(8000.0 * $sin(2.0 * PI * 40.0 * $itor(i) / 512.0));
      noisy[i] = clean[i] + $signed($urandom_range(600, 0)) - 300;
    end
  endtask

  task automatic run(input code_mode_e md, input int thr, input int lk, input bit byp, input bit stall,
                     input int rf = 0, input bit rz = 1'b0);
    rst_n = 0; repeat (3) @(posedge clk); #1 rst_n = 1;
    mode = md; threshold = 24'(thr); leak_shift = 4'(lk); xf_bypass = byp;
    refrac = 4'(rf); reset_zero = rz; max_gain = 0;
    last_frame_cyc = 0;
    for (int i = 0; i < LEN; i++) begin
      wr_en = 1; wr_addr = 16'(i); wr_data = 16'(noisy[i]); @(posedge clk); #1;
    end
    wr_en = 0;
    start = 1; length = 16'(LEN); @(posedge clk); #1; start = 0;
    if (!byp) pause = 40000;
    nout = 0;
    while (nout < LEN) begin
      out_ready = stall ? ($urandom_range(3, 0) != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin outs[nout] = out_sample; nout++; end
      @(posedge clk); #1;
    end
    out_ready = 0;
  endtask

  // energy of (out delayed) - ref over the steady part
  function automatic real err_energy(input bit vs_clean);
    real e = 0.0, d;
    for (int i = DLY + 512; i < LEN; i++) begin
      d = $itor(outs[i]) - $itor(vs_clean ? clean[i-DLY] : noisy[i-DLY]);
      e += d*d;
    end
    return e;
  endfunction
  function automatic real sig_energy(input bit vs_clean);
    real e = 0.0;
    for (int i = DLY + 512; i < LEN; i++) e += $itor(vs_clean ? clean[i-DLY] : noisy[i-DLY])**2;
    return e;
  endfunction
  function automatic real in_noise_energy();
    real e = 0.0;
    for (int i = DLY + 512; i < LEN; i++) e += ($itor(noisy[i-DLY]) - $itor(clean[i-DLY]))**2;
    return e;
  endfunction

  initial begin
    real snr, red;
    wr_en = 0; start = 0; w_we = 0; w_addr = 0; w_data = 0; wr_addr = 0; wr_data = 0; length = 0;
    mode = CODE_RATE; threshold = 1; leak_shift = 0; xf_bypass = 1; out_ready = 0; pause = 0;
    refrac = 0; reset_zero = 0;
    make_signal();
    // A: pass-through
    run(CODE_RATE, 1, 0, 1'b1, 1'b0);
    for (int i = 0; i < DLY; i++) check(outs[i] <= 64 && outs[i] >= -64, $sformatf("near zero before the first sample: %0d", outs[i]));
    snr = 10.0 * $log10(sig_energy(0) / err_energy(0));
    $display("A pass-through SNR %f dB", snr);
    check(snr > 35.0, $sformatf("A snr %f", snr));
    // B: noise gate, rate coding
    run(CODE_RATE, 400, 2, 1'b1, 1'b0);
    red = 10.0 * $log10(in_noise_energy() / err_energy(1));
    $display("B rate-coded gate: noise reduced by %f dB", red);
    check(red >= 10.0, $sformatf("B reduction %f", red));
    // C: noise gate, time-to-first-spike coding
    run(CODE_TTFS, 400, 0, 1'b1, 1'b1);
    red = 10.0 * $log10(in_noise_energy() / err_energy(1));
    $display("C TTFS gate: noise reduced by %f dB", red);
    check(red >= 10.0, $sformatf("C reduction %f", red));
    // D: external feature path, stalls
    run(CODE_RATE, 1, 0, 1'b0, 1'b1);
    snr = 10.0 * $log10(sig_energy(0) / err_energy(0));
    $display("D external path SNR %f dB", snr);
    check(snr > 35.0, $sformatf("D snr %f", snr));
    // E: recovery period and reset to zero
    run(CODE_RATE, 400, 2, 1'b1, 1'b0, 2, 1'b1);
    $display("E recovery period 2: largest gain %0d", max_gain);
    check(max_gain == 12288, $sformatf("E largest gain %0d, expected 12288", max_gain));

    $display("mechanisms: rate=%0d ttfs=%0d delay_full=%0d backpressure=%0d external=%0d gated=%0d unity=%0d recovery=%0d max_frame_interval=%0d",
             n_rate, n_ttfs, n_full, n_bp, n_ext, n_gated, n_unity, n_rest, max_interval);
    check(n_rate > 0, "rate mode never used");
    check(n_ttfs > 0, "ttfs mode never used");
    check(n_full > 0, "delay units never full");
    check(n_bp > 0, "no back-pressure");
    check(n_ext > 0, "external path never used");
    check(n_gated > 0, "no band gated");
    check(n_unity > 0, "no band at full gain");
    check(n_rest > 0, "recovery period never used");
    check(max_interval > 0 && max_interval < 5000000, "frame interval vs 50 frames/s at 250 MHz");
    // peak event rate while the encoder runs, scaled to 250 MHz, against 8.76 Mevents/s
    $display("events %0d in %0d encoder clocks: %f Mevents/s at 250 MHz", n_events, run_clocks,
             250.0 * $itor(n_events) / $itor(run_clocks));
    check(250.0 * $itor(n_events) / $itor(run_clocks) >= 8.76, "event rate below 8.76 Mevents/s");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
