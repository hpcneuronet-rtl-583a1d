// tb_hpcneuronet_clip: full-size run at the design's default sizes. A 30 s
// noisy recording at 16 kHz (480000 samples) is played through the
// 48000-word clip memory as 10 back-to-back clips of 3 s each: the next clip
// is written while the pipeline still drains the previous one, and the
// output must be one continuous stream, delayed by 384 samples, across the
// clip boundaries. The signal is a sum of two tones on STFT bins (40 and 90)
// with amplitude changes every 4000 samples, plus uniform noise; it is
// denoised with the rate-coded noise gate. Checks: 480000 output samples in
// 3750 frames of 128, the residual noise against the clean signal is at
// least 10 dB below the input noise for the first clip and for the whole
// recording (frames across clip joins included), the scale-invariant
// signal-to-noise ratio (SI-SNR) of the output against the clean signal is at
// least 10 dB above that of the noisy input, and reports the clocks.
// SI-SNR = 10 log10(|s_t|^2 / |e|^2) with s_t = (<y, s> / |s|^2) s and
// e = y - s_t, for the clean signal s (zero mean here) and the output y.
module tb_hpcneuronet_clip;
  import hpc_pkg::*;
  localparam int LEN = 48000, NCLIP = 10, TOTAL = LEN * NCLIP, DLY = 384;
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
  int clean[TOTAL], noisy[TOTAL];
  int frames = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // |s_t|^2 = <y,s>^2/|s|^2 and, since e is orthogonal to s, |e|^2 = |y|^2 - |s_t|^2
  function automatic real si_snr(input real ys, input real ss, input real yy);
    real st;
    st = ys * ys / ss;
    return 10.0 * $log10(st / (yy - st));
  endfunction

  function automatic real reduction(input real e_in, input real e_out);
    return 10.0 * $log10(e_in / e_out);
  endfunction

  initial begin
    real a1, a2;
    wr_en = 0; start = 0; w_we = 0; w_addr = 0; w_data = 0; wr_addr = 0; wr_data = 0; length = 0;
    mode = CODE_RATE; threshold = 24'd400; leak_shift = 4'd2; xf_bypass = 1;
    refrac = 4'd0; reset_zero = 1'b0;
    feat_out_ready = 0; feat_in_valid = 0; feat_in_data = '0; out_ready = 1;
    for (int i = 0; i < TOTAL; i++) begin
      a1 = 3000.0 + 2000.0 * ((i / 4000) % 3);
      a2 = 6000.0 - 1500.0 * ((i / 4000) % 4);
      clean[i] = $rtoi(a1 * $sin(2.0*PI*40.0*$itor(i)/512.0) + a2 * $sin(2.0*PI*90.0*$itor(i)/512.0 + 1.0));
      noisy[i] = clean[i] + $signed($urandom_range(600, 0)) - 300;
    end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    fork
      // producer: write a clip, play it, wait until it has been read out
      for (int c = 0; c < NCLIP; c++) begin
        for (int i = 0; i < LEN; i++) begin
          wr_en = 1; wr_addr = 16'(i); wr_data = 16'(noisy[c*LEN + i]); @(posedge clk); #1;
        end
        wr_en = 0;
        start = 1; length = 16'(LEN); @(posedge clk); #1; start = 0;
        while (busy) begin @(posedge clk); #1; end
      end
      // consumer: one continuous output stream
      begin
        int nout, t0, lim;
        real en_in, en_out, d, first_clip;
        real ss, ys, yy, xs, xx, si_in, si_out;
        nout = 0; t0 = 0; en_in = 0.0; en_out = 0.0; first_clip = 0.0;
        ss = 0.0; ys = 0.0; yy = 0.0; xs = 0.0; xx = 0.0;
        while (nout < TOTAL) begin
          if (out_valid) begin
            if (nout >= DLY) begin
              lim = nout - DLY;
              // skip the first frames and the frames that straddle an amplitude step
              if (lim >= 512 && (lim % 4000) >= 512 && (lim % 4000) < 3488) begin
                d = $itor(out_sample) - $itor(clean[lim]);
                en_out += d*d;
                en_in  += ($itor(noisy[lim]) - $itor(clean[lim]))**2;
                ss += $itor(clean[lim]) * $itor(clean[lim]);
                ys += $itor(out_sample) * $itor(clean[lim]);
                yy += $itor(out_sample) * $itor(out_sample);
                xs += $itor(noisy[lim]) * $itor(clean[lim]);
                xx += $itor(noisy[lim]) * $itor(noisy[lim]);
              end
            end
            if (out_last) frames++;
            nout++;
            if (nout == LEN) begin
              first_clip = reduction(en_in, en_out);
              $display("first clip: %0d samples, %0d frames, %0d clocks (%f ms at 100 MHz), noise reduced by %f dB",
                       nout, frames, t0, $itor(t0) / 1.0e5, first_clip);
            end
          end
          t0++;
          @(posedge clk); #1;
        end
        $display("recording: %0d samples, %0d frames, %0d clocks (%f ms at 100 MHz), noise reduced by %f dB",
                 nout, frames, t0, $itor(t0) / 1.0e5, reduction(en_in, en_out));
        si_in = si_snr(xs, ss, xx);
        si_out = si_snr(ys, ss, yy);
        $display("SI-SNR: noisy input %f dB, output %f dB", si_in, si_out);
        check(frames == TOTAL / 128, "frame count");
        check(si_out >= si_in + 10.0, "SI-SNR improvement");
        check(first_clip >= 10.0, "noise reduction, first clip");
        check(reduction(en_in, en_out) >= 10.0, "noise reduction, whole recording");
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
