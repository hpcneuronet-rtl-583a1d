// istft: inverse short-time Fourier transform back end.
//
// Takes the NB (256) cleaned bands of one frame (s_*, band 0 first, s_last on
// band 255) into a band buffer, rebuilds the full N-point (512) spectrum of a
// real signal (X[k] for k < 256, X[256] = 0, X[512-k] = conj(X[k])), and
// streams it through an fft_core in inverse mode (unscaled, so it undoes the
// STFT's 1/N-scaled forward transform). The real parts of the 512 output
// samples are overlap-added, hop HOP (128), into a 512-word accumulator kept
// as a circular buffer. (The imaginary parts are zero up to rounding for a
// conjugate-symmetric spectrum and are not used, which lint reports as
// unused bits.) The first 128 words of each frame are then complete
// (four frames have contributed) and leave on m_* as 16-bit samples, divided
// by 4 (the sum of four rectangular windows), rounded and saturated, m_last
// on the 128th. Those words are then reused as the tail of the next frame,
// whose last HOP samples (and every sample of the first frame after reset)
// start from zero instead of the stored word, so the accumulator needs no
// clearing. Window, hop and band count follow the paper's STFT; the
// rectangular window, the gain of 1/4 and the Nyquist bin set to zero are
// this design's choices. With every band left unchanged the output equals
// the STFT's input delayed by N - HOP = 384 samples.
// Timing: 256 clocks to take the bands, N to load the FFT, (N/2)*log2(N) to
// compute, N to unload (the first HOP of them wait for the sink).
module istft
  import hpc_pkg::*;
#(
  parameter int N      = FFT_N,
  parameter int HOP    = HOP_LEN,
  parameter int NB     = NBANDS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       s_valid,
  output logic                       s_ready,
  input  cplx_t                      s_data,
  input  logic                       s_last,
  output logic                       m_valid,
  input  logic                       m_ready,
  output logic signed [SAMPLE_W-1:0] m_sample,
  output logic                       m_last
);
  localparam int AW = $clog2(N);
  localparam int OW = SAMPLE_W + 4;   // accumulator width

  typedef enum logic {S_TAKE, S_SEND} state_e;
  state_e state;

  cplx_t               bands [NB];
  logic signed [OW-1:0] acc  [N];
  logic [AW-1:0]       cnt, base, n;
  logic                first_frame;

  // FFT interface
  logic  f_s_valid, f_s_ready, f_m_valid, f_m_ready, f_m_last;
  cplx_t f_s_data, f_m_data;

  assign s_ready   = (state == S_TAKE);
  assign f_s_valid = (state == S_SEND);
  always_comb begin
    if (32'(cnt) < NB)       f_s_data = bands[cnt[AW-2:0]];
    else if (32'(cnt) == NB) f_s_data = '0;
    else begin
      f_s_data.re = bands[(AW-1)'(AW'(N) - cnt)].re;
      f_s_data.im = -bands[(AW-1)'(AW'(N) - cnt)].im;
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_TAKE && s_valid) bands[cnt[AW-2:0]] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_TAKE; cnt <= '0;
    end else begin
      unique case (state)
        S_TAKE: if (s_valid) begin
          cnt <= cnt + 1'b1;
          if (s_last || 32'(cnt) == NB-1) begin
            cnt <= '0; state <= S_SEND;
          end
        end
        S_SEND: if (f_s_ready) begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N-1) begin
            cnt <= '0; state <= S_TAKE;
          end
        end
        default: state <= S_TAKE;
      endcase
    end
  end

  fft_core #(.N(N)) u_fft (
    .clk, .rst_n, .inverse(1'b1),
    .s_valid(f_s_valid), .s_ready(f_s_ready), .s_data(f_s_data),
    .m_valid(f_m_valid), .m_ready(f_m_ready), .m_data(f_m_data), .m_last(f_m_last)
  );

  // Overlap-add
  logic signed [OW-1:0] sum;
  logic [AW-1:0]        pos;
  assign pos       = base + n;
  // A word holds earlier frames' sums only if the previous frame wrote it:
  // not in the first frame, not in the last HOP words of a frame.
  assign sum       = ((first_frame || 32'(n) >= N - HOP) ? '0 : acc[pos]) + OW'(f_m_data.re);
  assign m_valid   = f_m_valid && (32'(n) < HOP);
  assign f_m_ready = (32'(n) < HOP) ? m_ready : 1'b1;
  assign m_sample  = sat16(48'(sum + OW'(2)) >>> 2);
  assign m_last    = m_valid && (32'(n) == HOP-1);

  always_ff @(posedge clk) begin
    if (f_m_valid && f_m_ready && 32'(n) >= HOP) acc[pos] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n <= '0; base <= '0; first_frame <= 1'b1;
    end else if (f_m_valid && f_m_ready) begin
      n <= n + 1'b1;
      if (f_m_last) begin
        n           <= '0;
        base        <= base + AW'(HOP);
        first_frame <= 1'b0;
      end
    end
  end
endmodule
