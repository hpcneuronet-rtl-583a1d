// fft_core: N-point complex FFT / IFFT with AXI-Stream style load and unload.
//
// The design's FPGA build used the FPGA vendor's FFT IP for both the STFT and
// the ISTFT; this module is an in-house replacement with the same job: 512
// points, 16-bit real and imaginary parts in and out. It is an iterative
// radix-2 decimation-in-time engine working in place on one frame memory:
//   LOAD   - N input beats in natural order, written at bit-reversed addresses
//            (s_ready high, s_valid/s_data; s_last is not required).
//   CALC   - log2(N) stages of N/2 butterflies, one butterfly per clock.
//   UNLOAD - N output beats in natural order (m_valid/m_ready/m_data, m_last
//            on the final one).
// 'inverse' is sampled with the first input beat. Scaling (this design's
// choice, in the spirit of the vendor core's scaling schedule): the forward
// transform is divided by N at the output (so 16-bit bins never overflow),
// the inverse is not scaled, so IFFT(FFT(x)) == x. Internally the data path is
// IW bits wide, unscaled and carries FRAC fraction bits, so butterfly
// rounding stays far below one output LSB; the output is rounded once and
// saturated to 16 bits. Twiddles are cos(2*pi*k/N) and -sin(2*pi*k/N) for
// k < N/2 in Q1.15 (scaled by 32767), read from a table file.
// Timing: N + (N/2)*log2(N) + N cycles per frame with an always-ready sink
// (512 + 2304 + 512 = 3328 for N = 512).
module fft_core
  import hpc_pkg::*;
#(
  parameter int    N            = FFT_N,
  parameter int    IW           = 34,
  parameter int    FRAC         = 8,
  parameter string TWIDDLE_FILE = "rtl/fft_twiddle.hex"
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inverse,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_data,
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_data,
  output logic  m_last
);
  localparam int LOG2N = $clog2(N);

  typedef struct packed {
    logic signed [IW-1:0] re;
    logic signed [IW-1:0] im;
  } wcplx_t;

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_UNLOAD} state_e;

  wcplx_t      mem [N];
  logic [31:0] twiddle [N/2];   // {cos, -sin}, Q1.15
  initial $readmemh(TWIDDLE_FILE, twiddle);

  state_e                 state;
  logic [LOG2N-1:0]       cnt;     // load / unload index
  logic [LOG2N-2:0]       bfly;    // butterfly index within a stage
  logic [$clog2(LOG2N)-1:0] stage;
  logic                   inv_q;

  function automatic logic [LOG2N-1:0] bitrev(input logic [LOG2N-1:0] a);
    for (int i = 0; i < LOG2N; i++) bitrev[i] = a[LOG2N-1-i];
  endfunction

  // Butterfly addressing
  logic [LOG2N-1:0] half, pos, i0, i1;
  logic [LOG2N-2:0] tw;
  always_comb begin
    half = LOG2N'(1) << stage;
    pos  = LOG2N'(bfly) & (half - LOG2N'(1));
    i0   = ((LOG2N'(bfly) >> stage) << (stage + 1)) | pos;
    i1   = i0 | half;
    tw   = (LOG2N-1)'(pos << (LOG2N - 1 - 32'(stage)));
  end

  // Butterfly arithmetic
  logic signed [15:0]      wr, wi;
  logic signed [IW+16:0]   pr, pi;
  wcplx_t                  a, b, t, sum, dif;
  always_comb begin
    a  = mem[i0];
    b  = mem[i1];
    wr = twiddle[tw][31:16];
    wi = inv_q ? -$signed(twiddle[tw][15:0]) : $signed(twiddle[tw][15:0]);
    pr = (IW+17)'(b.re) * wr - (IW+17)'(b.im) * wi + (IW+17)'(16384);
    pi = (IW+17)'(b.re) * wi + (IW+17)'(b.im) * wr + (IW+17)'(16384);
    t.re = IW'(pr >>> 15);
    t.im = IW'(pi >>> 15);
    sum.re = a.re + t.re;  sum.im = a.im + t.im;
    dif.re = a.re - t.re;  dif.im = a.im - t.im;
  end

  // Output scaling with rounding and saturation
  function automatic logic signed [15:0] scale_out(input logic signed [IW-1:0] v, input logic inv);
    logic signed [47:0] r;
    if (inv) r = (48'(v) + 48'(2**(FRAC-1))) >>> FRAC;
    else     r = (48'(v) + 48'(2**(FRAC+LOG2N-1))) >>> (FRAC+LOG2N);
    return sat16(r);
  endfunction

  assign s_ready = (state == S_LOAD);
  assign m_valid = (state == S_UNLOAD);
  assign m_last  = (state == S_UNLOAD) && (cnt == LOG2N'(N-1));
  always_comb begin
    m_data.re = scale_out(mem[cnt].re, inv_q);
    m_data.im = scale_out(mem[cnt].im, inv_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      bfly  <= '0;
      stage <= '0;
      inv_q <= 1'b0;
    end else begin
      unique case (state)
        S_LOAD: if (s_valid) begin
          if (cnt == '0) inv_q <= inverse;
          cnt <= cnt + 1'b1;
          if (cnt == LOG2N'(N-1)) begin
            state <= S_CALC;
            bfly  <= '0;
            stage <= '0;
          end
        end
        S_CALC: begin
          bfly <= bfly + 1'b1;
          if (bfly == '1) begin
            if (32'(stage) == LOG2N-1) begin
              state <= S_UNLOAD;
              cnt   <= '0;
            end else stage <= stage + 1'b1;
          end
        end
        S_UNLOAD: if (m_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == LOG2N'(N-1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Frame memory (no reset: every word is written in LOAD before it is read)
  always_ff @(posedge clk) begin
    if (state == S_LOAD && s_valid) begin
      mem[bitrev(cnt)].re <= IW'(s_data.re) <<< FRAC;
      mem[bitrev(cnt)].im <= IW'(s_data.im) <<< FRAC;
    end else if (state == S_CALC) begin
      mem[i0] <= sum;
      mem[i1] <= dif;
    end
  end

  // AXI-Stream rule: an offered output beat stays until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
