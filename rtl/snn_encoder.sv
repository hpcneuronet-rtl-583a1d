// snn_encoder: spiking neurons that turn band magnitudes into spike trains.
//
// One neuron per band (NB = 256), built from the four parts of a spiking
// neural unit: a multiplier (input times a per-band weight), an accumulator
// (the membrane potential), a threshold comparison, and a spike encoder that
// sends each spike out as an address event {band, time step}. A single
// physical neuron datapath is time-shared over all bands; potentials, weights
// and input currents live in arrays.
//
// Per frame: LOAD takes NB magnitudes (s_*), computes the input current
// I[b] = mag[b] * w[b] / 256 (weights are Q8.8, reset to 1.0) and clears the
// potentials. RUN then simulates T time steps; in each step every band is
// updated once, in band order:
//   rate coding (mode = CODE_RATE), leaky integrate-and-fire:
//     v <- v - (v >> leak_shift) + I   (no leak when leak_shift == 0)
//     if v >= threshold: spike, v <- v - threshold (or v <- 0 with
//     reset_zero = 1), then the neuron rests for refrac steps: it neither
//     integrates nor spikes, and its potential is held
//   time-to-first-spike coding (mode = CODE_TTFS), non-leaky integrator:
//     v <- v + I; the first time v >= threshold the neuron spikes once and
//     stays silent for the rest of the window.
// A strong band therefore spikes often (rate) or early (TTFS), a band whose
// current stays below threshold * 2^-leak_shift never spikes. Finally an
// end-of-frame event carries the coding used. mode, threshold, leak_shift,
// refrac and reset_zero are sampled when a frame's first magnitude arrives;
// weights can be written
// at any time through w_we/w_addr/w_data.
// From the paper: the neuron structure (multiplier, accumulator, threshold,
// spike encoder), LIF neurons, rate and time-to-first-spike coding, 256
// bands, and decay, recovery duration and reset as settings of the threshold
// stage. This design's choices: their encodings, weight format, a time-shared neuron, the
// reset-by-subtraction, T = 16 steps, no bias (the neuron figure notes that
// some models ignore it), the event format, and an 18-bit magnitude input
// (the paper speaks of 16-bit data; the CORDIC gain of 1.65 needs 2 more bits).
// Timing: NB clocks to load, then NB*T clocks plus one per spike that meets a
// busy sink, then one end-of-frame beat.
module snn_encoder
  import hpc_pkg::*;
#(
  parameter int NB  = NBANDS,
  parameter int T   = 16,
  parameter int VW  = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  code_mode_e          mode,
  input  logic [VW-1:0]       threshold,
  input  logic [3:0]          leak_shift,
  input  logic [3:0]          refrac,
  input  logic                reset_zero,
  input  logic                w_we,
  input  logic [7:0]          w_addr,
  input  logic [15:0]         w_data,
  // band magnitudes in
  input  logic                s_valid,
  output logic                s_ready,
  input  logic [MAG_W-1:0]    s_mag,
  // spike events out
  output logic                m_valid,
  input  logic                m_ready,
  output spike_event_t        m_event
);
  localparam int BW = $clog2(NB);
  typedef enum logic [1:0] {S_LOAD, S_RUN, S_EOF} state_e;
  state_e state;

  logic [15:0]   weight [NB];
  logic [VW-1:0] cur    [NB];
  logic [VW-1:0] v      [NB];
  logic [3:0]    rest   [NB];
  logic [NB-1:0] fired;
  logic [BW-1:0] band;
  logic [STEP_W-1:0] step;
  code_mode_e    mode_q;
  logic [VW-1:0] thr_q;
  logic [3:0]    leak_q;
  logic [3:0]    refrac_q;
  logic          rzero_q;

  // Multiplier: input current, saturated to VW bits
  logic [MAG_W+15:0] prod;
  logic [VW-1:0]     i_in;
  always_comb begin
    prod = (MAG_W+16)'(s_mag) * (MAG_W+16)'(weight[band]);
    i_in = ((prod >> 8) > (MAG_W+16)'({VW{1'b1}})) ? {VW{1'b1}} : VW'(prod >> 8);
  end

  // Accumulator and threshold for the neuron of (step, band)
  logic [VW:0]   acc;
  logic [VW-1:0] leak, v_next;
  logic          spike, resting;
  logic [3:0]    rest_next;
  always_comb begin
    resting = (mode_q == CODE_RATE) && (rest[band] != 4'd0);
    leak = (leak_q == 4'd0) ? '0 : (v[band] >> leak_q);
    if (mode_q == CODE_RATE) acc = (VW+1)'(v[band] - leak) + (VW+1)'(cur[band]);
    else                     acc = (VW+1)'(v[band]) + (VW+1)'(cur[band]);
    if (acc > (VW+1)'({VW{1'b1}})) acc = (VW+1)'({VW{1'b1}});
    spike  = !resting && (acc >= (VW+1)'(thr_q)) && !(mode_q == CODE_TTFS && fired[band]);
    if (resting)                          v_next = v[band];
    else if (spike && mode_q == CODE_RATE) v_next = rzero_q ? '0 : VW'(acc - (VW+1)'(thr_q));
    else                                  v_next = VW'(acc);
    if (resting)    rest_next = rest[band] - 4'd1;
    else if (spike) rest_next = refrac_q;
    else            rest_next = 4'd0;
  end

  assign s_ready = (state == S_LOAD);
  assign m_valid = (state == S_RUN && spike) || (state == S_EOF);
  always_comb begin
    m_event.eof  = (state == S_EOF);
    m_event.mode = mode_q;
    m_event.step = step;
    m_event.band = 8'(band);
  end

  logic advance;
  assign advance = (state == S_RUN) && (!spike || m_ready);

  always_ff @(posedge clk) begin
    if (w_we) weight[w_addr[BW-1:0]] <= w_data;
    if (state == S_LOAD && s_valid) begin
      cur[band]  <= i_in;
      v[band]    <= '0;
      rest[band] <= 4'd0;
    end else if (advance) begin
      v[band]    <= v_next;
      rest[band] <= rest_next;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; band <= '0; step <= '0; fired <= '0;
      mode_q <= CODE_RATE; thr_q <= '0; leak_q <= '0; refrac_q <= '0; rzero_q <= 1'b0;
    end else begin
      unique case (state)
        S_LOAD: if (s_valid) begin
          if (band == '0) begin
            mode_q <= mode; thr_q <= threshold; leak_q <= leak_shift;
            refrac_q <= refrac; rzero_q <= reset_zero;
          end
          fired[band] <= 1'b0;
          band <= band + 1'b1;
          if (32'(band) == NB-1) begin
            band <= '0; step <= '0; state <= S_RUN;
          end
        end
        S_RUN: if (advance) begin
          if (spike) fired[band] <= 1'b1;
          band <= band + 1'b1;
          if (32'(band) == NB-1) begin
            band <= '0;
            step <= step + 1'b1;
            if (32'(step) == T-1) state <= S_EOF;
          end
        end
        S_EOF: if (m_ready) begin
          state <= S_LOAD; step <= '0;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Weights start at 1.0 (Q8.8)
  initial for (int i = 0; i < NB; i++) weight[i] = 16'h0100;

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_event));
endmodule
