// snn_decoder: turns each band's spike train back into one value per band.
//
// It listens to the address events of snn_encoder and keeps, per band, the
// number of spikes and the time step of the first spike. When the
// end-of-frame event arrives it sends NB values, band 0 first, as an unsigned
// Q1.15 gain (32768 == 1.0) on m_*, with m_last on the final band, and clears
// its counters behind itself. The coding named in the end-of-frame event
// selects the formula:
//   rate coding:           gain = spikes / T
//   time-to-first-spike:   gain = (T - first_step) / T, or 0 with no spike
// so a neuron that fires in every step, or in step 0, gives 1.0. The paper
// says only that the decoder maps spike trains back to a time-frequency
// representation with 16-bit data; reading them as a per-band gain for the
// magnitude, and these formulas, are this design's choices.
// Timing: one event per clock while collecting; NB clocks to emit with a
// ready sink. T must be a power of two no larger than 2^15.
module snn_decoder
  import hpc_pkg::*;
#(
  parameter int NB = NBANDS,
  parameter int T  = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                s_valid,
  output logic                s_ready,
  input  spike_event_t        s_event,
  output logic                m_valid,
  input  logic                m_ready,
  output logic [MASK_W-1:0]   m_data,
  output logic                m_last
);
  localparam int BW  = $clog2(NB);
  localparam int CW  = $clog2(T) + 1;
  localparam int SCL = 15 - $clog2(T);

  typedef enum logic {S_COLLECT, S_EMIT} state_e;
  state_e state;

  logic [CW-1:0]     count [NB];
  logic [STEP_W-1:0] first [NB];
  logic [NB-1:0]     seen;
  logic [BW-1:0]     band;
  code_mode_e        mode_q;

  assign s_ready = (state == S_COLLECT);
  assign m_valid = (state == S_EMIT);
  assign m_last  = (state == S_EMIT) && (32'(band) == NB-1);

  always_comb begin
    if (mode_q == CODE_RATE)
      m_data = MASK_W'(32'(count[band]) << SCL);
    else if (seen[band])
      m_data = MASK_W'((T - 32'(first[band])) << SCL);
    else
      m_data = '0;
  end

  logic [BW-1:0] ev_band;
  assign ev_band = s_event.band[BW-1:0];

  always_ff @(posedge clk) begin
    if (state == S_COLLECT && s_valid && !s_event.eof) begin
      if (!seen[ev_band]) first[ev_band] <= s_event.step;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT; band <= '0; seen <= '0; mode_q <= CODE_RATE;
      for (int i = 0; i < NB; i++) count[i] <= '0;
    end else begin
      unique case (state)
        S_COLLECT: if (s_valid) begin
          if (s_event.eof) begin
            mode_q <= s_event.mode;
            band   <= '0;
            state  <= S_EMIT;
          end else begin
            count[ev_band] <= count[ev_band] + 1'b1;
            seen[ev_band]  <= 1'b1;
          end
        end
        S_EMIT: if (m_ready) begin
          count[band] <= '0;
          seen[band]  <= 1'b0;
          band <= band + 1'b1;
          if (32'(band) == NB-1) state <= S_COLLECT;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  a_no_extra: assert property (@(posedge clk) disable iff (!rst_n)
    s_valid && !s_event.eof |-> 32'(count[ev_band]) < T);
endmodule
