// mask_combine: the multiplier where magnitude, network output and phase meet.
//
// For each band it takes the delayed magnitude and phase (one polar_t beat)
// and the decoded SNN value for the same band (a gain in Q1.15, 32768 == 1.0),
// and produces the cleaned complex band: |X| * gain * e^(j*phase). The
// magnitude is multiplied by the gain and by 1/K^2, which removes the CORDIC
// gain of the magnitude path and of the rotation below, and an iterative
// CORDIC in rotation mode turns (r, 0) by the phase (after a half-turn when
// the phase lies outside +-pi/2). The rotation carries 4 extra fraction bits; output components are
// rounded and saturated to 16 bits. The two input streams are joined: a band starts only
// when both have a beat. Multiply-then-recombine follows the architecture
// figure; the CORDIC method and number formats are this design's.
// Timing: one band every CORDIC_ITER + 2 = 18 clocks with a ready sink.
module mask_combine
  import hpc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                p_valid,
  output logic                p_ready,
  input  polar_t              p_data,
  input  logic                p_last,
  input  logic                g_valid,
  output logic                g_ready,
  input  logic [MASK_W-1:0]   g_data,
  output logic                m_valid,
  input  logic                m_ready,
  output cplx_t               m_data,
  output logic                m_last
);
  localparam int FR = 4;               // fraction guard bits
  localparam int XW = 19 + FR;
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;
  logic signed [XW-1:0] x, y;
  logic signed [15:0]   z;
  logic [$clog2(CORDIC_ITER)-1:0] it;
  logic last_q;

  // r = mag * gain / 2^15 * (1/K^2)
  logic [MAG_W+MASK_W-1:0] prod1;
  logic [MAG_W-1:0]        r1;
  logic [MAG_W+15:0]       prod2;
  logic [MAG_W-1:0]        r;
  always_comb begin
    prod1 = (MAG_W+MASK_W)'(p_data.mag) * (MAG_W+MASK_W)'(g_data);
    r1    = MAG_W'(prod1 >> 15);
    prod2 = (MAG_W+16)'(r1) * (MAG_W+16)'(CORDIC_INVK2);
    r     = MAG_W'(prod2 >> 15);
  end

  logic go;
  assign go      = (state == S_IDLE) && p_valid && g_valid;
  assign p_ready = go;
  assign g_ready = go;
  assign m_valid = (state == S_OUT);
  assign m_data  = '{re: sat16(48'(x + XW'(2**(FR-1))) >>> FR), im: sat16(48'(y + XW'(2**(FR-1))) >>> FR)};
  assign m_last  = last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; x <= '0; y <= '0; z <= '0; it <= '0; last_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (go) begin
          last_q <= p_last;
          it     <= '0;
          state  <= S_RUN;
          y      <= '0;
          if (p_data.phase > 16'sd16384 || p_data.phase < -16'sd16384) begin
            x <= -(XW'(r) <<< FR); z <= p_data.phase + 16'sh8000;   // half-turn first
          end else begin
            x <= XW'(r) <<< FR;  z <= p_data.phase;
          end
        end
        S_RUN: begin
          if (z >= 0) begin
            x <= x - (y >>> it); y <= y + (x >>> it); z <= z - CORDIC_ATAN[it];
          end else begin
            x <= x + (y >>> it); y <= y - (x >>> it); z <= z + CORDIC_ATAN[it];
          end
          it <= it + 1'b1;
          if (32'(it) == CORDIC_ITER-1) state <= S_OUT;
        end
        S_OUT: if (m_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
