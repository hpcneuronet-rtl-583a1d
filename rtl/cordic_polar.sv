// cordic_polar: splits each complex band into magnitude and phase.
//
// The network looks at the magnitude of each band, while the phase bypasses
// it and is put back afterwards (the "Magnitude" and "Phase" paths of the
// architecture). This module computes both with an iterative CORDIC in
// vectoring mode, one band at a time: the vector is first turned into the
// right half-plane (negating it adds pi to the angle), then 16 shift-and-add
// micro-rotations (on values with 4 extra fraction bits)
// drive its imaginary part to zero while summing the
// rotation angles. Outputs: mag = K*|X| with K ~ 1.6468 (the CORDIC gain is
// left in and removed once in mask_combine), 18 bits unsigned; phase as a
// 16-bit angle with 2^15 == pi. The CORDIC method, the widths and leaving the
// gain in are this design's choices; the paper gives only the function.
// Handshake: s_valid/s_ready in, m_valid/m_ready out, 'last' passed along.
// Timing: one band every CORDIC_ITER + 2 = 18 clocks with a ready sink.
module cordic_polar
  import hpc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   s_valid,
  output logic   s_ready,
  input  cplx_t  s_data,
  input  logic   s_last,
  output logic   m_valid,
  input  logic   m_ready,
  output polar_t m_data,
  output logic   m_last
);
  localparam int FR = 4;               // fraction guard bits
  localparam int XW = 19 + FR;
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;
  logic signed [XW-1:0] x, y;
  logic signed [15:0]   z;
  logic [$clog2(CORDIC_ITER)-1:0] it;
  logic last_q;

  assign s_ready = (state == S_IDLE);
  assign m_valid = (state == S_OUT);
  assign m_data  = '{mag: MAG_W'((x + XW'(2**(FR-1))) >>> FR), phase: z};
  assign m_last  = last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; x <= '0; y <= '0; z <= '0; it <= '0; last_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (s_valid) begin
          last_q <= s_last;
          it     <= '0;
          state  <= S_RUN;
          if (s_data.re < 0) begin
            x <= -(XW'(s_data.re) <<< FR); y <= -(XW'(s_data.im) <<< FR); z <= 16'sh8000;  // +pi
          end else begin
            x <= XW'(s_data.re) <<< FR;  y <= XW'(s_data.im) <<< FR;  z <= '0;
          end
        end
        S_RUN: begin
          if (y >= 0) begin
            x <= x + (y >>> it); y <= y - (x >>> it); z <= z + CORDIC_ATAN[it];
          end else begin
            x <= x - (y >>> it); y <= y + (x >>> it); z <= z - CORDIC_ATAN[it];
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
