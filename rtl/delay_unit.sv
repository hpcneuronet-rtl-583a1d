// delay_unit: first-in first-out delay line for one of the bypass paths.
//
// While the spiking network works on a frame, that frame's magnitudes and
// phases wait here so that they reach the multiplier together with the
// network's output for the same band. The architecture has one such unit on
// the magnitude path and one on the phase path. The delay is not a fixed
// number of clocks but "until the consumer takes it", so the unit is a FIFO:
// W-bit words plus a 'last' flag, DEPTH words (default two frames of 256
// bands, this design's choice), valid/ready on both sides, memory as an
// array. Data written in one clock can be read in the next.
module delay_unit #(
  parameter int W     = 18,
  parameter int DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  input  logic         s_last,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data,
  output logic         m_last,
  output logic         full
);
  localparam int AW = $clog2(DEPTH);
  logic [W:0]    mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign full    = (32'(count) == DEPTH);
  assign s_ready = !full;
  assign m_valid = (count != '0);
  assign {m_last, m_data} = mem[rd_ptr];
  assign push = s_valid && s_ready;
  assign pop  = m_valid && m_ready;

  always_ff @(posedge clk) if (push) mem[wr_ptr] <= {s_last, s_data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; count <= '0;
    end else begin
      if (push) wr_ptr <= (32'(wr_ptr) == DEPTH-1) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (32'(rd_ptr) == DEPTH-1) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(full && push));
endmodule
