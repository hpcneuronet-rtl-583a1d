// noisy_data_buffer: on-chip store for one noisy audio clip.
//
// The evaluated build processes clips held as 1-D vectors of 48000 16-bit
// samples (3 s at 16 kHz). A host writes the clip through wr_en / wr_addr /
// wr_data; a 'start' pulse with a 'length' then plays samples 0..length-1
// out on m_* (valid/ready, one per clock when the sink is ready) into the
// STFT; 'busy' is high during playback. Depth 48000 is the paper's vector
// length; the write port and the play command are this design's choices.
// Memory is an array without reset: only written words are read.
module noisy_data_buffer
  import hpc_pkg::*;
#(
  parameter int DEPTH = 48000
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(DEPTH)-1:0]    wr_addr,
  input  logic signed [SAMPLE_W-1:0]  wr_data,
  input  logic                        start,
  input  logic [$clog2(DEPTH+1)-1:0]  length,
  output logic                        busy,
  output logic                        m_valid,
  input  logic                        m_ready,
  output logic signed [SAMPLE_W-1:0]  m_sample
);
  localparam int AW = $clog2(DEPTH);
  logic signed [SAMPLE_W-1:0] mem [DEPTH];
  logic [AW-1:0]              rd_addr;
  logic [$clog2(DEPTH+1)-1:0] remaining;

  always_ff @(posedge clk) if (wr_en) mem[wr_addr] <= wr_data;

  assign busy     = (remaining != '0);
  assign m_valid  = busy;
  assign m_sample = mem[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr <= '0; remaining <= '0;
    end else if (start && !busy) begin
      rd_addr   <= '0;
      remaining <= (32'(length) > DEPTH) ? ($clog2(DEPTH+1))'(DEPTH) : length;
    end else if (m_valid && m_ready) begin
      rd_addr   <= rd_addr + 1'b1;
      remaining <= remaining - 1'b1;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_sample));
endmodule
