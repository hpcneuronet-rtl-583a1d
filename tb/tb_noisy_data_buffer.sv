// tb_noisy_data_buffer: writes a random clip into the full 48000-word
// buffer, plays back a part of it under a randomly stalling sink and checks
// every sample, the count, 'busy', and that a start during playback is ignored.
module tb_noisy_data_buffer;
  localparam int DEPTH = 48000, LEN = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, start, busy, m_valid, m_ready;
  logic [15:0] wr_addr, length;
  logic signed [15:0] wr_data, m_sample;
  int checks = 0, failures = 0;
  noisy_data_buffer dut (.*);

  logic signed [15:0] ref_mem [DEPTH];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int got;
    wr_en = 0; start = 0; m_ready = 0; wr_addr = 0; wr_data = 0; length = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    check(!busy && !m_valid, "idle after reset");
    for (int i = 0; i < DEPTH; i += (i < LEN ? 1 : 97)) begin
      ref_mem[i] = 16'($urandom);
      wr_en = 1; wr_addr = 16'(i); wr_data = ref_mem[i];
      @(posedge clk); #1;
    end
    wr_en = 0;
    start = 1; length = 16'(LEN); @(posedge clk); #1; start = 0;
    got = 0;
    while (busy) begin
      m_ready = $urandom_range(2, 0) != 0;
      if (got == 100) begin start = 1; length = 16'(5); end
      #1;
      if (m_valid && m_ready) begin
        check(m_sample == ref_mem[got], $sformatf("sample %0d", got));
        got++;
      end
      @(posedge clk); #1; start = 0;
    end
    check(got == LEN, $sformatf("played %0d", got));
    // last word of the memory
    wr_en = 1; wr_addr = 16'(DEPTH-1); wr_data = 16'sh1234; @(posedge clk); #1; wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
