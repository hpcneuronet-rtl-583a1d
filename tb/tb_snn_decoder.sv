// tb_snn_decoder: random spike trains (each band spikes in a random subset
// of the T steps, sent step by step as the encoder would) followed by an
// end-of-frame event, in rate and in time-to-first-spike mode; each band's
// gain is checked against count/T or (T - first step)/T, and m_last against
// band 255. A second frame checks that the counters were cleared.
module tb_snn_decoder;
  import hpc_pkg::*;
  localparam int NB = 256, T = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, m_valid, m_ready, m_last;
  spike_event_t s_event;
  logic [15:0] m_data;
  int checks = 0, failures = 0;
  snn_decoder dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic frame(input code_mode_e md);
    bit sp[NB][T];
    int cnt[NB], first[NB], expv;
    for (int b = 0; b < NB; b++) begin
      cnt[b] = 0; first[b] = -1;
      for (int t = 0; t < T; t++) begin
        sp[b][t] = (b % 4 == 0) ? 1'b0 : ($urandom_range(99, 0) < (b % 100));
        if (b == 5) sp[b][t] = 1'b1;
        if (sp[b][t]) begin cnt[b]++; if (first[b] < 0) first[b] = t; end
      end
    end
    for (int t = 0; t < T; t++)
      for (int b = 0; b < NB; b++)
        if (sp[b][t]) begin
          s_valid = 1; s_event = '{eof: 1'b0, mode: md, step: STEP_W'(t), band: 8'(b)};
          @(posedge clk); #1;
        end
    s_valid = 1; s_event = '{eof: 1'b1, mode: md, step: '0, band: '0};
    @(posedge clk); #1; s_valid = 0;
    for (int b = 0; b < NB; b++) begin
      m_ready = $urandom_range(1, 0);
      #1;
      while (!(m_valid && m_ready)) begin
        @(posedge clk); #1;
        m_ready = $urandom_range(1, 0);
        #1;
      end
      if (md == CODE_RATE) expv = cnt[b] * 32768 / T;
      else expv = (first[b] < 0) ? 0 : (T - first[b]) * 32768 / T;
      check(int'(m_data) == expv, $sformatf("mode %0d band %0d got %0d exp %0d", md, b, m_data, expv));
      check(m_last == (b == NB-1), "last");
      @(posedge clk); #1;
    end
    m_ready = 0;
  endtask

  initial begin
    s_valid = 0; m_ready = 0; s_event = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    frame(CODE_RATE);
    frame(CODE_TTFS);
    frame(CODE_RATE);
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
