// tb_delay_unit: random pushes and pops (random valid and ready) against a
// queue model; first fills the unit to full and checks that it then refuses
// data, then empties it, then runs mixed traffic. Checks data, 'last' and
// order on every pop.
module tb_delay_unit;
  localparam int W = 18, DEPTH = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last, full;
  logic [W-1:0] s_data, m_data;
  int checks = 0, failures = 0;
  delay_unit dut (.*);

  logic [W:0] q[$];
  logic [W:0] e;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic cycle(input bit pv, input bit pr);
    s_valid = pv; m_ready = pr;
    s_data = W'($urandom); s_last = $urandom_range(1, 0);
    #1;
    check(full == (q.size() == DEPTH) && s_ready == !full && m_valid == (q.size() != 0), "flags");
    if (m_valid && m_ready) begin
      check(q.size() > 0, "pop from empty");
      if (q.size() > 0) begin
        e = q.pop_front();
        check({m_last, m_data} == e, $sformatf("data got %h exp %h", {m_last, m_data}, e));
      end
    end
    if (s_valid && s_ready) q.push_back({s_last, s_data});
    @(posedge clk); #1;
  endtask

  initial begin
    s_valid = 0; m_ready = 0; s_data = '0; s_last = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    check(!m_valid, "empty after reset");
    repeat (DEPTH + 10) cycle(1, 0);
    check(full && !s_ready && q.size() == DEPTH, "full after DEPTH pushes");
    repeat (DEPTH + 10) cycle(0, 1);
    check(!m_valid && q.size() == 0, "empty again");
    repeat (5000) cycle($urandom_range(1, 0), $urandom_range(3, 0) != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
