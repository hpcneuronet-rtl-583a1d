// tb_snn_encoder: five frames (rate coding with leak, rate coding with
// rewritten weights, time-to-first-spike, rate coding with a recovery period
// of 3 steps and reset to zero, rate coding with a recovery period of 1 step
// and leak) of random band magnitudes; the
// expected event list comes from a behavioural LIF model in the testbench.
// Every event (band, step), the end-of-frame beat and its mode are checked,
// and so are the clocks per frame: NB to load plus NB*T to run when the
// sink is always ready.
module tb_snn_encoder;
  import hpc_pkg::*;
  localparam int NB = 256, T = 16, VW = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  code_mode_e mode;
  logic [VW-1:0] threshold;
  logic [3:0] leak_shift, refrac;
  logic reset_zero;
  logic w_we, s_valid, s_ready, m_valid, m_ready;
  logic [7:0] w_addr;
  logic [15:0] w_data;
  logic [MAG_W-1:0] s_mag;
  spike_event_t m_event;
  int checks = 0, failures = 0;
  snn_encoder dut (.*);

  int unsigned wts[NB];
  int unsigned mags[NB];
  int exp_band[$], exp_step[$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic model(input code_mode_e md, input int unsigned thr, input int lk,
                       input int rf, input bit rz);
    longint unsigned v[NB], cur[NB], a;
    int rest[NB];
    bit fired[NB];
    for (int b = 0; b < NB; b++) begin
      cur[b] = (longint'(mags[b]) * wts[b]) >> 8;
      if (cur[b] > 64'hffffff) cur[b] = 64'hffffff;
      v[b] = 0; fired[b] = 0; rest[b] = 0;
    end
    for (int t = 0; t < T; t++)
      for (int b = 0; b < NB; b++) begin
        if (md == CODE_RATE && rest[b] > 0) begin
          rest[b]--;
          continue;
        end
        if (md == CODE_RATE) a = v[b] - (lk == 0 ? 0 : (v[b] >> lk)) + cur[b];
        else a = v[b] + cur[b];
        if (a > 64'hffffff) a = 64'hffffff;
        if (a >= thr && !(md == CODE_TTFS && fired[b])) begin
          exp_band.push_back(b); exp_step.push_back(t);
          fired[b] = 1;
          v[b] = (md == CODE_RATE) ? (rz ? 0 : a - thr) : a;
          if (md == CODE_RATE) rest[b] = rf;
        end else v[b] = a;
      end
  endtask

  task automatic frame(input code_mode_e md, input int unsigned thr, input int lk, input bit stall,
                       input int rf = 0, input bit rz = 0);
    int nev, t0, b, nexp;
    for (b = 0; b < NB; b++) mags[b] = (b % 5 == 0) ? $urandom_range(200, 0) : $urandom_range(6000, 0);
    mags[3] = 0; mags[7] = 200000;    // never fires; fires every step (saturated)
    model(md, thr, lk, rf, rz);
    nexp = exp_band.size();
    mode = md; threshold = VW'(thr); leak_shift = 4'(lk); refrac = 4'(rf); reset_zero = rz;
    t0 = cyc;
    for (b = 0; b < NB; b++) begin
      s_valid = 1; s_mag = MAG_W'(mags[b]);
      @(posedge clk); #1;
    end
    s_valid = 0;
    nev = 0;
    forever begin
      m_ready = stall ? ($urandom_range(2, 0) == 0) : 1'b1;
      #1;
      if (m_valid && m_ready) begin
        if (m_event.eof) begin
          check(m_event.mode == md, "eof mode");
          check(nev == nexp && nexp > 0, $sformatf("event count %0d exp %0d", nev, nexp));
          if (!stall) check(cyc - t0 == NB + NB*T, $sformatf("frame clocks %0d", cyc - t0));
          @(posedge clk); #1;
          break;
        end
        nev++;
        if (exp_band.size() > 0) begin
          check(m_event.band == 8'(exp_band[0]) && m_event.step == STEP_W'(exp_step[0]),
                $sformatf("event got b%0d s%0d exp b%0d s%0d", m_event.band, m_event.step, exp_band[0], exp_step[0]));
          void'(exp_band.pop_front()); void'(exp_step.pop_front());
        end else check(0, "unexpected event");
      end
      @(posedge clk); #1;
    end
    exp_band.delete(); exp_step.delete();
    m_ready = 0;
  endtask

  initial begin
    s_valid = 0; m_ready = 0; w_we = 0; w_addr = 0; w_data = 0; s_mag = 0;
    mode = CODE_RATE; threshold = 0; leak_shift = 0; refrac = 0; reset_zero = 0;
    for (int b = 0; b < NB; b++) wts[b] = 256;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    frame(CODE_RATE, 4000, 3, 1'b0);
    for (int b = 0; b < NB; b += 3) begin
      wts[b] = $urandom_range(1024, 0);
      w_we = 1; w_addr = 8'(b); w_data = 16'(wts[b]); @(posedge clk); #1;
    end
    w_we = 0;
    frame(CODE_RATE, 2500, 0, 1'b1);
    frame(CODE_TTFS, 9000, 2, 1'b1);
    frame(CODE_RATE, 2500, 0, 1'b0, 3, 1'b1);
    frame(CODE_RATE, 3000, 2, 1'b1, 1, 1'b0);
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
