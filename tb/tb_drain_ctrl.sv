// tb_drain_ctrl: self-checking test of the per-queue drain controller.
//
// The test plays the queue: it counts packets in, grants every request at
// once and checks the controller's timing against cycle counts worked out
// from the drain rules with a quiet interval Q (jitter off on dut0):
//   * the probe is requested Q+2 clocks after the last arrival;
//   * the half burst starts Q+2 clocks after the probe and sends HALF
//     packets one every other clock;
//   * the full burst starts Q+2 clocks after the last half-burst packet and
//     sends one packet per clock until the queue is empty;
//   * a bounce-back during the probe wait cancels the half burst and a new
//     probe follows Q+2 clocks after it;
//   * with arrivals that never pause, the deadline forces a probe.
// dut1 has a 4-bit jitter: its probe delay must lie in [Q+2, Q+17] and must
// not be the same on every attempt.
`timescale 1ns/1ps
module tb_drain_ctrl;
  import spillway_pkg::*;
  localparam int unsigned Q    = 100;
  localparam int unsigned HALF = 4;
  localparam int unsigned DL   = 2000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ---------------- dut0: no jitter ----------------
  logic arrival, q_empty, tx_req, tx_grant;
  drain_state_t state;
  logic ev_probe, ev_half, ev_full, ev_deadline;
  int qcnt = 0;

  drain_ctrl #(.QUIET_CYCLES(Q), .JITTER_W(0), .HALF_PKTS(HALF), .DEADLINE_CYCLES(DL)) dut0 (
    .clk, .rst_n, .arrival, .q_empty, .tx_req, .tx_grant, .state,
    .ev_probe, .ev_half, .ev_full, .ev_deadline);

  assign q_empty  = (qcnt == 0);
  assign tx_grant = tx_req;

  // send log: cycle of every granted packet
  longint sends [$];
  int n_deadline = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (tx_grant) sends.push_back(cyc);
      qcnt <= qcnt + int'(arrival) - int'(tx_grant);
      if (ev_deadline) n_deadline++;
    end
  end

  task automatic arrive(input int n);   // n back-to-back arrivals
    for (int i = 0; i < n; i++) begin
      @(negedge clk); arrival = 1;
    end
    @(negedge clk); arrival = 0;
  endtask

  // ---------------- dut1: 4-bit jitter ----------------
  logic arr1, req1;
  drain_state_t st1;
  logic e1p, e1h, e1f, e1d;
  int qcnt1 = 0;
  drain_ctrl #(.QUIET_CYCLES(Q), .JITTER_W(4), .HALF_PKTS(HALF), .DEADLINE_CYCLES(DL),
               .LFSR_SEED(16'h1234)) dut1 (
    .clk, .rst_n, .arrival(arr1), .q_empty(qcnt1 == 0), .tx_req(req1), .tx_grant(req1),
    .state(st1), .ev_probe(e1p), .ev_half(e1h), .ev_full(e1f), .ev_deadline(e1d));
  always @(posedge clk) if (rst_n) qcnt1 <= qcnt1 + int'(arr1) - int'(req1);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_last, t;
    arrival = 0; arr1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(state == DR_IDLE && !tx_req, "idle after reset");

    // ---- 1: full drain sequence of 10 packets ----
    arrive(10);
    t_last = cyc - 1;                     // cycle of the last arrival
    wait (sends.size() == 10);
    @(negedge clk);
    check(sends[0] - t_last == Q + 2, $sformatf("probe delay %0d", sends[0] - t_last));
    for (int i = 1; i <= HALF; i++)
      check(sends[i] - sends[0] == Q + 2 + 2 * (i - 1),
            $sformatf("half-burst packet %0d at +%0d", i, sends[i] - sends[0]));
    check(sends[HALF + 1] - sends[HALF] == Q + 2, "full burst delay");
    for (int i = HALF + 2; i < 10; i++)
      check(sends[i] - sends[i-1] == 1, "full burst one per clock");
    repeat (2) @(negedge clk);
    check(state == DR_IDLE, "idle after draining");
    check(qcnt == 0, "queue empty");

    // ---- 2: probe bounces back ----
    sends.delete();
    arrive(5);
    t_last = cyc - 1;
    wait (sends.size() == 1);             // the probe
    check(sends[0] - t_last == Q + 2, "second probe delay");
    repeat (Q / 2) @(negedge clk);
    check(state == DR_PROBE_WAIT, "waiting for the probe");
    arrive(1);                            // the probe comes back
    t = cyc - 1;
    @(negedge clk);
    check(state == DR_QUIET, "bounce resets to quiet");
    wait (sends.size() == 2);
    check(sends[1] - t == Q + 2, $sformatf("probe after bounce at +%0d", sends[1] - t));
    wait (sends.size() == 3);
    check(sends[2] - sends[1] == Q + 2, "half burst after the second probe");
    wait (qcnt == 0);
    repeat (3) @(negedge clk);

    // ---- 3: bounce during the half burst ----
    sends.delete();
    arrive(12);
    wait (sends.size() == 3);             // probe + two half-burst packets
    arrive(1);
    t = cyc - 1;
    @(negedge clk);
    check(state == DR_QUIET, "arrival during half burst resets");
    wait (sends.size() == 4);
    check(sends[3] - t == Q + 2, "probe again after half-burst bounce");
    wait (qcnt == 0);
    repeat (3) @(negedge clk);

    // ---- 4: arrivals never pause: the deadline forces progress ----
    sends.delete();
    n_deadline = 0;
    t = cyc;
    fork
      begin
        for (int i = 0; i < DL + 300; i++) begin
          @(negedge clk); arrival = 1;
        end
        @(negedge clk); arrival = 0;
      end
    join
    check(n_deadline >= 1, "deadline expired at least once");
    check(sends.size() >= 1, "deadline forced a probe");
    if (sends.size() >= 1)
      check(sends[0] - t >= DL && sends[0] - t <= DL + 5,
            $sformatf("forced probe at +%0d", sends[0] - t));
    wait (qcnt == 0);
    repeat (3) @(negedge clk);

    // ---- 5: jitter on dut1 ----
    begin
      longint d [$];
      bit differ;
      for (int r = 0; r < 8; r++) begin
        longint ta, tp;
        @(negedge clk); arr1 = 1;
        @(negedge clk); arr1 = 0;
        ta = cyc - 1;
        wait (req1);
        tp = cyc;
        d.push_back(tp - ta);
        wait (qcnt1 == 0);
        repeat (3) @(negedge clk);
      end
      differ = 0;
      foreach (d[i]) begin
        check(d[i] >= Q + 2 && d[i] <= Q + 2 + 15, $sformatf("jittered delay %0d", d[i]));
        if (d[i] != d[0]) differ = 1;
      end
      check(differ, "jitter varies between attempts");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
