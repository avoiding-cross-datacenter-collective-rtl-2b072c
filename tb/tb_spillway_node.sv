// tb_spillway_node: self-checking test of one spillway node.
//
// The testbench computes each destination's queue with its own Toeplitz
// function and tracks every packet by sequence number. Checks:
//   1. a batch of deflected packets is held for the quiet interval and then
//      drained completely: the first packet leaves Q+3 clocks after the last
//      arrival (one clock of receive stage, then the drain controller's Q+2);
//      every packet leaves exactly once, with the GRE header gone, the
//      spillway identifier in the IPv4 identification field, priority 2 and
//      the rest of its header unchanged; the pool is empty afterwards;
//   2. queue isolation: while one destination keeps receiving deflections,
//      another destination's packets still drain on their own schedule;
//   3. a packet for another address is rejected;
//   4. a full pool drops and counts the excess packets.
`timescale 1ns/1ps
module tb_spillway_node;
  import spillway_pkg::*;
  localparam int unsigned NQ = 4, POOL = 64, Q = 50, HALF = 2, DL = 100000;
  localparam logic [15:0] ID = 16'd3;
  localparam logic [63:0] KEY = 64'h6d5a56da_255b0ec2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  ipv4_t my_ip = 32'h0AFF_0103, anycast_ip = 32'h0AFF_0001;
  logic rx_valid, tx_valid, tx_ready;
  pkt_t rx_pkt, tx_pkt;
  logic [$clog2(POOL+1)-1:0] occupancy;
  drain_state_t q_state [NQ];
  logic ev_drop, ev_reject, ev_probe, ev_half, ev_full, ev_deadline;

  spillway_node #(.NQ(NQ), .POOL_ENTRIES(POOL), .QUIET_CYCLES(Q), .JITTER_W(0),
                  .HALF_PKTS(HALF), .DEADLINE_CYCLES(DL), .SPILLWAY_ID(ID)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  function automatic int qof(input ipv4_t a);
    logic [63:0] k;
    logic [31:0] h;
    h = 0; k = KEY;
    for (int i = 31; i >= 0; i--) begin
      if (a[i]) h ^= k[63:32];
      k = k << 1;
    end
    return int'(h % NQ);
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pkt_t   expect_hdr [int];     // seq -> packet as sent
  longint tx_time [int];        // seq -> cycle it left
  longint rx_time [int];        // seq -> cycle it arrived
  ipv4_t  dst_of [int];
  int n_drop = 0, n_rej = 0, n_probe = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ev_drop) n_drop++;
      if (ev_reject) n_rej++;
      if (ev_probe) n_probe++;
      if (tx_valid && tx_ready) begin
        int s;
        pkt_t e;
        s = int'(tx_pkt.hdr.seq);
        check(expect_hdr.exists(s), $sformatf("unknown or repeated packet %0d", s));
        if (expect_hdr.exists(s)) begin
          e = expect_hdr[s];
          e.gre = 0; e.outer_src = 0; e.outer_dst = 0; e.outer_prio = 0; e.outer_ecn = ECN_NOT_ECT;
          e.hdr.ip_id = ID;
          e.hdr.prio  = PRIO_DRAINED;
          check(tx_pkt == e, $sformatf("rewritten packet %0d", s));
          expect_hdr.delete(s);
        end
        tx_time[s] = cyc;
      end
    end
  end

  int seq = 0;
  task automatic send(input ipv4_t dst, input ipv4_t outer, output int s);
    pkt_t p;
    @(negedge clk);
    p = '0;
    p.gre = 1; p.outer_dst = outer; p.outer_src = 32'h0AFF_0201; p.outer_prio = PRIO_DEFLECT;
    p.hdr.src_ip = 32'h0B00_0001; p.hdr.dst_ip = dst; p.hdr.prio = PRIO_LOSSY;
    p.hdr.ecn = ECN_ECT0; p.hdr.seq = SEQ_W'(seq); p.hdr.ip_id = 16'hBEEF; p.hdr.len = 14'd4096;
    p.hdr.dst_qp = 24'h000123;
    rx_pkt = p; rx_valid = 1;
    if (outer == my_ip || outer == anycast_ip) expect_hdr[seq] = p;
    s = seq;
    dst_of[seq] = dst;
    seq++;
    @(negedge clk);
    rx_valid = 0;
    rx_time[s] = cyc - 1;
  endtask

  // destinations in two different queues
  ipv4_t dA, dB;
  initial begin
    int s, last_s;
    longint t_last;
    rx_valid = 0; rx_pkt = '0; tx_ready = 1;
    dA = 32'h0A01_0001;
    dB = dA;
    for (int i = 2; i < 200 && qof(dB) == qof(dA); i++) dB = 32'h0A01_0000 + i;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1: batch held, then drained ----
    for (int i = 0; i < 8; i++) send(32'h0A01_0000 + i, (i % 2) ? anycast_ip : my_ip, s);
    @(negedge clk);
    check(occupancy == 8, "8 packets buffered");
    repeat (Q) @(negedge clk);
    wait (expect_hdr.size() == 0);
    for (int q = 0; q < NQ; q++) begin
      longint first, last_rx;
      first = -1;
      last_rx = -1;
      foreach (tx_time[k]) if (qof(dst_of[k]) == q) begin
        if (first < 0 || tx_time[k] < first) first = tx_time[k];
        if (rx_time[k] > last_rx) last_rx = rx_time[k];
      end
      if (first >= 0)
        check(first - last_rx == Q + 3, $sformatf("queue %0d: first packet %0d clocks after its last arrival", q, first - last_rx));
    end
    repeat (3) @(negedge clk);
    check(occupancy == 0, "pool empty after the drain");
    check(n_probe >= 1, "probes counted");

        // ---- 2: isolation between queues ----
    tx_time.delete();
    // destination A gets a deflection every 10 clocks, destination B
    // three packets once, early on
    for (int i = 0; i < 40; i++) begin
      send(dA, anycast_ip, s);
      if (i >= 2 && i <= 4) send(dB, anycast_ip, last_s);
      else repeat (2) @(negedge clk);
      repeat (6) @(negedge clk);
      if (i == 30) begin
        int a_sent;
        a_sent = 0;
        check(tx_time.exists(last_s), "B drained while A is busy");
        if (tx_time.exists(last_s))
          check(tx_time[last_s] - rx_time[last_s] <= 2 * Q + 12, "B drain delay");
        foreach (tx_time[k]) if (qof(dst_of[k]) == qof(dA)) a_sent++;
        check(a_sent == 0, "A held while its deflections continue");
      end
    end
    wait (expect_hdr.size() == 0);
    repeat (3) @(negedge clk);

        // ---- 3: rejected packet ----
    send(dA, 32'h0AFF_0109, s);
    repeat (2) @(negedge clk);
    check(n_rej == 1, "reject counted");

        // ---- 4: pool overflow ----
    tx_ready = 0;
    for (int i = 0; i < POOL + 4; i++) send(32'h0A02_0000 + i, anycast_ip, s);
    repeat (2) @(negedge clk);
    check(n_drop == 4, $sformatf("drops counted %0d", n_drop));
    check(occupancy == POOL, "pool full");
    // the dropped ones will never come out
    for (int i = seq - 4; i < seq; i++) expect_hdr.delete(i);
    tx_ready = 1;
    wait (expect_hdr.size() == 0);
    repeat (3) @(negedge clk);
    check(occupancy == 0, "pool empty at the end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
