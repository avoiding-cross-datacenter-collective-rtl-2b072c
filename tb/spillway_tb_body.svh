// Shared body of the end-to-end testbenches of spillway_system.
//
// The including module defines the DUT parameters as localparams (P_*), the
// traffic knobs below, instantiates the DUT as "dut" and then includes this
// file. Scenario, after the paper's microbenchmark: a lossy cross-DC flow
// (REMOTE_PKTS packets, one every REMOTE_GAP clocks, every CE_EVERY-th
// one ECN-CE-marked) toward two receiver addresses behind one NIC port
// collides with lossless local bursts on that port: LOCAL_BURSTS bursts of
// LOCAL_PKTS back-to-back packets, the first at LOCAL_START and the next
// ones every LOCAL_PERIOD clocks. Checks:
//   * every remote packet reaches the NIC exactly once (nothing lost in the
//     destination data centre), local packets in order and complete;
//   * remote packets that came through a spillway carry priority 2 and a
//     spillway identifier; marked packets arrive with ECN cleared and one
//     CNP was produced per marked packet;
//   * no mirror loss, no spillway drop, no misrouted deflection;
//   * each mechanism happened at least once: tail drop, deflection by
//     anycast spraying to every spillway, sticky unicast re-deflection,
//     probe, half burst, full burst, fast CNP, and (when REQUIRE_DEADLINE)
//     the deadline.
// It also prints the completion time of the cross-DC flow against the
// ideal, the time the port needs to carry all remote and local packets.
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic remote_valid, local_valid, local_ready, nic_valid, nic_ready, cnp_valid;
  pkt_t remote_pkt, local_pkt, nic_pkt, cnp_pkt;
  logic [$clog2(P_BUF+1)-1:0]  leaf_occupancy;
  logic [$clog2(P_POOL+1)-1:0] spill_occupancy [P_NSP];
  logic ev_tail_drop, ev_mirror_loss, ev_deflect_sticky, ev_sprayed, ev_route_unicast, ev_route_unknown;
  logic [P_NSP-1:0] ev_spill_drop, ev_spill_reject, ev_probe, ev_half, ev_full, ev_deadline;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- statistics ----------------
  int n_tail = 0, n_mloss = 0, n_sticky = 0, n_spray = 0, n_uni = 0, n_unknown = 0;
  int n_sdrop = 0, n_srej = 0, n_probe = 0, n_half = 0, n_full = 0, n_dead = 0, n_cnp = 0;
  int sp_peak [P_NSP];
  int n_remote_rx = 0, n_local_rx = 0, n_via_spill = 0, n_marked = 0, n_cleared = 0;
  int next_local = 0;
  bit got [P_REMOTE];

  always @(posedge clk) begin
    if (rst_n) begin
      n_tail    += int'(ev_tail_drop);
      n_mloss   += int'(ev_mirror_loss);
      n_sticky  += int'(ev_deflect_sticky);
      n_spray   += int'(ev_sprayed);
      n_uni     += int'(ev_route_unicast);
      n_unknown += int'(ev_route_unknown);
      n_sdrop   += $countones(ev_spill_drop);
      n_srej    += $countones(ev_spill_reject);
      n_probe   += $countones(ev_probe);
      n_half    += $countones(ev_half);
      n_full    += $countones(ev_full);
      n_dead    += $countones(ev_deadline);
      for (int k = 0; k < P_NSP; k++)
        if (int'(spill_occupancy[k]) > sp_peak[k]) sp_peak[k] = int'(spill_occupancy[k]);
      if (cnp_valid) begin
        n_cnp++;
        check(cnp_pkt.hdr.opcode == OPC_CNP && cnp_pkt.hdr.dst_ip == REMOTE_SRC, "CNP to the sender");
      end
      if (nic_valid && nic_ready) begin
        if (nic_pkt.hdr.prio == PRIO_LOSSLESS) begin
          check(int'(nic_pkt.hdr.seq) == next_local, "local packets in order");
          next_local++;
          n_local_rx++;
        end else begin
          int s;
          s = int'(nic_pkt.hdr.seq);
          check(s < P_REMOTE && !got[s], $sformatf("remote packet %0d delivered once", s));
          if (s < P_REMOTE) got[s] = 1;
          n_remote_rx++;
          check(!nic_pkt.gre, "no GRE header at the NIC");
          if (nic_pkt.hdr.prio == PRIO_DRAINED) begin
            n_via_spill++;
            check(nic_pkt.hdr.ip_id < P_NSP, "drained packet carries a spillway identifier");
          end else begin
            check(nic_pkt.hdr.prio == PRIO_LOSSY, "remote class");
          end
          if (s % CE_EVERY == 0) begin
            n_marked++;
            if (nic_pkt.hdr.ecn == ECN_ECT0) n_cleared++;
          end
        end
      end
    end
  end

  // ---------------- sources ----------------
  bit local_taken = 0;
  always @(posedge clk) local_taken <= local_valid && local_ready;

  longint fct, ideal;

  initial begin
    int sent_local = 0, sent_remote = 0;
    foreach (sp_peak[k]) sp_peak[k] = 0;
    foreach (got[i]) got[i] = 0;
    remote_valid = 0; remote_pkt = '0; local_valid = 0; local_pkt = '0; nic_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (sent_remote < P_REMOTE || sent_local < LOCAL_PKTS * LOCAL_BURSTS || local_valid) begin
      @(negedge clk);
      // local lossless burst: hold a packet until it is taken
      if (local_valid && local_taken) begin
        sent_local++;
        local_valid = 0;
      end
      if (!local_valid && sent_local < LOCAL_PKTS * LOCAL_BURSTS &&
          cyc >= longint'(LOCAL_START) + longint'(sent_local / LOCAL_PKTS) * longint'(LOCAL_PERIOD)) begin
        local_pkt = '0;
        local_pkt.hdr.src_ip = 32'h0A02_0063;
        local_pkt.hdr.dst_ip = 32'h0A02_0001;
        local_pkt.hdr.prio   = PRIO_LOSSLESS;
        local_pkt.hdr.ecn    = ECN_ECT0;
        local_pkt.hdr.opcode = OPC_RC_SEND_ONLY;
        local_pkt.hdr.seq    = SEQ_W'(sent_local);
        local_pkt.hdr.len    = 14'd4096;
        local_valid = 1;
      end
      // remote lossy flow
      remote_valid = 0;
      if (sent_remote < P_REMOTE && cyc >= REMOTE_START && (cyc % REMOTE_GAP) == 0) begin
        remote_pkt = '0;
        remote_pkt.hdr.src_ip = REMOTE_SRC;
        remote_pkt.hdr.dst_ip = (sent_remote % 2) ? 32'h0A02_0001 : 32'h0A02_0002;
        remote_pkt.hdr.prio   = PRIO_LOSSY;
        remote_pkt.hdr.ecn    = (sent_remote % CE_EVERY == 0) ? ECN_CE : ECN_ECT0;
        remote_pkt.hdr.opcode = OPC_RC_SEND_ONLY;
        remote_pkt.hdr.dst_qp = 24'h000100 + QPN_W'(sent_remote % 16);
        remote_pkt.hdr.seq    = SEQ_W'(sent_remote);
        remote_pkt.hdr.ip_id  = 16'h0000 + 16'(sent_remote);
        remote_pkt.hdr.len    = 14'd4096;
        remote_valid = 1;
        sent_remote++;
      end
    end
    @(negedge clk);
    remote_valid = 0;
    // wait until every remote packet has arrived (or the watchdog fires)
    while (n_remote_rx < P_REMOTE) @(negedge clk);
    fct = cyc - longint'(REMOTE_START);
    ideal = longint'(P_REMOTE) * longint'(REMOTE_GAP);
    if (longint'(P_REMOTE + LOCAL_PKTS * LOCAL_BURSTS) > ideal) ideal = longint'(P_REMOTE + LOCAL_PKTS * LOCAL_BURSTS);
    repeat (10) @(negedge clk);

    check(n_local_rx == LOCAL_PKTS * LOCAL_BURSTS, $sformatf("local packets delivered %0d", n_local_rx));
    check(n_remote_rx == P_REMOTE, "every remote packet delivered");
    check(n_mloss == 0, "no mirror loss");
    check(n_sdrop == 0, "no spillway drop");
    check(n_unknown == 0 && n_srej == 0, "no misrouted deflection");
    check(n_cnp == n_marked && n_cleared == n_marked, $sformatf("fast CNP: %0d CNPs, %0d marked, %0d cleared", n_cnp, n_marked, n_cleared));
    for (int k = 0; k < P_NSP; k++) check(sp_peak[k] > 0, $sformatf("spillway %0d used", k));
    $display("mechanisms: tail_drop=%0d sprayed=%0d sticky_redeflect=%0d unicast_route=%0d probe=%0d half_burst=%0d full_burst=%0d deadline=%0d cnp=%0d via_spillway=%0d",
             n_tail, n_spray, n_sticky, n_uni, n_probe, n_half, n_full, n_dead, n_cnp, n_via_spill);
    $display("cross-DC flow completion: %0d clocks, ideal %0d clocks", fct, ideal);
    $display("spillway peak occupancy: %0d %0d %0d %0d, finished at cycle %0d",
             sp_peak[0], sp_peak[P_NSP > 1 ? 1 : 0], sp_peak[P_NSP > 2 ? 2 : 0], sp_peak[P_NSP > 3 ? 3 : 0], cyc);
    check(n_tail > 0, "mechanism: tail drop");
    check(n_spray > 0, "mechanism: anycast deflection");
    check(n_via_spill > 0, "mechanism: reinjection from a spillway");
    check(n_probe > 0, "mechanism: probe");
    check(n_half > 0, "mechanism: half burst");
    check(n_full > 0, "mechanism: full burst");
    check(n_cnp > 0, "mechanism: fast CNP");
    if (REQUIRE_BOUNCE) begin
      check(n_sticky > 0 && n_uni == n_sticky, "mechanism: sticky unicast re-deflection");
    end
    if (REQUIRE_DEADLINE) check(n_dead > 0, "mechanism: deadline");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
