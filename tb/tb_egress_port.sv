// tb_egress_port: self-checking test of the leaf egress port.
//
// A cycle-level reference model written in the testbench (three queues, a
// shared-buffer count, the admission rule, strict priority 3 > 2 > 1 and a
// mirror FIFO) runs beside the port. Random traffic of all three classes
// with random NIC back-pressure is applied, first light, then heavy enough
// to overflow the lossy limit, then none so that everything drains. Each
// clock the NIC output, lossless_ready and the mirror output are compared
// with the model. At the end it checks that tail drops happened, that no
// lossless packet was ever dropped and that every packet came out either to
// the NIC or to the mirror.
`timescale 1ns/1ps
module tb_egress_port;
  import spillway_pkg::*;
  localparam int unsigned BUF = 32, LIM = 12, MD = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lossless_valid, lossless_ready, drained_valid, lossy_valid;
  logic out_valid, out_ready, drop_valid, drop_ready, ev_tail_drop, ev_mirror_loss;
  pkt_t lossless_pkt, drained_pkt, lossy_pkt, out_pkt, drop_pkt;
  logic [$clog2(BUF+1)-1:0] occupancy;

  egress_port #(.BUF_PKTS(BUF), .LOSSY_LIMIT(LIM), .MIRROR_DEPTH(MD)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pkt_t mq [3][$];
  pkt_t mm [$];
  bit ll_taken = 0;
  int n_in = 0, n_out = 0, n_mir = 0, n_lost = 0, n_ll_dropped = 0, n_drop_ev = 0;

  function automatic int tot();
    return mq[0].size() + mq[1].size() + mq[2].size();
  endfunction

  // reference model, updated at every edge from the inputs before the edge
  always @(posedge clk) begin
    if (rst_n) begin
      int t, t1, t2;
      bit ll_acc, dr_acc, ly_acc;
      int ndrop, space;
      t = tot();
      ll_acc = lossless_valid && (t < BUF);
      t1 = t + int'(ll_acc);
      dr_acc = drained_valid && (t1 < LIM);
      t2 = t1 + int'(dr_acc);
      ly_acc = lossy_valid && (t2 < LIM);
      // mirror
      space = MD - mm.size() + int'(mm.size() > 0 && drop_ready);
      if (mm.size() > 0 && drop_ready) begin void'(mm.pop_front()); n_mir++; end
      if (drained_valid && !dr_acc) begin
        if (space > 0) begin mm.push_back(drained_pkt); space--; end else n_lost++;
      end
      if (lossy_valid && !ly_acc) begin
        if (space > 0) begin mm.push_back(lossy_pkt); space--; end else n_lost++;
      end
      if (ev_tail_drop) n_drop_ev++;
      // output
      if (out_ready) begin
        if (mq[0].size())      begin void'(mq[0].pop_front()); n_out++; end
        else if (mq[1].size()) begin void'(mq[1].pop_front()); n_out++; end
        else if (mq[2].size()) begin void'(mq[2].pop_front()); n_out++; end
      end
      ll_taken = ll_acc;
      if (ll_acc) mq[0].push_back(lossless_pkt);
      if (dr_acc) mq[1].push_back(drained_pkt);
      if (ly_acc) mq[2].push_back(lossy_pkt);
      n_in += int'(lossless_valid && ll_acc) + int'(drained_valid) + int'(lossy_valid);
    end
  end

  function automatic pkt_t mk(input int cls, input int s);
    pkt_t p;
    p = '0;
    p.hdr.prio = (cls == 0) ? PRIO_LOSSLESS : (cls == 1) ? PRIO_DRAINED : PRIO_LOSSY;
    p.hdr.seq  = SEQ_W'(s);
    p.hdr.dst_ip = $urandom;
    return p;
  endfunction

  initial begin
    int s = 0;
    lossless_valid = 0; drained_valid = 0; lossy_valid = 0;
    lossless_pkt = '0; drained_pkt = '0; lossy_pkt = '0;
    out_ready = 1; drop_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int load;
      @(negedge clk);
      // compare with the model (state after the last edge)
      check(lossless_ready == (tot() < BUF), "lossless_ready");
      check(out_valid == (tot() > 0), "out_valid");
      if (mq[0].size())      check(out_pkt == mq[0][0], "output lossless head");
      else if (mq[1].size()) check(out_pkt == mq[1][0], "output drained head");
      else if (mq[2].size()) check(out_pkt == mq[2][0], "output lossy head");
      check(drop_valid == (mm.size() > 0), "mirror valid");
      if (mm.size()) check(drop_pkt == mm[0], "mirror packet");
      check(occupancy == tot(), "occupancy");
      // new stimulus
      load = (i < 500) ? 20 : (i < 2400) ? 85 : 0;
      if (!lossless_valid || ll_taken) begin
        lossless_valid = ($urandom_range(0, 99) < load);
        lossless_pkt = mk(0, s++);
      end
      drained_valid = ($urandom_range(0, 99) < load / 2);
      drained_pkt = mk(1, s++);
      lossy_valid = ($urandom_range(0, 99) < load);
      lossy_pkt = mk(2, s++);
      out_ready = ($urandom_range(0, 99) < 60);
      drop_ready = ($urandom_range(0, 99) < 80);
      if (i >= 2400) begin out_ready = 1; drop_ready = 1; end
    end
    check(n_drop_ev > 0, "tail drops happened");
    check(n_lost > 0, "mirror overflow exercised");
    check(tot() == 0 && mm.size() == 0, "everything drained");
    check(n_in == n_out + n_mir + n_lost, $sformatf("conservation in=%0d out=%0d mir=%0d lost=%0d", n_in, n_out, n_mir, n_lost));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
