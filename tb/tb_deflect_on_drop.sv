// tb_deflect_on_drop: self-checking test of the deflect-on-drop encapsulation.
//
// Dropped packets of three kinds are fed in: lossy remote packets (must go
// to the anycast address), packets drained by spillway k (priority 2,
// identifier k: must go by unicast to spillway k) and drained packets with
// an identifier outside the table (anycast fallback). Every output must
// carry GRE from the switch address, the deflection class, Not-ECT and the
// untouched inner header, in order, one clock after acceptance. Random
// output back-pressure checks that nothing is lost or duplicated.
`timescale 1ns/1ps
module tb_deflect_on_drop;
  import spillway_pkg::*;
  localparam int unsigned NSP = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ipv4_t switch_ip = 32'h0AFF_0201, anycast_ip = 32'h0AFF_0001;
  ipv4_t spill_ip [NSP];
  logic in_valid, in_ready, out_valid, out_ready, ev_unicast;
  pkt_t in_pkt, out_pkt;

  deflect_on_drop #(.NSP(NSP)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pkt_t  sent [$];
  ipv4_t want [$];
  int n_out = 0, n_uni = 0, n_uni_ev = 0;

  // output monitor
  always @(posedge clk) begin
    if (rst_n) begin
      if (ev_unicast) n_uni_ev++;
      if (out_valid && out_ready) begin
        pkt_t  e;
        ipv4_t d;
        e = sent.pop_front();
        d = want.pop_front();
        n_out++;
        check(out_pkt.gre, "GRE added");
        check(out_pkt.outer_src == switch_ip, "outer source");
        check(out_pkt.outer_dst == d, $sformatf("outer destination %h, expected %h", out_pkt.outer_dst, d));
        check(out_pkt.outer_prio == PRIO_DEFLECT, "deflection class");
        check(out_pkt.outer_ecn == ECN_NOT_ECT, "ECN disabled");
        check(out_pkt.hdr == e.hdr, "inner header intact");
      end
    end
  end

  initial begin
    for (int k = 0; k < NSP; k++) spill_ip[k] = 32'h0AFF_0100 + k;
    in_valid = 0; in_pkt = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      pkt_t p;
      int kind;
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        // previous one (if any) was accepted at the last edge
        p = '0;
        kind = $urandom_range(0, 2);
        p.hdr.src_ip = $urandom;
        p.hdr.dst_ip = $urandom;
        p.hdr.seq    = SEQ_W'(i);
        p.hdr.ecn    = ECN_ECT0;
        if (kind == 0) begin
          p.hdr.prio  = PRIO_LOSSY;
          p.hdr.ip_id = 16'($urandom_range(0, 3));
        end else if (kind == 1) begin
          p.hdr.prio  = PRIO_DRAINED;
          p.hdr.ip_id = 16'($urandom_range(0, NSP - 1));
        end else begin
          p.hdr.prio  = PRIO_DRAINED;
          p.hdr.ip_id = 16'(NSP + $urandom_range(0, 100));
        end
        in_valid = ($urandom_range(0, 4) != 0);
        in_pkt   = p;
      end
      #1;
      if (in_valid && in_ready) begin
        sent.push_back(in_pkt);
        if (in_pkt.hdr.prio == PRIO_DRAINED && in_pkt.hdr.ip_id < NSP) begin
          want.push_back(spill_ip[in_pkt.hdr.ip_id]);
          n_uni++;
        end else begin
          want.push_back(anycast_ip);
        end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    check(sent.size() == 0, "every accepted packet came out");
    check(n_uni > 0 && n_uni_ev == n_uni, $sformatf("sticky events %0d of %0d", n_uni_ev, n_uni));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
