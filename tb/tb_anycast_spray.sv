// tb_anycast_spray: self-checking test of the exit switch's spillway
// forwarding.
//
// A stream mixes anycast packets, unicast packets for each spillway and
// packets for an unknown address. Checks: anycast packets go to ports
// 0,1,2,3,0,... in turn (round robin), unicast packets to their own port,
// unknown ones nowhere (counted), the packet is passed unchanged one clock
// later, and over many anycast packets every port gets the same share.
`timescale 1ns/1ps
module tb_anycast_spray;
  import spillway_pkg::*;
  localparam int unsigned NSP = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ipv4_t anycast_ip = 32'h0AFF_0001;
  ipv4_t spill_ip [NSP];
  logic in_valid, ev_sprayed, ev_unicast, ev_unknown;
  pkt_t in_pkt, out_pkt;
  logic [NSP-1:0] out_valid;

  anycast_spray #(.NSP(NSP)) dut (.*);

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

  int per_port [NSP];
  initial begin
    int next_any;
    for (int k = 0; k < NSP; k++) begin spill_ip[k] = 32'h0AFF_0100 + k; per_port[k] = 0; end
    in_valid = 0; in_pkt = '0;
    next_any = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      pkt_t p;
      int kind, k;
      @(negedge clk);
      p = '0;
      kind = (i < 1000) ? $urandom_range(0, 2) : 0;
      k = $urandom_range(0, NSP - 1);
      p.gre = 1;
      p.outer_dst = (kind == 0) ? anycast_ip : (kind == 1) ? spill_ip[k] : 32'h0B00_0000;
      p.hdr.seq = SEQ_W'(i);
      p.hdr.dst_ip = $urandom;
      in_pkt = p; in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      check(out_pkt == p || kind == 2, "packet passed unchanged");
      if (kind == 0) begin
        check(out_valid == NSP'(1) << next_any, $sformatf("anycast to port %0d, got %b", next_any, out_valid));
        check(ev_sprayed && !ev_unicast && !ev_unknown, "sprayed event");
        if (i >= 1000) per_port[next_any]++;
        next_any = (next_any + 1) % NSP;
      end else if (kind == 1) begin
        check(out_valid == NSP'(1) << k, "unicast port");
        check(ev_unicast && !ev_sprayed, "unicast event");
      end else begin
        check(out_valid == '0, "unknown dropped");
        check(ev_unknown, "unknown event");
      end
    end
    for (int k = 0; k < NSP; k++) check(per_port[k] == 250, $sformatf("even spread port %0d: %0d", k, per_port[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
