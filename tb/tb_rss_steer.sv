// tb_rss_steer: self-checking test of GRE decapsulation and RSS steering.
//
// Random packets are sent: GRE packets for the spillway's unicast address,
// for the anycast address, for another address, and packets without GRE.
// The expected queue is computed in the testbench with its own Toeplitz
// formulation (shift the 64-bit key left by i and take the top 32 bits for
// every set address bit). Checks: accepted packets come out one clock later
// with the outer header cleared, the inner header intact and the expected
// queue; the others raise reject; every queue is used.
`timescale 1ns/1ps
module tb_rss_steer;
  import spillway_pkg::*;
  localparam int unsigned NQ = 4;
  localparam logic [63:0] KEY = 64'h6d5a56da_255b0ec2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ipv4_t my_ip = 32'h0AFF_0102, anycast_ip = 32'h0AFF_0001;
  logic in_valid, out_valid, reject;
  pkt_t in_pkt, out_pkt;
  logic [1:0] out_q;

  rss_steer #(.NQ(NQ)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [31:0] ref_hash(input logic [31:0] a);
    logic [63:0] k;
    logic [31:0] h;
    h = 0;
    k = KEY;
    for (int i = 31; i >= 0; i--) begin
      if (a[i]) h ^= k[63:32];
      k = k << 1;
    end
    return h;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int qhits [NQ];
  initial begin
    pkt_t p;
    bit   expect_ok;
    in_valid = 0; in_pkt = '0;
    foreach (qhits[i]) qhits[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int kind;
      @(negedge clk);
      p = '0;
      p.hdr.src_ip = $urandom;
      p.hdr.dst_ip = {8'd10, 8'd1, 8'($urandom_range(0, 3)), 8'($urandom)};
      p.hdr.seq    = SEQ_W'(i);
      p.hdr.prio   = PRIO_LOSSY;
      p.hdr.ecn    = ECN_ECT0;
      kind = $urandom_range(0, 3);
      p.gre        = (kind != 3);
      p.outer_dst  = (kind == 0) ? my_ip : (kind == 1) ? anycast_ip : 32'h0AFF_0105;
      p.outer_src  = 32'h0AFF_0201;
      p.outer_prio = PRIO_DEFLECT;
      expect_ok    = (kind <= 1);
      in_pkt = p; in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      check(out_valid == expect_ok, "accept decision");
      check(reject == !expect_ok, "reject flag");
      if (expect_ok) begin
        check(out_pkt.gre == 0 && out_pkt.outer_dst == 0 && out_pkt.outer_src == 0, "outer header removed");
        check(out_pkt.hdr == p.hdr, "inner header intact");
        check(out_q == ref_hash(p.hdr.dst_ip) % NQ, $sformatf("queue %0d for %h", out_q, p.hdr.dst_ip));
        qhits[out_q]++;
      end
    end
    foreach (qhits[i]) check(qhits[i] > 0, "every queue used");
    // the same destination always maps to the same queue
    begin
      logic [1:0] q0;
      for (int r = 0; r < 5; r++) begin
        @(negedge clk);
        p = '0; p.gre = 1; p.outer_dst = anycast_ip; p.hdr.dst_ip = 32'h0A01_0203; p.hdr.src_ip = $urandom;
        in_pkt = p; in_valid = 1;
        @(negedge clk); in_valid = 0;
        if (r == 0) q0 = out_q;
        check(out_valid && out_q == q0, "per-destination steering is stable");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
