// tb_fast_cnp: self-checking test of CNP generation at the source exit
// switch.
//
// Random packets with every ECN codepoint, some in the deflection class,
// some GRE-wrapped and some CNPs, are sent. Expected: exactly the CE-marked
// ordinary data packets produce a CNP, one clock later, addressed from the
// packet's destination to its source with the CNP opcode and the packet's
// QP; those packets are forwarded with ECT(0) and everything else
// unchanged.
`timescale 1ns/1ps
module tb_fast_cnp;
  import spillway_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, fwd_valid, cnp_valid;
  pkt_t in_pkt, fwd_pkt, cnp_pkt;

  fast_cnp dut (.*);

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

  initial begin
    int n_cnp = 0, n_marked = 0;
    in_valid = 0; in_pkt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      pkt_t p, e;
      bit want;
      @(negedge clk);
      p = '0;
      p.hdr.src_ip = $urandom;
      p.hdr.dst_ip = $urandom;
      p.hdr.dst_qp = QPN_W'($urandom);
      p.hdr.seq    = SEQ_W'(i);
      p.hdr.ecn    = ecn_t'($urandom_range(0, 3));
      p.hdr.opcode = ($urandom_range(0, 9) == 0) ? OPC_CNP : OPC_RC_SEND_ONLY;
      p.hdr.prio   = ($urandom_range(0, 9) == 0) ? PRIO_DEFLECT : PRIO_LOSSY;
      p.gre        = ($urandom_range(0, 9) == 0);
      want = (p.hdr.ecn == ECN_CE) && (p.hdr.opcode != OPC_CNP) && (p.hdr.prio != PRIO_DEFLECT) && !p.gre;
      in_pkt = p; in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      e = p;
      if (want) e.hdr.ecn = ECN_ECT0;
      check(fwd_valid && fwd_pkt == e, "forwarded packet");
      check(cnp_valid == want, "CNP decision");
      if (want) begin
        n_marked++;
        check(cnp_pkt.hdr.src_ip == p.hdr.dst_ip && cnp_pkt.hdr.dst_ip == p.hdr.src_ip, "CNP addresses");
        check(cnp_pkt.hdr.opcode == 8'h81, "CNP opcode");
        check(cnp_pkt.hdr.dst_qp == p.hdr.dst_qp, "CNP QP");
        check(cnp_pkt.hdr.ecn == ECN_NOT_ECT && !cnp_pkt.gre, "CNP not ECN capable");
      end
      if (cnp_valid) n_cnp++;
    end
    @(negedge clk);
    check(!fwd_valid && !cnp_valid, "idle when no input");
    check(n_marked > 50 && n_cnp == n_marked, "one CNP per marked packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
