// fast_cnp: congestion notification generated at the source exit switch.
//
// With Spillway, a packet marked with ECN Congestion Experienced in the
// source data centre may be deflected and held in the destination data
// centre before it reaches the receiver, which would delay the receiver's
// CNP by milliseconds. The source exit switch therefore answers every
// CE-marked packet itself: it sends a CNP straight back to the sender and
// forwards the packet with the mark cleared (ECT(0)), so the receiver does
// not notify the sender a second time. Packets in the deflection class, CNPs
// themselves and packets that are not ECN-capable are forwarded unchanged.
//
// From the paper: CNP generation at the source exit switch on an ECN-marked
// packet and clearing of the mark. This design's own choices: the CNP uses
// the RoCEv2 CNP opcode 0x81, goes from the packet's destination address to
// its source address, carries the packet's destination QP for the sender's
// NIC to match, and travels in the lossless priority; no per-QP CNP rate
// limit is applied; one register stage.
//
// Interface: in_valid/in_pkt one packet per clock toward the DCI;
// fwd_valid/fwd_pkt the forwarded packet and cnp_valid/cnp_pkt the
// notification toward the sender, both one clock later.
module fast_cnp
  import spillway_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  pkt_t in_pkt,
  output logic fwd_valid,
  output pkt_t fwd_pkt,
  output logic cnp_valid,
  output pkt_t cnp_pkt
);
  logic marked;
  pkt_t cnp, fwd;

  assign marked = (in_pkt.hdr.ecn == ECN_CE) && !in_pkt.gre &&
                  (in_pkt.hdr.prio != PRIO_DEFLECT) && (in_pkt.hdr.opcode != OPC_CNP);

  always_comb begin
    fwd = in_pkt;
    if (marked) fwd.hdr.ecn = ECN_ECT0;
    cnp            = '0;
    cnp.hdr.src_ip = in_pkt.hdr.dst_ip;
    cnp.hdr.dst_ip = in_pkt.hdr.src_ip;
    cnp.hdr.opcode = OPC_CNP;
    cnp.hdr.dst_qp = in_pkt.hdr.dst_qp;
    cnp.hdr.prio   = PRIO_LOSSLESS;
    cnp.hdr.ecn    = ECN_NOT_ECT;
    cnp.hdr.seq    = in_pkt.hdr.seq;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_valid <= 1'b0;
      cnp_valid <= 1'b0;
      fwd_pkt   <= '0;
      cnp_pkt   <= '0;
    end else begin
      fwd_valid <= in_valid;
      cnp_valid <= in_valid && marked;
      if (in_valid) fwd_pkt <= fwd;
      if (in_valid && marked) cnp_pkt <= cnp;
    end
  end

endmodule
