// deflect_on_drop: turns a packet the switch would drop into a packet sent
// to a spillway.
//
// Every packet mirrored from an egress tail drop is wrapped in a GRE outer
// header from this switch to a spillway, and so keeps travelling instead of
// being lost. The spillway is chosen as the paper's "sticky" scheme does: a
// packet that a spillway has already drained carries that spillway's
// identifier in its IPv4 identification field (and the drained priority 2),
// so it is sent back by unicast to the same spillway, which keeps the probe
// feedback loop of a flow on one spillway; every other packet goes to the
// anycast address shared by all spillways and is spread across them by the
// network. The outer header puts the packet in a separate deflection class
// whose ECN field is Not-ECT, so buffering a deflected packet never raises a
// congestion mark.
//
// From the paper: encapsulation of the untrimmed dropped packet in GRE
// toward a spillway IP, anycast on the first deflection and unicast by the
// identifier field afterwards, a distinct traffic class without ECN
// marking. This design's own choices: a drained packet is recognised by its
// priority 2; the identifier indexes a table of NSP unicast addresses, and an
// identifier outside the table falls back to anycast; the deflection class
// number is 4; one register stage.
//
// Interface: in_valid/in_pkt/in_ready from the egress mirror, out_valid/
// out_pkt/out_ready toward the exit switch, both valid/ready. Latency one
// clock, one packet per clock. ev_unicast pulses for a sticky deflection.
module deflect_on_drop
  import spillway_pkg::*;
#(
  parameter int unsigned NSP = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  ipv4_t  switch_ip,
  input  ipv4_t  anycast_ip,
  input  ipv4_t  spill_ip [NSP],
  input  logic   in_valid,
  input  pkt_t   in_pkt,
  output logic   in_ready,
  output logic   out_valid,
  output pkt_t   out_pkt,
  input  logic   out_ready,
  output logic   ev_unicast
);
  logic  sticky;
  pkt_t  enc;

  assign sticky = (in_pkt.hdr.prio == PRIO_DRAINED) &&
                  (in_pkt.hdr.ip_id < ID_W'(NSP));

  always_comb begin
    enc            = '0;
    enc.hdr        = in_pkt.hdr;
    enc.gre        = 1'b1;
    enc.outer_src  = switch_ip;
    enc.outer_dst  = anycast_ip;
    for (int k = 0; k < int'(NSP); k++) begin
      if (sticky && in_pkt.hdr.ip_id == ID_W'(k)) enc.outer_dst = spill_ip[k];
    end
    enc.outer_prio = PRIO_DEFLECT;
    enc.outer_ecn  = ECN_NOT_ECT;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_pkt    <= '0;
      ev_unicast <= 1'b0;
    end else begin
      ev_unicast <= in_valid && in_ready && sticky;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) out_pkt <= enc;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_pkt))
    else $error("deflect_on_drop: output changed under back-pressure");

endmodule
