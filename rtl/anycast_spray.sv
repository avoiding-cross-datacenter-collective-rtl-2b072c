// anycast_spray: the exit switch's forwarding of deflected packets to the
// spillway nodes attached to its spare ports.
//
// All spillways share one anycast address and each also has its own unicast
// address. A packet for the anycast address is sprayed per packet: it goes
// to the next spillway port in round-robin order, which spreads deflections
// evenly without per-flow state. A packet for a spillway's unicast address
// goes to that spillway's port. A packet for neither is discarded and
// counted.
//
// From the paper: the anycast address shared by the spillways, per-packet
// spraying, unicast addresses per spillway, four spillways per exit switch,
// and the even spread the testbed measured. This design's own choice:
// plain round-robin as the spraying rule, one register stage, and no
// back-pressure (spillway ports accept one packet per clock).
//
// Interface: in_valid/in_pkt one packet per clock; out_valid[k]/out_pkt
// toward spillway k one clock later (out_pkt is shared, only the port valid
// differs). ev_sprayed / ev_unicast / ev_unknown pulse per packet.
module anycast_spray
  import spillway_pkg::*;
#(
  parameter int unsigned NSP = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  ipv4_t          anycast_ip,
  input  ipv4_t          spill_ip [NSP],
  input  logic           in_valid,
  input  pkt_t           in_pkt,
  output logic [NSP-1:0] out_valid,
  output pkt_t           out_pkt,
  output logic           ev_sprayed,
  output logic           ev_unicast,
  output logic           ev_unknown
);
  localparam int unsigned SW = (NSP > 1) ? $clog2(NSP) : 1;

  logic [SW-1:0]  rr;          // next port for an anycast packet
  logic [NSP-1:0] uni_hit;
  logic           is_any;

  assign is_any = in_pkt.gre && (in_pkt.outer_dst == anycast_ip);
  always_comb begin
    for (int k = 0; k < int'(NSP); k++)
      uni_hit[k] = in_pkt.gre && (in_pkt.outer_dst == spill_ip[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr         <= '0;
      out_valid  <= '0;
      out_pkt    <= '0;
      ev_sprayed <= 1'b0;
      ev_unicast <= 1'b0;
      ev_unknown <= 1'b0;
    end else begin
      out_valid  <= '0;
      ev_sprayed <= 1'b0;
      ev_unicast <= 1'b0;
      ev_unknown <= 1'b0;
      if (in_valid) begin
        out_pkt <= in_pkt;
        if (is_any) begin
          out_valid[rr] <= 1'b1;
          rr            <= (rr == SW'(NSP - 1)) ? '0 : rr + 1'b1;
          ev_sprayed    <= 1'b1;
        end else if (uni_hit != '0) begin
          out_valid  <= uni_hit;
          ev_unicast <= 1'b1;
        end else begin
          ev_unknown <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(out_valid))
    else $error("anycast_spray: packet sent to more than one spillway");

endmodule
