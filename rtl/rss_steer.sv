// rss_steer: receive stage of a spillway node - GRE decapsulation and
// Receive Side Scaling (RSS) onto the spillway queues.
//
// Deflected packets reach a spillway wrapped in a GRE header addressed to
// the spillway (its own unicast address, or the anycast address shared by
// all spillways). This stage checks that outer header, strips it and steers
// the inner packet to one of NQ queues by hashing the packet's original
// destination IPv4 address. Steering by destination gives every destination
// its own queue, so a deflection toward one destination does not hold back
// the drain toward another. This follows the prototype, where the NIC's
// receive pipeline decapsulates GRE and RSS picks one of four queues from
// the original destination IP.
//
// The hash is the standard Toeplitz RSS hash over the 32-bit destination
// address, with the first 64 bits of the widely used default RSS key
// (6d5a56da 255b0ec2); the queue is the low log2(NQ) bits of the hash (an
// identity indirection table). Key, table and the single-cycle latency are
// this design's choices.
//
// Interface: in_valid/in_pkt, one packet per clock, always accepted.
// One clock later out_valid/out_pkt/out_q carry the decapsulated packet and
// its queue; a packet that is not GRE or not addressed to this spillway
// leaves on reject instead (counted by the caller).
module rss_steer
  import spillway_pkg::*;
#(
  parameter int unsigned NQ     = 4,
  parameter logic [63:0] RSS_KEY = 64'h6d5a56da_255b0ec2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ipv4_t                 my_ip,
  input  ipv4_t                 anycast_ip,
  input  logic                  in_valid,
  input  pkt_t                  in_pkt,
  output logic                  out_valid,
  output pkt_t                  out_pkt,
  output logic [$clog2(NQ)-1:0] out_q,
  output logic                  reject
);
  localparam int unsigned QW = $clog2(NQ);

  // Toeplitz hash: for every set input bit i (counted from the MSB), XOR in
  // the 32-bit key window that starts at key bit i (from the MSB).
  function automatic logic [31:0] toeplitz32(input logic [31:0] data);
    logic [31:0] h;
    h = '0;
    for (int i = 0; i < 32; i++) begin
      if (data[31-i]) h ^= RSS_KEY[63-i -: 32];
    end
    return h;
  endfunction

  logic  for_me;
  pkt_t  inner;
  logic [31:0] hash;

  assign for_me = in_pkt.gre && ((in_pkt.outer_dst == my_ip) || (in_pkt.outer_dst == anycast_ip));
  assign hash   = toeplitz32(in_pkt.hdr.dst_ip);

  always_comb begin
    inner            = '0;
    inner.hdr        = in_pkt.hdr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pkt   <= '0;
      out_q     <= '0;
      reject    <= 1'b0;
    end else begin
      out_valid <= in_valid && for_me;
      reject    <= in_valid && !for_me;
      if (in_valid && for_me) begin
        out_pkt <= inner;
        out_q   <= QW'(hash);
      end
    end
  end

endmodule
