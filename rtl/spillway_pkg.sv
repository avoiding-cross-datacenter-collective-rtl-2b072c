// spillway_pkg: types and constants shared by the Spillway blocks.
//
// The design works on packet descriptors, not on byte streams: a packet is
// one pkt_t value that carries the header fields the mechanism reads or
// rewrites (IPv4 addresses and identification, switch priority, ECN, the
// RoCE opcode and destination QP) plus an optional GRE outer header used
// while a packet travels to a spillway. Payload bytes are not carried; a
// sequence number and a length stand for them so that testbenches can track
// every packet end to end. One descriptor can move per clock on every port.
//
// Priorities follow the hardware testbed of the paper: priority 3 is the
// lossless local class, priority 1 the lossy cross-DC class and priority 2
// the class of packets drained from a spillway. The deflection class number
// (4) and all field widths are this design's choice.
package spillway_pkg;

  localparam int unsigned IP_W   = 32;
  localparam int unsigned ID_W   = 16;   // IPv4 identification field
  localparam int unsigned PRIO_W = 3;
  localparam int unsigned QPN_W  = 24;
  localparam int unsigned SEQ_W  = 24;
  localparam int unsigned LEN_W  = 14;

  typedef logic [IP_W-1:0] ipv4_t;

  // Switch priorities (testbed, Sec. 6.2) and the deflection class.
  localparam logic [PRIO_W-1:0] PRIO_LOSSY    = 3'd1;
  localparam logic [PRIO_W-1:0] PRIO_DRAINED  = 3'd2;
  localparam logic [PRIO_W-1:0] PRIO_LOSSLESS = 3'd3;
  localparam logic [PRIO_W-1:0] PRIO_DEFLECT  = 3'd4;

  // ECN codepoints (RFC 3168).
  typedef enum logic [1:0] {
    ECN_NOT_ECT = 2'b00,
    ECN_ECT1    = 2'b01,
    ECN_ECT0    = 2'b10,
    ECN_CE      = 2'b11
  } ecn_t;

  // RoCEv2 base transport header opcodes used here.
  localparam logic [7:0] OPC_RC_SEND_ONLY = 8'h04;
  localparam logic [7:0] OPC_CNP          = 8'h81;

  // Inner (original) packet header.
  typedef struct packed {
    ipv4_t               src_ip;
    ipv4_t               dst_ip;
    logic [ID_W-1:0]     ip_id;
    logic [PRIO_W-1:0]   prio;
    ecn_t                ecn;
    logic [7:0]          opcode;
    logic [QPN_W-1:0]    dst_qp;
    logic [SEQ_W-1:0]    seq;
    logic [LEN_W-1:0]    len;
  } pkt_hdr_t;

  // A packet on a port: the inner header, plus the GRE outer header when
  // gre is set (a deflected packet on its way to a spillway).
  typedef struct packed {
    logic                gre;
    ipv4_t               outer_src;
    ipv4_t               outer_dst;
    logic [PRIO_W-1:0]   outer_prio;
    ecn_t                outer_ecn;
    pkt_hdr_t            hdr;
  } pkt_t;

  localparam int unsigned PKT_W = $bits(pkt_t);

  // States of the per-queue drain controller (Sec. 4.2).
  typedef enum logic [2:0] {
    DR_IDLE       = 3'd0,  // queue empty
    DR_QUIET      = 3'd1,  // waiting for tau_gap + jitter without arrivals
    DR_PROBE      = 3'd2,  // send the head-of-line packet as a probe
    DR_PROBE_WAIT = 3'd3,  // wait for a possible bounce-back of the probe
    DR_HALF       = 3'd4,  // half-rate burst
    DR_HALF_WAIT  = 3'd5,  // wait for a possible bounce-back of the half burst
    DR_FULL       = 3'd6   // full-rate burst until empty
  } drain_state_t;

endpackage
