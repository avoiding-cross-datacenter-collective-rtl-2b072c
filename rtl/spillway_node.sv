// spillway_node: one spillway, the external buffer that holds deflected
// packets and reinjects them once their destination port has drained.
//
// Receive path: rss_steer checks and strips the GRE header and picks a
// queue from the original destination address; the packet is written into
// the shared pool (pkt_pool) and its pointer pushed onto that queue's ring
// (ptr_ring). A packet that finds the pool full is dropped and counted.
//
// Transmit path: every queue has its own drain controller (drain_ctrl),
// which watches the queue's arrivals and decides when the queue may send
// (quiet interval, probe, half burst, full burst). A round-robin arbiter
// grants one requesting queue per clock; the granted queue's head packet is
// read from the pool, its slot is freed, and the packet leaves with two
// header rewrites: the spillway's identifier goes into the IPv4
// identification field, so that a switch deflecting it again can send it back
// to this same spillway by unicast, and its priority becomes the drained
// class (2), kept apart from original traffic.
//
// From the paper: the structure (decapsulation, RSS queues, a shared pool
// with per-queue pointer rings, per-queue drain timers), four queues, the
// identifier in the IPv4 identification field and the drained priority 2.
// This design's own choices: the round-robin arbiter, one packet per clock
// in each direction, the pool size and dropping on a full pool.
//
// Interface: rx_valid/rx_pkt accept one packet per clock (no back-pressure,
// as a network port). tx_valid/tx_pkt/tx_ready is a valid/ready handshake;
// the packet and the queue choice are stable while tx_ready is low. Latency
// from reception to the earliest possible transmission is the quiet interval
// plus the probe wait; see drain_ctrl.
module spillway_node
  import spillway_pkg::*;
#(
  parameter int unsigned NQ              = 4,
  parameter int unsigned POOL_ENTRIES    = 4096,
  parameter int unsigned QUIET_CYCLES    = 30000,
  parameter int unsigned JITTER_W        = 10,
  parameter int unsigned HALF_PKTS       = 16,
  parameter int unsigned DEADLINE_CYCLES = 300000,
  parameter logic [15:0] SPILLWAY_ID     = 16'd0
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  ipv4_t                             my_ip,
  input  ipv4_t                             anycast_ip,
  // from the exit switch
  input  logic                              rx_valid,
  input  pkt_t                              rx_pkt,
  // to the exit switch
  output logic                              tx_valid,
  output pkt_t                              tx_pkt,
  input  logic                              tx_ready,
  // status
  output logic [$clog2(POOL_ENTRIES+1)-1:0] occupancy,
  output drain_state_t                      q_state [NQ],
  output logic                              ev_drop,      // pool full, packet lost
  output logic                              ev_reject,    // not addressed to this spillway
  output logic                              ev_probe,
  output logic                              ev_half,
  output logic                              ev_full,
  output logic                              ev_deadline
);
  localparam int unsigned PTR_W = $clog2(POOL_ENTRIES);
  localparam int unsigned QW    = $clog2(NQ);
  localparam int unsigned CW    = $clog2(POOL_ENTRIES+1);

  // ---------------- receive ----------------
  logic          st_valid;
  pkt_t          st_pkt;
  logic [QW-1:0] st_q;
  logic          alloc_ok;
  logic [PTR_W-1:0] alloc_ptr;

  rss_steer #(.NQ(NQ)) u_rss (
    .clk        (clk),
    .rst_n      (rst_n),
    .my_ip      (my_ip),
    .anycast_ip (anycast_ip),
    .in_valid   (rx_valid),
    .in_pkt     (rx_pkt),
    .out_valid  (st_valid),
    .out_pkt    (st_pkt),
    .out_q      (st_q),
    .reject     (ev_reject)
  );

  logic store;
  assign store   = st_valid && alloc_ok;
  assign ev_drop = st_valid && !alloc_ok;

  // ---------------- queues ----------------
  logic [NQ-1:0]    q_push, q_pop, q_empty, q_req, q_grant;
  logic [PTR_W-1:0] q_head [NQ];
  logic [NQ-1:0]    e_probe, e_half, e_full, e_dead;

  for (genvar q = 0; q < NQ; q++) begin : g_q
    logic          unused_full;
    logic [CW-1:0] unused_count;

    assign q_push[q] = store && (st_q == QW'(q));

    ptr_ring #(.DEPTH(POOL_ENTRIES), .PTR_W(PTR_W)) u_ring (
      .clk      (clk),
      .rst_n    (rst_n),
      .push     (q_push[q]),
      .push_ptr (alloc_ptr),
      .pop      (q_pop[q]),
      .head_ptr (q_head[q]),
      .empty    (q_empty[q]),
      .full     (unused_full),
      .count    (unused_count)
    );

    drain_ctrl #(
      .QUIET_CYCLES    (QUIET_CYCLES),
      .JITTER_W        (JITTER_W),
      .HALF_PKTS       (HALF_PKTS),
      .DEADLINE_CYCLES (DEADLINE_CYCLES),
      .LFSR_SEED       (16'hACE1 ^ {SPILLWAY_ID[7:0], 8'(q * 37 + 1)})
    ) u_drain (
      .clk         (clk),
      .rst_n       (rst_n),
      .arrival     (q_push[q]),
      .q_empty     (q_empty[q]),
      .tx_req      (q_req[q]),
      .tx_grant    (q_grant[q]),
      .state       (q_state[q]),
      .ev_probe    (e_probe[q]),
      .ev_half     (e_half[q]),
      .ev_full     (e_full[q]),
      .ev_deadline (e_dead[q])
    );
  end

  assign ev_probe    = |e_probe;
  assign ev_half     = |e_half;
  assign ev_full     = |e_full;
  assign ev_deadline = |e_dead;

  // ---------------- transmit arbiter ----------------
  logic [QW-1:0] rr_last;   // queue granted most recently
  logic [QW-1:0] sel;
  logic          any_req;

  always_comb begin
    sel     = rr_last;
    any_req = 1'b0;
    for (int k = 1; k <= int'(NQ); k++) begin
      if (!any_req && q_req[QW'((int'(rr_last) + k) % int'(NQ))]) begin
        sel     = QW'((int'(rr_last) + k) % int'(NQ));
        any_req = 1'b1;
      end
    end
  end

  logic          send;
  pkt_t          rd_pkt;
  logic [PTR_W-1:0] rd_ptr;

  assign tx_valid = any_req;
  assign send     = any_req && tx_ready;
  assign rd_ptr   = q_head[sel];
  assign q_grant  = send ? (NQ'(1) << sel) : '0;
  assign q_pop    = q_grant;

  always_comb begin
    tx_pkt            = rd_pkt;
    tx_pkt.gre        = 1'b0;
    tx_pkt.outer_src  = '0;
    tx_pkt.outer_dst  = '0;
    tx_pkt.outer_prio = '0;
    tx_pkt.outer_ecn  = ECN_NOT_ECT;
    tx_pkt.hdr.ip_id  = SPILLWAY_ID;
    tx_pkt.hdr.prio   = PRIO_DRAINED;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_last <= QW'(NQ - 1);
    else if (send) rr_last <= sel;
  end

  pkt_pool #(.ENTRIES(POOL_ENTRIES), .PTR_W(PTR_W)) u_pool (
    .clk        (clk),
    .rst_n      (rst_n),
    .alloc      (store),
    .alloc_data (st_pkt),
    .alloc_ok   (alloc_ok),
    .alloc_ptr  (alloc_ptr),
    .rd_ptr     (rd_ptr),
    .rd_data    (rd_pkt),
    .free       (send),
    .free_ptr   (rd_ptr),
    .used       (occupancy)
  );

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(q_grant))
    else $error("spillway_node: more than one queue granted");

endmodule
