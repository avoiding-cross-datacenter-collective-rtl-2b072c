// spillway_system: a cross-DC path with Spillway deflect-on-drop, spillway
// buffering and controlled reinjection, put together end to end.
//
// Cross-DC traffic enters at the source data centre's exit switch, where
// fast_cnp answers ECN-marked packets with an immediate CNP, and arrives
// (the long-haul link itself is not modelled, it is a direct connection) at
// the destination leaf switch's egress port toward a NIC. There it competes
// with the lossless local collective. Whatever the egress port would
// tail-drop is mirrored to deflect_on_drop, wrapped in GRE and sent toward
// the spillways: anycast_spray, the exit switch's forwarding, sprays anycast
// packets over the NSP spillway nodes and delivers sticky unicast packets to
// their own spillway. Each spillway_node buffers per destination queue and
// drains on its own schedule; drained packets (priority 2) travel back
// through the exit switch, modelled as a round-robin merge that carries one
// packet per clock, to the same egress port.
//
// From the paper: the loop deflect - forward - store - drain of its
// architecture figure, four spillways per exit switch, fast CNP at the
// source exit switch. This design's own choices: the addresses (anycast
// 10.255.0.1, spillway k at 10.255.1.k, switch 10.255.2.1), the round-robin
// return merge and the omission of spine and DCI latency.
//
// Interface: remote_valid/remote_pkt and local_valid/local_pkt/local_ready
// are the two traffic sources; nic_valid/nic_pkt/nic_ready is the port's
// link to the destination NIC; cnp_valid/cnp_pkt go back to the senders.
// The ev_ outputs pulse per event and the occupancy outputs show the
// buffers, for statistics.
module spillway_system
  import spillway_pkg::*;
#(
  parameter int unsigned NSP             = 4,
  parameter int unsigned NQ              = 4,
  parameter int unsigned POOL_ENTRIES    = 4096,
  parameter int unsigned QUIET_CYCLES    = 30000,
  parameter int unsigned JITTER_W        = 10,
  parameter int unsigned HALF_PKTS       = 16,
  parameter int unsigned DEADLINE_CYCLES = 300000,
  parameter int unsigned BUF_PKTS        = 16384,
  parameter int unsigned LOSSY_LIMIT     = 5120,
  parameter int unsigned MIRROR_DEPTH    = 64,
  parameter ipv4_t       ANYCAST_IP      = 32'h0AFF_0001,
  parameter ipv4_t       SPILL_IP_BASE   = 32'h0AFF_0100,
  parameter ipv4_t       SWITCH_IP       = 32'h0AFF_0201
) (
  input  logic           clk,
  input  logic           rst_n,
  // cross-DC (lossy) traffic entering the source exit switch
  input  logic           remote_valid,
  input  pkt_t           remote_pkt,
  // local lossless collective toward the destination port
  input  logic           local_valid,
  input  pkt_t           local_pkt,
  output logic           local_ready,
  // destination NIC link
  output logic           nic_valid,
  output pkt_t           nic_pkt,
  input  logic           nic_ready,
  // CNPs from the source exit switch toward the senders
  output logic           cnp_valid,
  output pkt_t           cnp_pkt,
  // statistics
  output logic [$clog2(BUF_PKTS+1)-1:0]     leaf_occupancy,
  output logic [$clog2(POOL_ENTRIES+1)-1:0] spill_occupancy [NSP],
  output logic           ev_tail_drop,
  output logic           ev_mirror_loss,
  output logic           ev_deflect_sticky,
  output logic           ev_sprayed,
  output logic           ev_route_unicast,
  output logic           ev_route_unknown,
  output logic [NSP-1:0] ev_spill_drop,
  output logic [NSP-1:0] ev_spill_reject,
  output logic [NSP-1:0] ev_probe,
  output logic [NSP-1:0] ev_half,
  output logic [NSP-1:0] ev_full,
  output logic [NSP-1:0] ev_deadline
);
  localparam int unsigned SW = (NSP > 1) ? $clog2(NSP) : 1;

  ipv4_t spill_ip [NSP];
  for (genvar k = 0; k < NSP; k++) begin : g_ip
    assign spill_ip[k] = SPILL_IP_BASE + ipv4_t'(k);
  end

  // ---------------- source exit switch ----------------
  logic dci_valid;
  pkt_t dci_pkt;

  fast_cnp u_fast_cnp (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (remote_valid),
    .in_pkt    (remote_pkt),
    .fwd_valid (dci_valid),
    .fwd_pkt   (dci_pkt),
    .cnp_valid (cnp_valid),
    .cnp_pkt   (cnp_pkt)
  );

  // ---------------- destination leaf egress ----------------
  logic drained_valid;
  pkt_t drained_pkt;
  logic mir_valid, mir_ready;
  pkt_t mir_pkt;

  egress_port #(
    .BUF_PKTS     (BUF_PKTS),
    .LOSSY_LIMIT  (LOSSY_LIMIT),
    .MIRROR_DEPTH (MIRROR_DEPTH)
  ) u_egress (
    .clk            (clk),
    .rst_n          (rst_n),
    .lossless_valid (local_valid),
    .lossless_pkt   (local_pkt),
    .lossless_ready (local_ready),
    .drained_valid  (drained_valid),
    .drained_pkt    (drained_pkt),
    .lossy_valid    (dci_valid),
    .lossy_pkt      (dci_pkt),
    .out_valid      (nic_valid),
    .out_pkt        (nic_pkt),
    .out_ready      (nic_ready),
    .drop_valid     (mir_valid),
    .drop_pkt       (mir_pkt),
    .drop_ready     (mir_ready),
    .occupancy      (leaf_occupancy),
    .ev_tail_drop   (ev_tail_drop),
    .ev_mirror_loss (ev_mirror_loss)
  );

  logic defl_valid;
  pkt_t defl_pkt;

  deflect_on_drop #(.NSP(NSP)) u_deflect (
    .clk        (clk),
    .rst_n      (rst_n),
    .switch_ip  (SWITCH_IP),
    .anycast_ip (ANYCAST_IP),
    .spill_ip   (spill_ip),
    .in_valid   (mir_valid),
    .in_pkt     (mir_pkt),
    .in_ready   (mir_ready),
    .out_valid  (defl_valid),
    .out_pkt    (defl_pkt),
    .out_ready  (1'b1),
    .ev_unicast (ev_deflect_sticky)
  );

  // ---------------- exit switch: toward the spillways ----------------
  logic [NSP-1:0] sp_rx_valid;
  pkt_t           sp_rx_pkt;

  anycast_spray #(.NSP(NSP)) u_spray (
    .clk        (clk),
    .rst_n      (rst_n),
    .anycast_ip (ANYCAST_IP),
    .spill_ip   (spill_ip),
    .in_valid   (defl_valid),
    .in_pkt     (defl_pkt),
    .out_valid  (sp_rx_valid),
    .out_pkt    (sp_rx_pkt),
    .ev_sprayed (ev_sprayed),
    .ev_unicast (ev_route_unicast),
    .ev_unknown (ev_route_unknown)
  );

  // ---------------- spillway nodes ----------------
  logic [NSP-1:0] sp_tx_valid, sp_tx_ready;
  pkt_t           sp_tx_pkt [NSP];

  for (genvar k = 0; k < NSP; k++) begin : g_sp
    drain_state_t unused_state [NQ];

    spillway_node #(
      .NQ              (NQ),
      .POOL_ENTRIES    (POOL_ENTRIES),
      .QUIET_CYCLES    (QUIET_CYCLES),
      .JITTER_W        (JITTER_W),
      .HALF_PKTS       (HALF_PKTS),
      .DEADLINE_CYCLES (DEADLINE_CYCLES),
      .SPILLWAY_ID     (16'(k))
    ) u_node (
      .clk         (clk),
      .rst_n       (rst_n),
      .my_ip       (spill_ip[k]),
      .anycast_ip  (ANYCAST_IP),
      .rx_valid    (sp_rx_valid[k]),
      .rx_pkt      (sp_rx_pkt),
      .tx_valid    (sp_tx_valid[k]),
      .tx_pkt      (sp_tx_pkt[k]),
      .tx_ready    (sp_tx_ready[k]),
      .occupancy   (spill_occupancy[k]),
      .q_state     (unused_state),
      .ev_drop     (ev_spill_drop[k]),
      .ev_reject   (ev_spill_reject[k]),
      .ev_probe    (ev_probe[k]),
      .ev_half     (ev_half[k]),
      .ev_full     (ev_full[k]),
      .ev_deadline (ev_deadline[k])
    );
  end

  // ---------------- exit switch: drained packets back to the leaf ----------------
  // Round-robin merge of the spillway ports onto one path of one packet per
  // clock, registered once.
  logic [SW-1:0] rr_last, pick;
  logic          any;

  always_comb begin
    pick = rr_last;
    any  = 1'b0;
    for (int j = 1; j <= int'(NSP); j++) begin
      if (!any && sp_tx_valid[SW'((int'(rr_last) + j) % int'(NSP))]) begin
        pick = SW'((int'(rr_last) + j) % int'(NSP));
        any  = 1'b1;
      end
    end
    sp_tx_ready = any ? (NSP'(1) << pick) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_last       <= SW'(NSP - 1);
      drained_valid <= 1'b0;
      drained_pkt   <= '0;
    end else begin
      drained_valid <= any;
      if (any) begin
        rr_last     <= pick;
        drained_pkt <= sp_tx_pkt[pick];
      end
    end
  end

endmodule
