// egress_port: the destination leaf switch's egress port toward a NIC, the
// place where cross-DC traffic collides with local collective bursts.
//
// Three classes share the port's buffer and are served by strict priority,
// one packet per clock: the lossless local class (priority 3, e.g. an
// AllToAll), packets drained from spillways (priority 2) and the lossy
// cross-DC class (priority 1, e.g. hierarchical AllReduce). The lossless
// class is never dropped: it is back-pressured through lossless_ready, which
// stands in for PFC. The two lossy classes are tail-dropped once the shared
// buffer holds LOSSY_LIMIT packets. Instead of vanishing, every tail-dropped
// packet is copied to the drop port, the "mirror on tail drop" hook that
// Spillway's deflect-on-drop uses; a small FIFO (MIRROR_DEPTH) absorbs the
// case of both lossy classes dropping in the same clock, and a packet that
// finds it full is lost and counted.
//
// From the paper: three classes with priorities 3/2/1, strict priority, PFC
// on the lossless class, tail drop on the lossy ones, mirroring of tail-
// dropped packets, a 64 MB shared buffer and lossy buildup to about 20 MB
// before drops. This design's own choices: buffer sizes are counted in
// packets of an assumed 4 KB (64 MB -> 16384, 20 MB -> 5120), admission
// order lossless, drained, lossy within a clock, and the mirror FIFO.
//
// Interface: lossless_valid/lossless_ready is a valid/ready handshake;
// drained_valid and lossy_valid are always accepted (and maybe dropped).
// out_valid/out_pkt/out_ready carry one packet per clock to the NIC.
// drop_valid/drop_pkt/drop_ready carry mirrored drops. The ev_ outputs pulse
// per event.
module egress_port
  import spillway_pkg::*;
#(
  parameter int unsigned BUF_PKTS     = 16384,
  parameter int unsigned LOSSY_LIMIT  = 5120,
  parameter int unsigned MIRROR_DEPTH = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lossless_valid,
  input  pkt_t  lossless_pkt,
  output logic  lossless_ready,
  input  logic  drained_valid,
  input  pkt_t  drained_pkt,
  input  logic  lossy_valid,
  input  pkt_t  lossy_pkt,
  output logic  out_valid,
  output pkt_t  out_pkt,
  input  logic  out_ready,
  output logic  drop_valid,
  output pkt_t  drop_pkt,
  input  logic  drop_ready,
  output logic [$clog2(BUF_PKTS+1)-1:0] occupancy,
  output logic  ev_tail_drop,     // one or two lossy packets dropped this clock
  output logic  ev_mirror_loss    // a dropped packet could not be mirrored
);
  localparam int unsigned CW = $clog2(BUF_PKTS+1);
  localparam int unsigned LW = $clog2(LOSSY_LIMIT+1);
  localparam int unsigned MW = $clog2(MIRROR_DEPTH+1);

  // class FIFOs: 0 = lossless, 1 = drained, 2 = lossy
  logic          push [3], pop [3], empty [3], full [3];
  logic [PKT_W-1:0] din [3], head [3];
  logic [CW-1:0] cnt_ll;
  logic [LW-1:0] cnt_dr, cnt_ly;

  ptr_ring #(.DEPTH(BUF_PKTS), .PTR_W(PKT_W)) u_q_ll (
    .clk(clk), .rst_n(rst_n), .push(push[0]), .push_ptr(din[0]), .pop(pop[0]),
    .head_ptr(head[0]), .empty(empty[0]), .full(full[0]), .count(cnt_ll));
  ptr_ring #(.DEPTH(LOSSY_LIMIT), .PTR_W(PKT_W)) u_q_dr (
    .clk(clk), .rst_n(rst_n), .push(push[1]), .push_ptr(din[1]), .pop(pop[1]),
    .head_ptr(head[1]), .empty(empty[1]), .full(full[1]), .count(cnt_dr));
  ptr_ring #(.DEPTH(LOSSY_LIMIT), .PTR_W(PKT_W)) u_q_ly (
    .clk(clk), .rst_n(rst_n), .push(push[2]), .push_ptr(din[2]), .pop(pop[2]),
    .head_ptr(head[2]), .empty(empty[2]), .full(full[2]), .count(cnt_ly));

  // ---------------- admission ----------------
  logic [CW:0] total, t1, t2;
  logic        acc_dr, acc_ly, drop_dr, drop_ly;

  assign total          = (CW+1)'(cnt_ll) + (CW+1)'(cnt_dr) + (CW+1)'(cnt_ly);
  assign occupancy      = CW'(total);
  assign lossless_ready = (total < (CW+1)'(BUF_PKTS));
  assign t1             = total + (CW+1)'(lossless_valid && lossless_ready);
  assign acc_dr         = drained_valid && (t1 < (CW+1)'(LOSSY_LIMIT));
  assign t2             = t1 + (CW+1)'(acc_dr);
  assign acc_ly         = lossy_valid && (t2 < (CW+1)'(LOSSY_LIMIT));
  assign drop_dr        = drained_valid && !acc_dr;
  assign drop_ly        = lossy_valid && !acc_ly;

  assign push[0] = lossless_valid && lossless_ready;
  assign push[1] = acc_dr;
  assign push[2] = acc_ly;
  assign din[0]  = lossless_pkt;
  assign din[1]  = drained_pkt;
  assign din[2]  = lossy_pkt;

  // ---------------- strict-priority scheduler ----------------
  always_comb begin
    pop[0] = 1'b0; pop[1] = 1'b0; pop[2] = 1'b0;
    out_valid = 1'b1;
    out_pkt   = pkt_t'(head[0]);
    if (!empty[0])      out_pkt = pkt_t'(head[0]);
    else if (!empty[1]) out_pkt = pkt_t'(head[1]);
    else if (!empty[2]) out_pkt = pkt_t'(head[2]);
    else                out_valid = 1'b0;
    if (out_ready) begin
      if (!empty[0])      pop[0] = 1'b1;
      else if (!empty[1]) pop[1] = 1'b1;
      else if (!empty[2]) pop[2] = 1'b1;
    end
  end

  // ---------------- mirror of tail drops ----------------
  // Up to two drops per clock enter a small FIFO, one leaves per clock.
  pkt_t          mq [MIRROR_DEPTH];
  logic [MW-1:0] m_cnt;
  logic [$clog2(MIRROR_DEPTH)-1:0] m_rd, m_wr;
  logic [1:0]    n_in;
  logic          m_pop;
  logic [MW:0]   space;

  assign drop_valid = (m_cnt != '0);
  assign drop_pkt   = mq[m_rd];
  assign m_pop      = drop_valid && drop_ready;
  assign space      = (MW+1)'(MIRROR_DEPTH) - (MW+1)'(m_cnt) + (MW+1)'(m_pop);

  always_comb begin
    n_in = 2'd0;
    if (drop_dr && space >= (MW+1)'(1)) n_in = 2'd1;
    if (drop_ly && space >= (MW+1)'(n_in) + (MW+1)'(1)) n_in = n_in + 2'd1;
  end

  always_ff @(posedge clk) begin
    if (drop_dr && n_in != 2'd0) begin
      mq[m_wr] <= drained_pkt;
      if (drop_ly && n_in == 2'd2) mq[m_wr + 1'b1] <= lossy_pkt;
    end else if (drop_ly && n_in != 2'd0) begin
      mq[m_wr] <= lossy_pkt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_cnt          <= '0;
      m_rd           <= '0;
      m_wr           <= '0;
      ev_tail_drop   <= 1'b0;
      ev_mirror_loss <= 1'b0;
    end else begin
      m_wr           <= m_wr + ($bits(m_wr))'(n_in);
      if (m_pop) m_rd <= m_rd + 1'b1;
      m_cnt          <= m_cnt + MW'(n_in) - MW'(m_pop);
      ev_tail_drop   <= drop_dr || drop_ly;
      ev_mirror_loss <= (2'(drop_dr) + 2'(drop_ly)) != n_in;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) lossless_valid && !lossless_ready |=> lossless_valid)
    else $error("egress_port: lossless sender withdrew a packet under back-pressure");

endmodule
