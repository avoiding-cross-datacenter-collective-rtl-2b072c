// ptr_ring: first-in first-out ring of packet-buffer pointers.
//
// Each spillway queue keeps the pointers of its buffered packets in one of
// these rings, while the packets themselves sit in the shared pool
// (pkt_pool). The indirection lets packets keep arriving while transmission
// of the queue is held back by its drain controller; this follows the
// prototype's receive path, where received packets are enqueued as pointers
// into a ring. The ring is a circular buffer with read and write indices and
// an occupancy counter.
//
// Interface: push/push_ptr write one pointer per clock when not full; pop
// removes the head, which is always visible on head_ptr (first-word
// fall-through) while empty is low. A push and a pop may happen in the same
// clock. Pushing when full or popping when empty is a protocol error and is
// caught by assertions. Any depth is allowed; the indices wrap at DEPTH.
module ptr_ring #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned PTR_W = 12
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [PTR_W-1:0]           push_ptr,
  input  logic                       pop,
  output logic [PTR_W-1:0]           head_ptr,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [PTR_W-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_idx, wr_idx;

  assign empty    = (count == '0);
  assign full     = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign head_ptr = mem[rd_idx];

  always_ff @(posedge clk) begin
    if (push) mem[wr_idx] <= push_ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_idx <= '0;
      wr_idx <= '0;
      count  <= '0;
    end else begin
      if (push) wr_idx <= (wr_idx == AW'(DEPTH - 1)) ? '0 : wr_idx + 1'b1;
      if (pop)  rd_idx <= (rd_idx == AW'(DEPTH - 1)) ? '0 : rd_idx + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("ptr_ring: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("ptr_ring: pop while empty");

endmodule
