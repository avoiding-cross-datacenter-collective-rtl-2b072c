// pkt_pool: shared packet buffer of a spillway node.
//
// All queues of a spillway store their packets in this one pool, as the
// prototype stores payloads in one shared buffer pool in DPU memory and
// keeps only pointers in the per-queue rings. The pool hands out a free slot
// for each arriving packet, returns the stored packet by pointer and takes
// the slot back when the packet has been transmitted.
//
// How it works: slots that were never used are handed out by a counter
// (fresh_cnt), so nothing has to be initialised at reset; slots that were
// freed go into a free-list FIFO and are reused from there first. The packet
// store is a plain array, written on alloc and read asynchronously.
//
// Interface: alloc_ok tells whether a slot is free and alloc_ptr which one;
// asserting alloc stores alloc_data there in the same clock. rd_ptr/rd_data
// is a combinational read port. free/free_ptr returns a slot; a slot freed in
// a clock can be allocated again from the next clock on. used counts the
// occupied slots. When the pool is full the caller must drop the packet: the
// paper notes that a spillway receiving more than it can buffer drops.
// The default size is this design's choice; the paper's nodes use 16 GB of
// DPU DRAM, which an on-chip array does not model.
module pkt_pool
  import spillway_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096,
  parameter int unsigned PTR_W   = 12
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // allocate and write
  input  logic                         alloc,
  input  pkt_t                         alloc_data,
  output logic                         alloc_ok,
  output logic [PTR_W-1:0]             alloc_ptr,
  // read
  input  logic [PTR_W-1:0]             rd_ptr,
  output pkt_t                         rd_data,
  // release
  input  logic                         free,
  input  logic [PTR_W-1:0]             free_ptr,
  output logic [$clog2(ENTRIES+1)-1:0] used
);
  localparam int unsigned CW = $clog2(ENTRIES+1);

  pkt_t             store [ENTRIES];
  logic [CW-1:0]    fresh_cnt;        // slots never handed out so far
  logic [PTR_W-1:0] fl_head_ptr;
  logic             fl_empty, fl_full;
  logic [CW-1:0]    fl_count;
  logic             use_fresh;

  assign use_fresh = !fl_empty ? 1'b0 : (fresh_cnt != CW'(ENTRIES));
  assign alloc_ok  = !fl_empty || (fresh_cnt != CW'(ENTRIES));
  assign alloc_ptr = use_fresh ? PTR_W'(fresh_cnt) : fl_head_ptr;
  assign rd_data   = store[rd_ptr];

  ptr_ring #(.DEPTH(ENTRIES), .PTR_W(PTR_W)) u_free_list (
    .clk      (clk),
    .rst_n    (rst_n),
    .push     (free),
    .push_ptr (free_ptr),
    .pop      (alloc && alloc_ok && !use_fresh),
    .head_ptr (fl_head_ptr),
    .empty    (fl_empty),
    .full     (fl_full),
    .count    (fl_count)
  );

  always_ff @(posedge clk) begin
    if (alloc && alloc_ok) store[alloc_ptr] <= alloc_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fresh_cnt <= '0;
      used      <= '0;
    end else begin
      if (alloc && alloc_ok && use_fresh) fresh_cnt <= fresh_cnt + 1'b1;
      case ({alloc && alloc_ok, free})
        2'b10:   used <= used + 1'b1;
        2'b01:   used <= used - 1'b1;
        default: used <= used;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) free |-> (used != '0))
    else $error("pkt_pool: free with no slot in use");
  assert property (@(posedge clk) disable iff (!rst_n) alloc |-> alloc_ok)
    else $error("pkt_pool: alloc while full");

endmodule
