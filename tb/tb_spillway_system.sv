// tb_spillway_system: end-to-end test of spillway_system at reduced sizes.
//
// Short quiet interval (200 clocks), short deadline and small buffers, so
// that a local burst of 3000 packets makes every mechanism happen within a
// few thousand clocks, including probes sent into a still busy port that
// bounce back to their own spillway. The scenario and the checks are in
// spillway_tb_body.svh.
`timescale 1ns/1ps
module tb_spillway_system;
  import spillway_pkg::*;
  localparam int unsigned P_NSP = 4, P_NQ = 4, P_POOL = 1024, P_BUF = 64;
  localparam int unsigned P_REMOTE = 2000;
  localparam int unsigned LOCAL_PKTS = 3000, LOCAL_START = 200, LOCAL_BURSTS = 1, LOCAL_PERIOD = 0;
  localparam int unsigned REMOTE_START = 100, REMOTE_GAP = 2, CE_EVERY = 10;
  localparam logic [31:0] REMOTE_SRC = 32'h0A01_0007;
  localparam bit REQUIRE_DEADLINE = 1, REQUIRE_BOUNCE = 1;
  localparam int WATCHDOG = 200000;

  `include "spillway_tb_body.svh"

  spillway_system #(
    .NSP(P_NSP), .NQ(P_NQ), .POOL_ENTRIES(P_POOL), .QUIET_CYCLES(200), .JITTER_W(4),
    .HALF_PKTS(4), .DEADLINE_CYCLES(1000), .BUF_PKTS(P_BUF), .LOSSY_LIMIT(16), .MIRROR_DEPTH(8)
  ) dut (.*);
endmodule
