// tb_spillway_full: end-to-end run of spillway_system with every parameter
// at its default (quiet interval 30000 clocks = 30 us at 1 GHz, 64 MB leaf
// buffer counted as 16384 packets, 4096-packet pools, four spillways).
//
// A 40000-packet lossless burst collides with a 30000-packet cross-DC flow
// at half line rate. The lossy share of the leaf buffer (5120 packets)
// overflows, about 15000 packets are deflected and spread over the four
// spillways, and after the burst each spillway waits, probes, sends a half
// burst and then drains at full rate. The scenario and checks are in
// spillway_tb_body.svh; the deadline (300000 clocks) and bounce-backs are
// not expected at this size.
`timescale 1ns/1ps
module tb_spillway_full;
  import spillway_pkg::*;
  localparam int unsigned P_NSP = 4, P_NQ = 4, P_POOL = 4096, P_BUF = 16384;
  localparam int unsigned P_REMOTE = 30000;
  localparam int unsigned LOCAL_PKTS = 40000, LOCAL_START = 200, LOCAL_BURSTS = 1, LOCAL_PERIOD = 0;
  localparam int unsigned REMOTE_START = 100, REMOTE_GAP = 2, CE_EVERY = 10;
  localparam logic [31:0] REMOTE_SRC = 32'h0A01_0007;
  localparam bit REQUIRE_DEADLINE = 0, REQUIRE_BOUNCE = 0;
  localparam int WATCHDOG = 1000000;

  `include "spillway_tb_body.svh"

  spillway_system dut (.*);
endmodule
