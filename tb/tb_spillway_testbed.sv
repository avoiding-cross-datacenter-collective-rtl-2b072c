// tb_spillway_testbed: the hardware-testbed experiment of Spillway, scaled
// in time, with every spillway_system parameter at its default.
//
// One lossy cross-DC flow is sent at full line rate (one packet per clock,
// no congestion control), as in the testbed, where the senders' rate control
// is switched off. Meanwhile the lossless port injects periodic bursts that
// take the port away by strict priority. The testbed's bursts last tens of
// milliseconds with 270 ms gaps; here a burst is 3000 packets (3 us at the
// assumed 1 GHz) and bursts repeat every 60000 clocks, so each gap is longer
// than the 30 us quiet interval and the spillways can drain in between.
// Because the flow alone fills the port, every packet drained from a
// spillway displaces a lossy one, which is deflected in turn; the run checks
// that the loop still delivers every packet exactly once, with no loss in
// the spillways, and prints the flow's completion time against the ideal.
// The scenario and checks are in spillway_tb_body.svh.
`timescale 1ns/1ps
module tb_spillway_testbed;
  import spillway_pkg::*;
  localparam int unsigned P_NSP = 4, P_NQ = 4, P_POOL = 4096, P_BUF = 16384;
  localparam int unsigned P_REMOTE = 150000;
  localparam int unsigned LOCAL_PKTS = 3000, LOCAL_START = 10000, LOCAL_BURSTS = 3, LOCAL_PERIOD = 60000;
  localparam int unsigned REMOTE_START = 100, REMOTE_GAP = 1, CE_EVERY = 10;
  localparam logic [31:0] REMOTE_SRC = 32'h0A01_0007;
  localparam bit REQUIRE_DEADLINE = 0, REQUIRE_BOUNCE = 0;
  localparam int WATCHDOG = 3000000;

  `include "spillway_tb_body.svh"

  // Backstop in simulated time, beyond the clock-counting watchdog of the
  // body, in case the clock itself stops.
  initial begin
    #(longint'(WATCHDOG) * 20);
    $display("time limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  spillway_system dut (.*);
endmodule
