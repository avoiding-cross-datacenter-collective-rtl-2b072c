// tb_pkt_pool: self-checking test of the shared packet pool.
//
// Packets with unique sequence numbers are allocated until the pool is
// full (alloc_ok must drop exactly at ENTRIES), then freed and reallocated in
// random order. The test keeps its own map pointer -> packet and checks
// that every read returns what was stored there, that no pointer is handed
// out twice while in use and that the used count matches.
`timescale 1ns/1ps
module tb_pkt_pool;
  import spillway_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned PW = 4;

  logic clk = 0, rst_n = 0;
  logic alloc, free, alloc_ok;
  pkt_t alloc_data, rd_data;
  logic [PW-1:0] alloc_ptr, rd_ptr, free_ptr;
  logic [$clog2(N+1)-1:0] used;
  int checks = 0, failures = 0;

  pkt_pool #(.ENTRIES(N), .PTR_W(PW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit   in_use [N];
  pkt_t stored [N];
  int   live [$];
  int   seq = 1;

  initial begin
    alloc = 0; free = 0; alloc_data = '0; rd_ptr = '0; free_ptr = '0;
    foreach (in_use[i]) in_use[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check(used == live.size(), "used count");
      check(alloc_ok == (live.size() < N), "alloc_ok");
      // read back a random live entry
      if (live.size() > 0) begin
        int k;
        k = live[$urandom_range(0, live.size() - 1)];
        rd_ptr = PW'(k);
        #1;
        check(rd_data == stored[k], "read data");
      end
      alloc = 0; free = 0;
      if (i < 40) alloc = alloc_ok;      // fill up first
      else begin
        alloc = alloc_ok && ($urandom_range(0, 1) == 1);
        free  = (live.size() > 0) && ($urandom_range(0, 1) == 1);
      end
      alloc_data = '0;
      alloc_data.hdr.seq    = SEQ_W'(seq);
      alloc_data.hdr.dst_ip = $urandom;
      if (free) begin
        int j;
        j = $urandom_range(0, live.size() - 1);
        free_ptr = PW'(live[j]);
        live.delete(j);
      end
      #1;
      if (alloc) check(!in_use[alloc_ptr] || (free && free_ptr == alloc_ptr && 0), "pointer not in use");
      @(posedge clk);
      if (free) in_use[free_ptr] = 0;
      if (alloc) begin
        in_use[alloc_ptr] = 1;
        stored[alloc_ptr] = alloc_data;
        live.push_back(int'(alloc_ptr));
        seq++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
