// tb_ptr_ring: self-checking test of the pointer ring.
//
// Random pushes and pops (never past full or empty) are applied to a small
// ring and compared against a SystemVerilog queue used as the reference:
// the head value, the empty/full flags and the count are checked every
// clock. A watchdog ends the run if it hangs.
`timescale 1ns/1ps
module tb_ptr_ring;
  localparam int unsigned DEPTH = 6;
  localparam int unsigned W     = 12;

  logic clk = 0, rst_n = 0;
  logic push, pop;
  logic [W-1:0] push_ptr, head_ptr;
  logic empty, full;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  ptr_ring #(.DEPTH(DEPTH), .PTR_W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; push_ptr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == DEPTH), "full");
      check(count == model.size(), "count");
      if (model.size() != 0) check(head_ptr == model[0], "head");
      // bias the fill level so that both full and empty are reached
      push = ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 30)) && (model.size() < DEPTH);
      pop  = ($urandom_range(0, 99) < ((i / 500) % 2 ? 30 : 70)) && (model.size() > 0);
      push_ptr = W'($urandom);
      @(posedge clk);
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(push_ptr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
