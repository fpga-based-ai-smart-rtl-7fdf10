// tb_sync_fifo: random pushes and pops against a queue model. Checks the data
// order, the level, that in_ready drops exactly at DEPTH words, that out_valid
// drops exactly when empty, and that a pushed word can be popped the next
// cycle.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = 0, out_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] model[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      int phase;
      @(negedge clk);
      // bias towards filling, then towards draining
      phase = (i / 500) % 2;
      in_valid  = ($urandom_range(0, 9) < (phase ? 8 : 3));
      out_ready = ($urandom_range(0, 9) < (phase ? 3 : 8));
      in_data   = $urandom;
      // compare the visible state with the model
      check(level == model.size(), "level");
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() != 0), "out_valid");
      if (out_valid && model.size() != 0) check(out_data == model[0], "data");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
