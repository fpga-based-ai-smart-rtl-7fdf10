// tb_bfp_compress: checks FP32 to BFP16 conversion against a real-arithmetic
// model. Blocks of 16 random gradients with mixed exponents (including zeros
// and subnormals) are fed as 8-lane words under random input gaps and output
// back-pressure; every block is compared bit for bit with the model, the
// message-end flag is checked, and a steady stream must sustain one block
// every two cycles.
`timescale 1ns/1ps
module tb_bfp_compress;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  logic [255:0] in_data = '0;
  logic [135:0] out_data;
  int checks = 0, failures = 0;

  bfp_compress dut (.*);
  always #5 clk = ~clk;

  logic [136:0] exp_q[$];
  int nblk = 0;
  bit throttle = 1;

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      logic [136:0] e;
      e = exp_q.pop_front();
      checks++;
      nblk++;
      if ({out_last, out_data} !== e) begin
        failures++;
        if (failures < 6) $display("MISMATCH got %h/%0d exp %h/%0d", out_data, out_last, e[135:0], e[136]);
      end
    end
  end
  always @(negedge clk) out_ready = throttle ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_block(bit gaps);
    logic [31:0] x [16];
    int base_e;
    bit lst;
    base_e = $urandom_range(60, 190);
    for (int i = 0; i < 16; i++) begin
      x[i] = $urandom;
      x[i][30:23] = 8'(base_e - int'($urandom_range(0, 12)));
      if ($urandom_range(0, 15) == 0) x[i][30:23] = 8'd0;
    end
    lst = ($urandom_range(0, 3) == 0);
    exp_q.push_back({lst, bfp_encode(x)});
    for (int w = 0; w < 2; w++) begin
      for (int l = 0; l < 8; l++) in_data[l*32 +: 32] = x[w*8 + l];
      in_last  = lst && (w == 1);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      if (gaps) while ($urandom_range(0, 2) == 0) @(negedge clk);
    end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int b = 0; b < 2000; b++) send_block(1);
    // throughput: 200 blocks back to back, no back-pressure
    while (exp_q.size() != 0) @(negedge clk);
    throttle = 0;
    @(negedge clk);
    t0 = nblk;
    t1 = $time;
    for (int b = 0; b < 200; b++) send_block(0);
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    // 200 blocks of 2 words each: 400 cycles plus a few for the handshakes
    if ((($time - t1) / 10) > 405 || nblk - t0 != 200) begin
      failures++;
      $display("throughput: %0d blocks", nblk - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
