// tb_bfp_decompress: checks BFP16 to FP32 conversion against a real-arithmetic
// model. Random blocks (random shared exponents, including ones low enough to
// give results below the normal range) are decoded under random gaps and
// back-pressure, each of the two output words is compared with the model, the
// message-end flag must come on the second word, and a steady stream must give
// one word per cycle.
`timescale 1ns/1ps
module tb_bfp_decompress;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  logic [135:0] in_data = '0;
  logic [255:0] out_data;
  int checks = 0, failures = 0;

  bfp_decompress dut (.*);
  always #5 clk = ~clk;

  logic [256:0] exp_q[$];
  bit throttle = 1;
  int nword = 0;

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      logic [256:0] e;
      e = exp_q.pop_front();
      checks++;
      nword++;
      if ({out_last, out_data} !== e) begin
        failures++;
        if (failures < 6) $display("MISMATCH got %h/%0d exp %h/%0d", out_data, out_last, e[255:0], e[256]);
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
    logic [135:0] blk;
    bit lst;
    blk = {$urandom, $urandom, $urandom, $urandom, $urandom};
    blk[135:128] = 8'($urandom_range(0, 254));
    for (int i = 0; i < 16; i++) if ($urandom_range(0, 7) == 0) blk[i*8 +: 7] = '0;
    lst = ($urandom_range(0, 1) == 0);
    for (int w = 0; w < 2; w++) begin
      logic [255:0] o;
      for (int l = 0; l < 8; l++) o[l*32 +: 32] = bfp_decode_elem(blk, w*8 + l);
      exp_q.push_back({lst && (w == 1), o});
    end
    in_data  = blk;
    in_last  = lst;
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    if (gaps) while ($urandom_range(0, 2) == 0) @(negedge clk);
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int b = 0; b < 2000; b++) send_block(1);
    while (exp_q.size() != 0) @(negedge clk);
    throttle = 0;
    @(negedge clk);
    t0 = nword;
    t1 = $time;
    // 200 blocks back to back: the input side must not wait more than one
    // cycle per block beyond the two output cycles
    fork
      for (int b = 0; b < 200; b++) begin
        send_block(0);
      end
    join
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    if ((($time - t1) / 10) > 405 || nword - t0 != 400) begin
      failures++;
      $display("throughput: %0d words in %0d cycles", nword - t0, ($time - t1) / 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
