// tb_fp32_add: self-checking test of the pipelined FP32 adder.
//
// Random operands (normal, subnormal, zero, equal-magnitude cancellations,
// infinities and NaNs) are added by the DUT and by the simulator's own
// floating-point arithmetic: the exact double sum rounded once to single
// precision equals the correctly rounded single sum. NaN results are compared
// by class only. The latency of three cycles and the stall input are checked.
`timescale 1ns/1ps
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0;
  logic [31:0] a = 0, b = 0;
  logic out_valid;
  logic [31:0] y;
  int checks = 0, failures = 0;

  fp32_add dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] rand_fp(int kind);
    logic [31:0] v;
    v = $urandom;
    case (kind)
      0: v[30:23] = 8'd0;                         // subnormal or zero
      1: v[30:23] = 8'd120 + 8'($urandom_range(0, 15)); // near each other
      2: v = 32'h7f80_0000 | (32'($urandom_range(0,1)) << 31); // infinity
      3: v = 32'h7fc0_0001;                       // NaN
      4: v[30:0] = 31'd0;                         // signed zero
      default: ;
    endcase
    return v;
  endfunction

  logic [31:0] exp_q[$];
  logic [63:0] opd_q[$];   // operands, for messages

  // scoreboard on the output
  always @(posedge clk) begin
    if (rst_n && out_valid && en) begin
      logic [31:0] e;
      logic [63:0] o;
      e = exp_q.pop_front();
      o = opd_q.pop_front();
      checks++;
      if (is_nan(e) ? !is_nan(y) : (y !== e)) begin
        failures++;
        if (failures < 10) $display("MISMATCH %h + %h: got %h exp %h at %0t", o[63:32], o[31:0], y, e, $time);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // latency check: one operand, count cycles to out_valid
    @(negedge clk); a = 32'h3f80_0000; b = 32'h4000_0000; in_valid = 1;
    exp_q.push_back(32'h4040_0000);
    opd_q.push_back({a, b});
    @(negedge clk); in_valid = 0; lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("latency %0d, expected 3", lat); end
    repeat (4) @(negedge clk);
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, z;
      int k1, k2;
      k1 = $urandom_range(0, 12); k2 = $urandom_range(0, 12);
      x = rand_fp(k1); z = rand_fp(k2);
      if ($urandom_range(0, 7) == 0) z = x ^ 32'h8000_0000;          // exact cancellation
      if ($urandom_range(0, 7) == 0) z = {~x[31], x[30:0] - 31'($urandom_range(0, 3))}; // near cancellation
      a = x; b = z; in_valid = 1;
      exp_q.push_back(fadd(x, z));
      opd_q.push_back({x, z});
      // random stall cycles
      en = 1;
      @(negedge clk);
      in_valid = 0;
      while ($urandom_range(0, 3) == 0) begin en = 0; @(negedge clk); end
      en = 1;
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
