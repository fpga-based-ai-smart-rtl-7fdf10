// tb_reduce_unit: drives random 8-lane words in the three modes (sum, pass
// local, pass received) with random input gaps and output back-pressure.
// Each output word and its routing tag are compared with a model built on
// the reference FP32 adder. Also checks the three-cycle latency and that a
// stream without back-pressure gives one word per cycle.
`timescale 1ns/1ps
module tb_reduce_unit;
  import nic_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  red_mode_e mode = RED_SUM;
  route_t tag_in = '0, tag_out;
  logic [255:0] a = '0, b = '0, y;
  int checks = 0, failures = 0;

  reduce_unit dut (.*);
  always #5 clk = ~clk;

  logic [258:0] exp_q[$];
  bit throttle = 1;
  int nout = 0;

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      logic [258:0] e;
      e = exp_q.pop_front();
      checks++;
      nout++;
      if ({tag_out, y} !== e) begin
        failures++;
        if (failures < 6) $display("MISMATCH got %h exp %h", {tag_out, y}, e);
      end
    end
  end
  always @(negedge clk) out_ready = throttle ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rnd_fp();
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'($urandom_range(100, 140));
    return v;
  endfunction

  task automatic send(bit gaps);
    logic [255:0] e;
    for (int l = 0; l < 8; l++) begin
      a[l*32 +: 32] = rnd_fp();
      b[l*32 +: 32] = rnd_fp();
    end
    mode   = red_mode_e'($urandom_range(0, 2));
    tag_in = route_t'($urandom_range(0, 7));
    for (int l = 0; l < 8; l++) begin
      case (mode)
        RED_SUM:     e[l*32 +: 32] = fadd(a[l*32 +: 32], b[l*32 +: 32]);
        RED_PASS_IN: e[l*32 +: 32] = a[l*32 +: 32];
        default:     e[l*32 +: 32] = b[l*32 +: 32];
      endcase
    end
    exp_q.push_back({tag_in, e});
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    if (gaps) while ($urandom_range(0, 2) == 0) @(negedge clk);
  endtask

  initial begin
    int lat, t1, n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    throttle = 0;
    @(negedge clk);
    send(0);
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("latency %0d, expected 3", lat); end
    throttle = 1;
    for (int i = 0; i < 5000; i++) send(1);
    while (exp_q.size() != 0) @(negedge clk);
    throttle = 0;
    @(negedge clk);
    t1 = $time; n0 = nout;
    for (int i = 0; i < 300; i++) send(0);
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    if ((($time - t1) / 10) > 304 || nout - n0 != 300) begin
      failures++;
      $display("throughput: %0d words in %0d cycles", nout - n0, ($time - t1) / 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
