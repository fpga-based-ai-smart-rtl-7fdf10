// tb_allreduce_ctrl: checks the ring schedule of the control FSM. For rings
// of 1 to 8 nodes, every rank, and gradient counts that need padding, the
// testbench plays the In and Rx FIFOs (operands present at random), the
// reduce pipeline (random acceptance, results returned in order) and the Tx
// and Out FIFOs (random space). Chunks longer than a 256-word segment are
// run segment by segment. It checks the computed chunk size, the mode
// and routing of every issued word against the schedule worked out here,
// that operands are popped exactly when used, that each result goes to
// exactly the destinations its tag names, and the done handshake.
`timescale 1ns/1ps
module tb_allreduce_ctrl;
  import nic_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, done, busy, go, wr_done = 0, tx_idle = 1;
  ar_req_t req = '0, cfg;
  logic [COUNT_W-1:0] chunk_words;
  logic in_valid = 0, in_pop, rx_valid = 0, rx_pop;
  logic [255:0] in_data = '0, rx_data = '0;
  logic red_valid, red_ready = 0;
  red_mode_e red_mode;
  route_t red_tag, res_tag;
  logic [255:0] red_a, red_b, res_data;
  logic res_valid, res_ready;
  logic tx_valid, tx_ready = 0, tx_last, out_valid, out_ready = 0;
  logic [255:0] tx_data, out_data;
  int checks = 0, failures = 0;

  allreduce_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s at %0t", what, $time);
    end
  endtask

  // expected schedule
  typedef struct packed { logic [1:0] mode; route_t tag; } item_t;
  item_t sched[$];
  // results in the model pipeline
  logic [258:0] pipe[$];
  int in_cnt, rx_cnt, tx_cnt, out_cnt, exp_tx, exp_out;

  assign res_valid = pipe.size() != 0;
  assign res_tag   = res_valid ? route_t'(pipe[0][258:256]) : '0;
  assign res_data  = res_valid ? pipe[0][255:0] : '0;

  always @(negedge clk) begin
    in_valid  = $urandom_range(0, 3) != 0;
    rx_valid  = $urandom_range(0, 2) != 0;
    red_ready = $urandom_range(0, 3) != 0;
    tx_ready  = $urandom_range(0, 3) != 0;
    out_ready = $urandom_range(0, 3) != 0;
    in_data   = 256'(in_cnt);
    rx_data   = 256'(rx_cnt) | (256'd1 << 255);
  end

  always @(posedge clk) if (rst_n) begin
    // issue side
    if (red_valid && red_ready) begin
      item_t e;
      e = sched.pop_front();
      check(red_mode == red_mode_e'(e.mode) && red_tag == e.tag, "schedule");
      check(in_pop == (e.mode != RED_PASS_RX) && rx_pop == (e.mode != RED_PASS_IN), "pops");
      if (in_pop) check(red_a == 256'(in_cnt), "a operand");
      if (rx_pop) check(red_b == (256'(rx_cnt) | (256'd1 << 255)), "b operand");
      pipe.push_back({red_tag, (red_mode == RED_PASS_RX) ? red_b : red_a});
    end else begin
      check(!in_pop && !rx_pop, "pop without issue");
    end
    if (in_pop) in_cnt++;
    if (rx_pop) rx_cnt++;
    // steering side
    if (res_valid) begin
      bit fire;
      fire = (!res_tag.to_tx || tx_ready) && (!res_tag.to_out || out_ready);
      check(res_ready == fire, "res_ready");
      check((tx_valid && tx_ready) == (fire && res_tag.to_tx) && (out_valid && out_ready) == (fire && res_tag.to_out), "steer");
      if (tx_valid) check(tx_data == pipe[0][255:0] && tx_last == res_tag.last, "tx data");
      if (out_valid) check(out_data == pipe[0][255:0], "out data");
      if (tx_valid && tx_ready) tx_cnt++;
      if (out_valid && out_ready) out_cnt++;
      if (fire) void'(pipe.pop_front());
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int r, int count);
    int ce, cw, nops;
    ce = (count + n - 1) / n;
    cw = ((ce + 15) / 16) * 2;
    sched.delete();
    exp_tx = 0; exp_out = 0; tx_cnt = 0; out_cnt = 0;
    nops = (n == 1) ? 1 : 2 * n - 1;
    for (int sb = 0; sb < cw; sb += 256)
    for (int k = 0; k < nops; k++) begin
      int len;
      len = (cw - sb > 256) ? 256 : cw - sb;
      for (int w = 0; w < len; w++) begin
        item_t e;
        e.tag.last = (w == len - 1);
        if (n == 1)      begin e.mode = RED_PASS_IN; e.tag.to_tx = 0; e.tag.to_out = 1; end
        else if (k == 0) begin e.mode = RED_PASS_IN; e.tag.to_tx = 1; e.tag.to_out = 0; end
        else if (k < n)  begin e.mode = RED_SUM;     e.tag.to_tx = 1; e.tag.to_out = (k == n - 1); end
        else             begin e.mode = RED_PASS_RX; e.tag.to_tx = (k != 2 * n - 2); e.tag.to_out = 1; end
        exp_tx += e.tag.to_tx; exp_out += e.tag.to_out;
        sched.push_back(e);
      end
    end
    @(negedge clk);
    req = '{base: 48'h1000, count: 32'(count), nodes: 6'(n), rank: 6'(r), bfp_en: 1'b1};
    req_valid = 1;
    @(posedge clk);
    check(req_ready, "req_ready when idle");
    @(negedge clk);
    req_valid = 0;
    while (!go) @(negedge clk);
    check(chunk_words == 32'(cw), $sformatf("chunk_words %0d vs %0d", chunk_words, cw));
    check(cfg.nodes == 6'(n) && cfg.rank == 6'(r), "cfg");
    // the write side reports done once the expected write-backs went through
    while (sched.size() != 0 || pipe.size() != 0) begin
      check(!done, "early done");
      @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check(!done && busy, "done waits for write-back");
    tx_idle = 0;
    wr_done = 1;
    repeat (5) @(negedge clk);
    check(!done && busy, "done waits for tx idle");
    tx_idle = 1;
    @(posedge clk);
    @(negedge clk);
    check(done || !busy, "done");
    @(negedge clk);
    wr_done = 0;
    check(!busy && tx_cnt == exp_tx && out_cnt == exp_out, "counts");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 1; n <= 8; n++)
      for (int r = 0; r < n; r++)
        run(n, r, $urandom_range(1, 600));
    run(6, 5, 2048 * 6);
    run(32, 31, 4000);
    run(4, 1, 20000);   // three segments per chunk: 256, 256, 114 words
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
