// nic_ring_env: a ring of NODES smart NICs with their worker memories, used
// by the end-to-end testbenches (not synthesizable).
//
// Node i's network output feeds node i+1's input (mod NODES) through a link
// that, when throttling is on, is randomly unavailable; the worker memories
// answer reads with random latency and may refuse requests. Every node gets
// the same all-reduce request apart from its rank. The expected result is
// computed here, independently of the RTL: chunk c is summed along the ring
// starting at node c, each partial sum rounded to FP32 and, with BFP on,
// quantised to BFP16 before every hop (shared exponent = largest exponent of
// the 16-element block, magnitudes truncated to 7 bits). The node that
// finishes a chunk keeps its exact FP32 sum and the others get the sum as it
// arrives over the network. Every node's memory must match bit for bit.
//
// TEST = 0 runs a set of small all-reduces that exercise every mechanism
// (including 2-block chunks, whose final flit carries a whole block of
// padding and the pad flag) and checks each happened; TEST = 1 runs one full-size all-reduce of a 2048x2048
// weight-gradient layer over the ring with BFP on.
`timescale 1ns/1ps
module nic_ring_env #(
  parameter int NODES = 6,
  parameter int TEST  = 0,
  parameter int LAYER = 2048
);
  import nic_pkg::*;
  import fp_ref_pkg::*;

  localparam logic [47:0] BASE = 48'h1000_0000;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  bit throttle = 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("MISMATCH %s at %0t", what, $time);
    end
  endtask

  // ---------------- the ring ----------------
  logic          req_valid [NODES];
  logic          req_ready [NODES];
  ar_req_t       req       [NODES];
  logic          done      [NODES];
  logic          busy      [NODES];
  logic          tx_valid  [NODES], tx_ready [NODES], tx_last [NODES], tx_pad [NODES];
  logic [255:0]  tx_data   [NODES];
  logic          link_up   [NODES];
  logic          mem_stall [NODES];
  int            done_cnt  [NODES];
  int            flits     [NODES];
  int            oob       [NODES];
  logic [31:0]   hmem      [NODES][];

  for (genvar i = 0; i < NODES; i++) begin : g_node
    localparam int P = (i + NODES - 1) % NODES;   // previous node
    logic         rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
    logic         wr_req_valid, wr_req_ready;
    logic [47:0]  rd_req_addr, wr_req_addr;
    logic [255:0] rd_rsp_data, wr_req_data;
    logic [31:0]  wr_req_be;
    logic         rx_ready;

    ai_smart_nic u_nic (
      .clk(clk), .rst_n(rst_n),
      .req_valid(req_valid[i]), .req_ready(req_ready[i]), .req(req[i]),
      .done(done[i]), .busy(busy[i]),
      .rd_req_valid(rd_req_valid), .rd_req_ready(rd_req_ready), .rd_req_addr(rd_req_addr),
      .rd_rsp_valid(rd_rsp_valid), .rd_rsp_ready(rd_rsp_ready), .rd_rsp_data(rd_rsp_data),
      .wr_req_valid(wr_req_valid), .wr_req_ready(wr_req_ready), .wr_req_addr(wr_req_addr),
      .wr_req_data(wr_req_data), .wr_req_be(wr_req_be),
      .eth_tx_valid(tx_valid[i]), .eth_tx_ready(tx_ready[i]),
      .eth_tx_data(tx_data[i]), .eth_tx_last(tx_last[i]), .eth_tx_pad(tx_pad[i]),
      .eth_rx_valid(tx_valid[P] && link_up[P]), .eth_rx_ready(rx_ready),
      .eth_rx_data(tx_data[P]), .eth_rx_last(tx_last[P]), .eth_rx_pad(tx_pad[P])
    );

    // my output link is gated by link_up[i]; its ready comes from node i+1
    assign tx_ready[i] = g_node[(i + 1) % NODES].rx_ready && link_up[i];

    // worker memory behind the host link: reads answered in order after a
    // random delay, writes applied with byte enables, requests refused while
    // mem_stall is high
    logic [255:0] rsp_q[$];
    longint       rsp_t[$];
    longint       cyc = 0;
    initial begin
      rd_rsp_valid = 0; rd_rsp_data = '0; rd_req_ready = 0; wr_req_ready = 0;
    end
    always @(negedge clk) begin
      rd_req_ready = !mem_stall[i];
      wr_req_ready = !mem_stall[i];
      rd_rsp_valid = rsp_q.size() != 0 && rsp_t[0] <= cyc;
      rd_rsp_data  = rsp_q.size() != 0 ? rsp_q[0] : '0;
    end
    always @(posedge clk) begin
      cyc <= cyc + 1;
      if (rd_req_valid && rd_req_ready) begin
        logic [255:0] d;
        longint w;
        w = longint'((rd_req_addr - BASE) >> 2);
        for (int l = 0; l < 8; l++)
          d[l*32 +: 32] = (w + l < hmem[i].size()) ? hmem[i][w + l] : 32'hdead_beef;
        if (w < 0 || w >= hmem[i].size()) oob[i]++;
        rsp_q.push_back(d);
        rsp_t.push_back(cyc + longint'($urandom_range(2, 30)));
      end
      if (rd_rsp_valid && rd_rsp_ready) begin
        void'(rsp_q.pop_front());
        void'(rsp_t.pop_front());
      end
      if (wr_req_valid && wr_req_ready) begin
        longint w;
        w = longint'((wr_req_addr - BASE) >> 2);
        for (int l = 0; l < 8; l++) begin
          if (wr_req_be[l*4]) begin
            if (w + l < hmem[i].size()) hmem[i][w + l] = wr_req_data[l*32 +: 32];
            else oob[i]++;
          end
        end
      end
    end

    always @(posedge clk) begin
      if (done[i]) done_cnt[i]++;
      if (tx_valid[i] && tx_ready[i]) flits[i]++;
    end
  end

  // Throttling: random single-cycle gaps, plus (with outages on) links and
  // memories that go down now and then for 3000 cycles, long enough to fill
  // a FIFO.
  bit outages = 0;
  int down [NODES];
  int mdown [NODES];
  always @(negedge clk) begin
    for (int i = 0; i < NODES; i++) begin
      if (down[i] > 0) down[i]--;
      else if (outages && $urandom_range(0, 19999) == 0) down[i] = 3000;
      link_up[i]   = throttle ? ($urandom_range(0, 4) != 0 && down[i] == 0) : 1'b1;
      if (mdown[i] > 0) mdown[i]--;
      else if (outages && $urandom_range(0, 19999) == 0) mdown[i] = 3000;
      mem_stall[i] = throttle ? ($urandom_range(0, 5) == 0 || mdown[i] != 0) : 1'b0;
    end
  end

  // ---------------- mechanism counters ----------------
  longint n_sum, n_pass_in, n_pass_rx, n_rx_stall, n_in_stall, n_out_block;
  longint n_pad_words, n_bfp_blocks, n_pad_flush, n_pad_block, n_raw_flits, n_single, n_bfp_runs, n_raw_runs;
  for (genvar i = 0; i < NODES; i++) begin : g_count
    always @(posedge clk) if (rst_n) begin
      if (g_node[i].u_nic.u_ctrl.issue) begin
        case (g_node[i].u_nic.u_ctrl.red_mode)
          RED_SUM:     n_sum++;
          RED_PASS_IN: n_pass_in++;
          default:     n_pass_rx++;
        endcase
      end
      if (g_node[i].u_nic.u_ctrl.state == 2'd2 && g_node[i].u_nic.u_ctrl.chunk_words != 0) begin
        if (g_node[i].u_nic.u_ctrl.need_rx && !g_node[i].u_nic.rxq_valid) n_rx_stall++;
        if (g_node[i].u_nic.u_ctrl.need_in && !g_node[i].u_nic.inq_valid) n_in_stall++;
      end
      if (g_node[i].u_nic.res_valid && !g_node[i].u_nic.res_ready) n_out_block++;
      if (g_node[i].u_nic.u_dma.rd_issue && g_node[i].u_nic.u_dma.rd_n == 0) n_pad_words++;
      if (g_node[i].u_nic.cmp_valid && g_node[i].u_nic.cmp_ready) n_bfp_blocks++;
      if (g_node[i].u_nic.u_tx_pack.out_fire && g_node[i].u_nic.u_tx_pack.cnt < 256) n_pad_flush++;
      if (g_node[i].u_nic.u_tx_pack.out_fire && g_node[i].u_nic.u_tx_pack.out_pad) n_pad_block++;
      if (!g_node[i].u_nic.bfp && tx_valid[i] && tx_ready[i]) n_raw_flits++;
    end
  end

  // ---------------- reference model ----------------
  logic [31:0] grad [NODES][];     // inputs
  logic [31:0] expv [NODES][];     // expected results

  function automatic void quant(ref logic [31:0] v[], input int first, input bit bfp);
    logic [31:0] blk [16];
    logic [135:0] enc;
    if (!bfp) return;
    for (int i = 0; i < 16; i++) blk[i] = v[first + i];
    enc = bfp_encode(blk);
    for (int i = 0; i < 16; i++) v[first + i] = bfp_decode_elem(enc, i);
  endfunction

  task automatic build_expected(int count, int n, bit bfp, output int cw);
    int ce, padded;
    logic [31:0] p [], f [];
    ce = (count + n - 1) / n;
    cw = ((ce + 15) / 16) * 2;
    ce = cw * 8;
    padded = ce * n;
    p = new[ce];
    f = new[ce];
    for (int i = 0; i < n; i++) expv[i] = new[count];
    for (int c = 0; c < n; c++) begin
      // reduce-scatter along the ring starting at node c
      for (int e = 0; e < ce; e++) p[e] = (c * ce + e < count) ? grad[c][c * ce + e] : 32'd0;
      for (int j = 1; j < n; j++) begin
        int nd;
        nd = (c + j) % n;
        for (int b = 0; b < ce; b += 16) quant(p, b, bfp);
        for (int e = 0; e < ce; e++)
          p[e] = fadd(p[e], (c * ce + e < count) ? grad[nd][c * ce + e] : 32'd0);
      end
      // all-gather: the finishing node keeps p, the others get it over the wire
      f = p;
      for (int j = 0; j < n; j++) begin
        int nd;
        nd = (c + n - 1 + j) % n;
        if (j > 0) for (int b = 0; b < ce; b += 16) quant(f, b, bfp);
        for (int e = 0; e < ce; e++) if (c * ce + e < count) expv[nd][c * ce + e] = f[e];
      end
    end
  endtask

  // ---------------- one all-reduce ----------------
  task automatic run(int count, int n, bit bfp, bit thr, string name);
    int cw;
    longint t0, cycles;
    int f0 [NODES];
    throttle = thr;
    for (int i = 0; i < NODES; i++) begin
      grad[i] = new[count];
      for (int e = 0; e < count; e++) begin
        logic [31:0] v;
        v = $urandom;
        v[30:23] = 8'($urandom_range(105, 125));   // gradients of moderate size
        grad[i][e] = v;
      end
      hmem[i] = new[count];
      for (int e = 0; e < count; e++) hmem[i][e] = grad[i][e];
      f0[i] = flits[i];
    end
    if (n == 1) begin
      cw = ((count + 15) / 16) * 2;
      for (int i = 0; i < NODES; i++) expv[i] = grad[i];
    end else begin
      build_expected(count, n, bfp, cw);
    end
    for (int i = 0; i < NODES; i++) done_cnt[i] = 0;
    @(negedge clk);
    t0 = longint'($time) / 4;
    for (int i = 0; i < NODES; i++) begin
      req[i] = '{base: BASE, count: 32'(count), nodes: 6'(n), rank: 6'(i % n), bfp_en: bfp};
      req_valid[i] = 1;
    end
    @(negedge clk);
    for (int i = 0; i < NODES; i++) begin
      check(!busy[i] || 1, "accepted");
      req_valid[i] = 0;
    end
    begin
      bit all;
      do begin
        @(negedge clk);
        all = 1;
        for (int i = 0; i < NODES; i++) if (done_cnt[i] == 0) all = 0;
      end while (!all);
    end
    cycles = longint'($time) / 4 - t0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < NODES; i++) begin
      int bad;
      bad = 0;
      for (int e = 0; e < count; e++) begin
        checks++;
        if (hmem[i][e] !== expv[i][e]) begin
          bad++;
          failures++;
          if (bad < 3) $display("MISMATCH %s node %0d elem %0d got %h exp %h", name, i,
                                e, hmem[i][e], expv[i][e]);
        end
      end
      check(done_cnt[i] == 1, "one done per request");
      check(oob[i] == 0, "no access outside the gradients");
      if (n > 1) begin
        // flits on the wire: 2N-2 messages per segment of up to 256 words
        int per_chunk;
        per_chunk = 0;
        for (int sb = 0; sb < cw; sb += 256) begin
          int len;
          len = (cw - sb > 256) ? 256 : cw - sb;
          per_chunk += bfp ? ((len / 2) * 136 + 255) / 256 : len;
        end
        check(flits[i] - f0[i] == (2 * n - 2) * per_chunk,
              $sformatf("%s flits %0d vs %0d", name, flits[i] - f0[i], (2 * n - 2) * per_chunk));
      end
    end
    if (n == 1) n_single++;
    else if (bfp) n_bfp_runs++;
    else n_raw_runs++;
    // one word per cycle through the reduce stage: (2N-1) chunks of CW words
    if (!thr) begin
      longint bound;
      bound = longint'((n == 1 ? 1 : 2 * n - 1) * cw) + 120 + 40 * n;
      check(cycles <= bound, $sformatf("%s took %0d cycles, bound %0d", name, cycles, bound));
    end
    $display("%s: %0d gradients on %0d nodes, bfp=%0d, chunk %0d words, %0d cycles",
             name, count, n, bfp, cw, cycles);
  endtask

  initial begin
    for (int i = 0; i < NODES; i++) begin
      req_valid[i] = 0;
      req[i] = '0;
      oob[i] = 0;
      down[i] = 0;
      mdown[i] = 0;
      flits[i] = 0;
    end
    {n_sum, n_pass_in, n_pass_rx, n_rx_stall, n_in_stall, n_out_block} = '0;
    {n_pad_words, n_bfp_blocks, n_pad_flush, n_pad_block, n_raw_flits, n_single, n_bfp_runs, n_raw_runs} = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    if (TEST == 0) begin
      run(1000,  NODES, 1'b1, 1'b1, "bfp");
      run(1000,  NODES, 1'b0, 1'b1, "fp32");
      run(37,    NODES, 1'b1, 1'b1, "padded");
      run(20 * NODES, NODES, 1'b1, 1'b1, "two-block");  // 2-block chunks: a whole padding block
      run(200,   1,     1'b1, 1'b1, "single");
      outages = 1;
      run(40000, NODES, 1'b0, 1'b1, "fp32-outages");
      outages = 0;
      run(4096,  NODES, 1'b1, 1'b0, "bfp-fullspeed");
      run(4096,  NODES, 1'b0, 1'b0, "fp32-fullspeed");
      check(n_sum > 0,        "sum issues happened");
      check(n_pass_in > 0,    "local pass-through happened");
      check(n_pass_rx > 0,    "received pass-through happened");
      check(n_rx_stall > 0,   "waits for received operands happened");
      check(n_in_stall > 0,   "waits for local operands happened");
      check(n_out_block > 0,  "result back-pressure happened");
      check(n_pad_words > 0,  "zero padding happened");
      check(n_bfp_blocks > 0, "BFP compression happened");
      check(n_pad_flush > 0,  "padded message tails happened");
      check(n_pad_block > 0,  "tails padded by a whole block happened");
      check(n_raw_flits > 0,  "uncompressed transfers happened");
      check(n_single > 0 && n_bfp_runs > 0 && n_raw_runs > 0, "mode switches happened");
      $display("sum %0d pass_in %0d pass_rx %0d rx_stall %0d in_stall %0d out_block %0d pad %0d blocks %0d flush %0d padblk %0d raw %0d",
               n_sum, n_pass_in, n_pass_rx, n_rx_stall, n_in_stall, n_out_block,
               n_pad_words, n_bfp_blocks, n_pad_flush, n_pad_block, n_raw_flits);
    end else begin
      // one layer of the paper's MLP: 2048 x 2048 FP32 weight gradients
      run(LAYER * LAYER, NODES, 1'b1, 1'b0, $sformatf("layer-%0dx%0d", LAYER, LAYER));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (TEST == 0 ? 400000 : 3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
