// tb_host_dma: checks the read and write sequencing of the DMA engine
// against worker memory modelled here (reads answered in order after a random
// delay, random acceptance of requests). For several ring sizes, ranks and
// gradient counts, with 6-word segments, it checks that the In FIFO receives
// each segment of the chunks in the order r, r-1, ..., r+1 with zero padding past the last gradient, that no read or
// write touches memory beyond it, that the results offered in the order r+1,
// r, ..., r+2 land at the right addresses with the right byte enables, and
// that wr_done comes after the last word.
`timescale 1ns/1ps
module tb_host_dma;
  import nic_pkg::*;
  logic clk = 0, rst_n = 0, go = 0;
  ar_req_t cfg = '0;
  logic [COUNT_W-1:0] chunk_words = '0;
  logic rd_req_valid, rd_req_ready = 0, rd_rsp_valid = 0, rd_rsp_ready;
  logic [ADDR_W-1:0] rd_req_addr, wr_req_addr;
  logic [255:0] rd_rsp_data = '0, in_data, out_data, wr_req_data;
  logic in_valid, in_ready = 0, out_valid = 0, out_ready, wr_req_valid, wr_req_ready = 0;
  logic [31:0] wr_req_be;
  logic wr_done;
  int checks = 0, failures = 0;

  localparam int SEG = 6;
  host_dma #(.TAGS(16), .SEG_WORDS(SEG)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s at %0t", what, $time);
    end
  endtask

  localparam logic [ADDR_W-1:0] BASE = 48'h10_0000;
  logic [31:0] mem [int];          // element index -> value
  int count, nodes, rank, cw;

  // read responses: in order, random delay
  logic [255:0] rsp_q[$];
  int           rsp_t[$];
  int           cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    rd_rsp_valid = rsp_q.size() != 0 && rsp_t[0] <= cyc;
    rd_rsp_data  = rsp_q.size() != 0 ? rsp_q[0] : '0;
  end

  always @(negedge clk) begin
    rd_req_ready = $urandom_range(0, 3) != 0;
    wr_req_ready = $urandom_range(0, 3) != 0;
    in_ready     = $urandom_range(0, 4) != 0;
  end

  // expected In words
  logic [255:0] in_exp[$];
  // results offered on the Out side, and where they must go
  logic [255:0] out_src[$];

  always @(posedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      logic [255:0] d;
      int e;
      e = int'((rd_req_addr - BASE) >> 2);
      check(rd_req_addr[4:0] == 0 && e >= 0 && e < count, "read in range");
      for (int l = 0; l < 8; l++) d[l*32 +: 32] = mem.exists(e + l) ? mem[e + l] : 32'hdead_beef;
      rsp_q.push_back(d);
      rsp_t.push_back(cyc + $urandom_range(1, 20));
    end
    if (rd_rsp_valid && rd_rsp_ready) begin
      void'(rsp_q.pop_front());
      void'(rsp_t.pop_front());
    end
    if (in_valid && in_ready) begin
      check(in_exp.size() != 0 && in_data == in_exp[0], "in word");
      if (in_exp.size() != 0 && in_data != in_exp[0] && failures < 3) $display("got %h\nexp %h", in_data, in_exp[0]);
      void'(in_exp.pop_front());
    end
    if (wr_req_valid && wr_req_ready) begin
      int e;
      e = int'((wr_req_addr - BASE) >> 2);
      check(wr_req_addr[4:0] == 0 && e >= 0 && e < count, "write in range");
      for (int l = 0; l < 8; l++) begin
        check(wr_req_be[l*4 +: 4] == ((e + l < count) ? 4'hf : 4'h0), "byte enables");
        if (wr_req_be[l*4]) mem[e + l] = wr_req_data[l*32 +: 32];
      end
    end
  end

  // Out side: offer the results in order
  always @(posedge clk) if (rst_n && out_valid && out_ready) void'(out_src.pop_front());
  always @(negedge clk) begin
    // results exist only after the last gradient was read (as in the ring schedule)
    out_valid = out_src.size() != 0 && in_exp.size() == 0 && $urandom_range(0, 2) != 0;
    out_data  = out_src.size() != 0 ? out_src[0] : '0;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int r, int cnt);
    int ce;
    nodes = n; rank = r; count = cnt;
    ce = (cnt + n - 1) / n;
    cw = ((ce + 15) / 16) * 2;
    mem.delete();
    for (int e = 0; e < cnt; e++) mem[e] = $urandom;
    in_exp.delete();
    out_src.delete();
    for (int sb = 0; sb < cw; sb += SEG)
    for (int k = 0; k < n; k++) begin
      int c;
      c = ((r - k) % n + n) % n;
      for (int w = sb; w < sb + SEG && w < cw; w++) begin
        logic [255:0] d;
        for (int l = 0; l < 8; l++) begin
          int e;
          e = c * cw * 8 + w * 8 + l;
          d[l*32 +: 32] = (e < cnt) ? mem[e] : 32'd0;
        end
        in_exp.push_back(d);
      end
    end
    // results: element e gets the value ~e
    for (int sb = 0; sb < cw; sb += SEG)
    for (int k = 0; k < n; k++) begin
      int c;
      c = ((r + 1 - k) % n + n) % n;
      for (int w = sb; w < sb + SEG && w < cw; w++) begin
        logic [255:0] d;
        for (int l = 0; l < 8; l++) d[l*32 +: 32] = ~32'(c * cw * 8 + w * 8 + l);
        out_src.push_back(d);
      end
    end
    @(negedge clk);
    cfg = '{base: BASE, count: 32'(cnt), nodes: 6'(n), rank: 6'(r), bfp_en: 1'b0};
    chunk_words = 32'(cw);
    go = 1;
    @(negedge clk);
    go = 0;
    while (!wr_done) begin
      @(negedge clk);
    end
    check(out_src.size() == 0, "all results taken before wr_done");
    while (in_exp.size() != 0) @(negedge clk);
    repeat (30) @(negedge clk);
    check(rsp_q.size() == 0, "all responses taken");
    for (int e = 0; e < cnt; e++) check(mem[e] == ~32'(e), "memory after write-back");
    check(mem.size() == cnt, "nothing written past the end");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 0, 37);
    for (int n = 2; n <= 6; n++)
      for (int r = 0; r < n; r++)
        run(n, r, $urandom_range(1, 700));
    run(4, 2, 512);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
