// host_dma: moves gradients between worker memory and the NIC datapath.
//
// Read side: after go it fetches the node's own gradient vector in the order
// the ring schedule consumes it, and pushes the words into the In FIFO: for
// each segment of SEG_WORDS words, that segment of chunk r, r-1, ..., r+1
// (mod N) for rank r. Write side: it takes the results from the Out FIFO,
// which arrive per segment in the order chunk r+1, r, ..., r+2, and writes
// each word to its place in worker memory. Chunks are CW
// words long, so the vector is zero-padded at the end: a word wholly past the
// last gradient is not read (zeros are pushed instead) and not written, and a
// partly valid word is masked on read and written with byte enables. The
// result replaces the gradients in place.
//
// Following the paper: the NIC reads the gradients from its worker and writes
// the final result back over PCIe, given a start address and a gradient
// count, with the vector padded and split into N chunks. This design's
// choices: the request/response ports, which stand in for the PCIe/CCI-P
// shim (byte addresses, one 32-byte word per request, responses in request
// order with a ready), and up to TAGS reads in flight.
//
// Timing: one read request and one write request per cycle at most. wr_done
// rises when all N*CW words of the request have been written or dropped and
// stays high until the next go. wr_req_data is a wire from out_data.
module host_dma
  import nic_pkg::*;
#(
  parameter int unsigned LANES_P = nic_pkg::LANES,
  parameter int unsigned TAGS    = 256,
  parameter int unsigned SEG_WORDS = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     go,
  input  ar_req_t                  cfg,
  input  logic [COUNT_W-1:0]       chunk_words,
  // read requests and responses (worker memory)
  output logic                     rd_req_valid,
  input  logic                     rd_req_ready,
  output logic [ADDR_W-1:0]        rd_req_addr,
  input  logic                     rd_rsp_valid,
  output logic                     rd_rsp_ready,
  input  logic [LANES_P*FP_W-1:0]  rd_rsp_data,
  // In FIFO push
  output logic                     in_valid,
  input  logic                     in_ready,
  output logic [LANES_P*FP_W-1:0]  in_data,
  // Out FIFO pop
  input  logic                     out_valid,
  output logic                     out_ready,
  input  logic [LANES_P*FP_W-1:0]  out_data,
  // write requests (worker memory)
  output logic                     wr_req_valid,
  input  logic                     wr_req_ready,
  output logic [ADDR_W-1:0]        wr_req_addr,
  output logic [LANES_P*FP_W-1:0]  wr_req_data,
  output logic [LANES_P*4-1:0]     wr_req_be,
  output logic                     wr_done
);
  localparam int unsigned LW = $clog2(LANES_P + 1);

  // Start element of chunk c.
  function automatic logic [COUNT_W+NODE_W-1:0] chunk_start(logic [NODE_W-1:0] c,
                                                           logic [COUNT_W-1:0] cw);
    return (COUNT_W+NODE_W)'(c) * (COUNT_W+NODE_W)'(cw) * (COUNT_W+NODE_W)'(LANES_P);
  endfunction

  // Number of valid gradients in the word starting at element e.
  function automatic logic [LW-1:0] n_valid(logic [COUNT_W+NODE_W-1:0] e,
                                           logic [COUNT_W-1:0] count);
    logic [COUNT_W+NODE_W-1:0] left;
    if (e >= (COUNT_W+NODE_W)'(count)) return '0;
    left = (COUNT_W+NODE_W)'(count) - e;
    return (left >= (COUNT_W+NODE_W)'(LANES_P)) ? LW'(LANES_P) : LW'(left);
  endfunction

  function automatic logic [ADDR_W-1:0] elem_addr(logic [ADDR_W-1:0] base,
                                                 logic [COUNT_W+NODE_W-1:0] e);
    return base + (ADDR_W'(e) << 2);
  endfunction

  // Length of the segment that starts at word sb of a chunk.
  function automatic logic [COUNT_W-1:0] seg_len(logic [COUNT_W-1:0] sb, logic [COUNT_W-1:0] cw);
    return (cw - sb > COUNT_W'(SEG_WORDS)) ? COUNT_W'(SEG_WORDS) : cw - sb;
  endfunction

  // ======================= read side =======================
  logic                      rd_act;
  logic [NODE_W-1:0]         rd_k, rd_c;
  logic [COUNT_W-1:0]        rd_w, rd_sb;
  logic [COUNT_W+NODE_W-1:0] rd_e;
  logic [LW-1:0]             rd_n;
  logic                      rd_issue, tag_in_ready;

  typedef struct packed {
    logic          is_read;
    logic [LW-1:0] n;
  } tag_t;

  tag_t tag_head;
  logic tag_valid, tag_pop;

  assign rd_n         = n_valid(rd_e, cfg.count);
  assign rd_req_valid = rd_act && tag_in_ready && (rd_n != '0);
  assign rd_req_addr  = elem_addr(cfg.base, rd_e);
  assign rd_issue     = rd_act && tag_in_ready && ((rd_n == '0) || rd_req_ready);

  sync_fifo #(.WIDTH($bits(tag_t)), .DEPTH(TAGS)) u_tags (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (rd_issue),
    .in_ready  (tag_in_ready),
    .in_data   (tag_t'{is_read: (rd_n != '0), n: rd_n}),
    .out_valid (tag_valid),
    .out_ready (tag_pop),
    .out_data  (tag_head),
    .level     ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0;
      rd_k   <= '0;
      rd_c   <= '0;
      rd_w   <= '0;
      rd_sb  <= '0;
      rd_e   <= '0;
    end else if (go) begin
      rd_act <= (chunk_words != '0);
      rd_k   <= '0;
      rd_c   <= cfg.rank;
      rd_w   <= '0;
      rd_sb  <= '0;
      rd_e   <= chunk_start(cfg.rank, chunk_words);
    end else if (rd_issue) begin
      if (rd_w == seg_len(rd_sb, chunk_words) - 1'b1) begin
        logic [NODE_W-1:0]  c_next;
        logic [COUNT_W-1:0] sb_next;
        c_next  = (rd_c == '0) ? cfg.nodes - 1'b1 : rd_c - 1'b1;
        sb_next = rd_sb;
        rd_k    <= rd_k + 1'b1;
        if (rd_k == cfg.nodes - 1'b1) begin
          // segment done on all chunks: next segment, starting again at chunk r
          c_next  = cfg.rank;
          sb_next = rd_sb + seg_len(rd_sb, chunk_words);
          rd_k    <= '0;
          if (sb_next == chunk_words) rd_act <= 1'b0;
        end
        rd_w  <= '0;
        rd_c  <= c_next;
        rd_sb <= sb_next;
        rd_e  <= chunk_start(c_next, chunk_words) + (COUNT_W+NODE_W)'(sb_next) * (COUNT_W+NODE_W)'(LANES_P);
      end else begin
        rd_w <= rd_w + 1'b1;
        rd_e <= rd_e + (COUNT_W+NODE_W)'(LANES_P);
      end
    end
  end

  // Responses (or zero words) go to the In FIFO in request order.
  always_comb begin
    in_data = '0;
    for (int l = 0; l < LANES_P; l++) begin
      if (tag_head.is_read && LW'(l) < tag_head.n) in_data[l*FP_W +: FP_W] = rd_rsp_data[l*FP_W +: FP_W];
    end
  end
  assign in_valid     = tag_valid && (!tag_head.is_read || rd_rsp_valid);
  assign tag_pop      = in_valid && in_ready;
  assign rd_rsp_ready = tag_valid && tag_head.is_read && in_ready;

  // ======================= write side =======================
  logic                      wr_act;
  logic [NODE_W-1:0]         wr_k, wr_c;
  logic [COUNT_W-1:0]        wr_w, wr_sb;
  logic [NODE_W-1:0]         wr_c0;
  logic [COUNT_W+NODE_W-1:0] wr_e;
  logic [LW-1:0]             wr_n;
  logic                      wr_take;

  assign wr_n         = n_valid(wr_e, cfg.count);
  assign wr_req_valid = wr_act && out_valid && (wr_n != '0);
  assign wr_req_addr  = elem_addr(cfg.base, wr_e);
  assign wr_req_data  = out_data;
  always_comb begin
    for (int l = 0; l < LANES_P; l++) wr_req_be[l*4 +: 4] = {4{LW'(l) < wr_n}};
  end
  assign out_ready = wr_act && ((wr_n == '0) || wr_req_ready);
  assign wr_take   = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_act  <= 1'b0;
      wr_done <= 1'b0;
      wr_k    <= '0;
      wr_c    <= '0;
      wr_w    <= '0;
      wr_sb   <= '0;
      wr_c0   <= '0;
      wr_e    <= '0;
    end else if (go) begin
      logic [NODE_W-1:0] c0;
      c0 = (cfg.rank == cfg.nodes - 1'b1) ? '0 : cfg.rank + 1'b1;
      wr_act  <= (chunk_words != '0);
      wr_done <= (chunk_words == '0);
      wr_k    <= '0;
      wr_c    <= c0;
      wr_c0   <= c0;
      wr_w    <= '0;
      wr_sb   <= '0;
      wr_e    <= chunk_start(c0, chunk_words);
    end else if (wr_take) begin
      if (wr_w == seg_len(wr_sb, chunk_words) - 1'b1) begin
        logic [NODE_W-1:0]  c_next;
        logic [COUNT_W-1:0] sb_next;
        c_next  = (wr_c == '0) ? cfg.nodes - 1'b1 : wr_c - 1'b1;
        sb_next = wr_sb;
        wr_k    <= wr_k + 1'b1;
        if (wr_k == cfg.nodes - 1'b1) begin
          c_next  = wr_c0;
          sb_next = wr_sb + seg_len(wr_sb, chunk_words);
          wr_k    <= '0;
          if (sb_next == chunk_words) begin
            wr_act  <= 1'b0;
            wr_done <= 1'b1;
          end
        end
        wr_w  <= '0;
        wr_c  <= c_next;
        wr_sb <= sb_next;
        wr_e  <= chunk_start(c_next, chunk_words) + (COUNT_W+NODE_W)'(sb_next) * (COUNT_W+NODE_W)'(LANES_P);
      end else begin
        wr_w <= wr_w + 1'b1;
        wr_e <= wr_e + (COUNT_W+NODE_W)'(LANES_P);
      end
    end
  end

  // A read response never arrives while nothing is outstanding.
  assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> tag_valid);
endmodule
