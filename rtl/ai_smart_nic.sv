// ai_smart_nic: one node's AI smart NIC, ring all-reduce with BFP compression.
//
// Data parallel training ends every layer's backward pass with an all-reduce
// of the weight gradients across all workers. This NIC does that all-reduce
// for its worker. Given the address and count of the gradients, it reads them
// over the host link, adds them chunk by chunk to the partial sums arriving
// from the previous node of a logical ring, sends its results to the next
// node, and writes the final sums back in place. The worker keeps computing
// meanwhile.
//
// Datapath, as in the paper's block diagram:
//   worker memory -> host_dma -> In FIFO ------------------\
//   network rx -> [flits to blocks -> BFP to FP32] -> Rx FIFO -> Reduce (LANES
//   FP32 adders) -> Ctrl steering -> Tx FIFO -> [FP32 to BFP -> blocks to
//   flits] -> network tx
//                               \-> Out FIFO -> host_dma -> worker memory
// The bracketed converters are used when the request sets bfp_en. Otherwise
// FP32 words go onto the network as they are. The ring schedule is in
// allreduce_ctrl.
//
// Interfaces (valid/ready on all streams):
//   req/done       all-reduce request {base, count, nodes, rank, bfp_en};
//                  req_ready is high when idle, and done pulses at the end
//   rd_req/rd_rsp  32-byte reads of worker memory, responses in order
//   wr_req         32-byte writes with byte enables
//   eth_tx/eth_rx  ETH_W-bit network flits, last marking the end of a message;
//                  pad, with last, marks a final flit whose zero padding is at
//                  least one whole BFP block (see stream_gearbox)
// The host link and the Ethernet transport, which are vendor shims, are
// outside this module. Each segment of a chunk (SEG_WORDS words) travels as
// one message from this node to the next one in the ring. All nodes of a
// ring must use the same bfp_en.
//
// Following the paper: the FIFOs, Reduce and Ctrl blocks and their
// connections, FP32 reduction, BFP16 on the wire, 8 lanes (a 256-bit word)
// for 40 Gb/s. This design's choices: FIFO depths, handshakes, message
// framing, segmenting of chunks and the gearboxes that pack 136-bit BFP blocks into 256-bit flits.
module ai_smart_nic
  import nic_pkg::*;
#(
  parameter int unsigned LANES_P    = nic_pkg::LANES,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned TAGS       = 256,
  parameter int unsigned SEG_WORDS  = 256,
  localparam int unsigned WORD_W    = LANES_P * FP_W,
  localparam int unsigned ETH_W     = WORD_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // all-reduce request from the worker
  input  logic                 req_valid,
  output logic                 req_ready,
  input  ar_req_t              req,
  output logic                 done,
  output logic                 busy,
  // worker memory (host link)
  output logic                 rd_req_valid,
  input  logic                 rd_req_ready,
  output logic [ADDR_W-1:0]    rd_req_addr,
  input  logic                 rd_rsp_valid,
  output logic                 rd_rsp_ready,
  input  logic [WORD_W-1:0]    rd_rsp_data,
  output logic                 wr_req_valid,
  input  logic                 wr_req_ready,
  output logic [ADDR_W-1:0]    wr_req_addr,
  output logic [WORD_W-1:0]    wr_req_data,
  output logic [LANES_P*4-1:0] wr_req_be,
  // network, to the next node
  output logic                 eth_tx_valid,
  input  logic                 eth_tx_ready,
  output logic [ETH_W-1:0]     eth_tx_data,
  output logic                 eth_tx_last,
  output logic                 eth_tx_pad,
  // network, from the previous node
  input  logic                 eth_rx_valid,
  output logic                 eth_rx_ready,
  input  logic [ETH_W-1:0]     eth_rx_data,
  input  logic                 eth_rx_last,
  input  logic                 eth_rx_pad
);
  localparam int unsigned BW = BFP_EXP_W + BFP_BLOCK * (1 + BFP_MAN_W);

  ar_req_t            cfg;
  logic [COUNT_W-1:0] chunk_words;
  logic               go, wr_done, tx_idle;

  // In FIFO
  logic              dma_in_valid, dma_in_ready;
  logic [WORD_W-1:0] dma_in_data;
  logic              inq_valid, inq_pop;
  logic [WORD_W-1:0] inq_data;
  // Rx FIFO
  logic              rxq_push_valid, rxq_push_ready;
  logic [WORD_W-1:0] rxq_push_data;
  logic              rxq_valid, rxq_pop;
  logic [WORD_W-1:0] rxq_data;
  // reduce
  logic              red_valid, red_ready, res_valid, res_ready;
  red_mode_e         red_mode;
  route_t            red_tag, res_tag;
  logic [WORD_W-1:0] red_a, red_b, res_data;
  // Tx and Out FIFOs
  logic              txq_push_valid, txq_push_ready, txq_push_last;
  logic [WORD_W-1:0] txq_push_data;
  logic              txq_valid, txq_ready;
  logic [WORD_W:0]   txq_out;
  logic              outq_push_valid, outq_push_ready;
  logic [WORD_W-1:0] outq_push_data;
  logic              outq_valid, outq_ready;
  logic [WORD_W-1:0] outq_data;

  allreduce_ctrl #(.LANES_P(LANES_P), .SEG_WORDS(SEG_WORDS)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .req_valid  (req_valid),
    .req_ready  (req_ready),
    .req        (req),
    .done       (done),
    .busy       (busy),
    .cfg        (cfg),
    .chunk_words(chunk_words),
    .go         (go),
    .wr_done    (wr_done),
    .tx_idle    (tx_idle),
    .in_valid   (inq_valid),
    .in_pop     (inq_pop),
    .in_data    (inq_data),
    .rx_valid   (rxq_valid),
    .rx_pop     (rxq_pop),
    .rx_data    (rxq_data),
    .red_valid  (red_valid),
    .red_ready  (red_ready),
    .red_mode   (red_mode),
    .red_tag    (red_tag),
    .red_a      (red_a),
    .red_b      (red_b),
    .res_valid  (res_valid),
    .res_ready  (res_ready),
    .res_tag    (res_tag),
    .res_data   (res_data),
    .tx_valid   (txq_push_valid),
    .tx_ready   (txq_push_ready),
    .tx_data    (txq_push_data),
    .tx_last    (txq_push_last),
    .out_valid  (outq_push_valid),
    .out_ready  (outq_push_ready),
    .out_data   (outq_push_data)
  );

  host_dma #(.LANES_P(LANES_P), .TAGS(TAGS), .SEG_WORDS(SEG_WORDS)) u_dma (
    .clk          (clk),
    .rst_n        (rst_n),
    .go           (go),
    .cfg          (cfg),
    .chunk_words  (chunk_words),
    .rd_req_valid (rd_req_valid),
    .rd_req_ready (rd_req_ready),
    .rd_req_addr  (rd_req_addr),
    .rd_rsp_valid (rd_rsp_valid),
    .rd_rsp_ready (rd_rsp_ready),
    .rd_rsp_data  (rd_rsp_data),
    .in_valid     (dma_in_valid),
    .in_ready     (dma_in_ready),
    .in_data      (dma_in_data),
    .out_valid    (outq_valid),
    .out_ready    (outq_ready),
    .out_data     (outq_data),
    .wr_req_valid (wr_req_valid),
    .wr_req_ready (wr_req_ready),
    .wr_req_addr  (wr_req_addr),
    .wr_req_data  (wr_req_data),
    .wr_req_be    (wr_req_be),
    .wr_done      (wr_done)
  );

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(dma_in_valid), .in_ready(dma_in_ready), .in_data(dma_in_data),
    .out_valid(inq_valid), .out_ready(inq_pop), .out_data(inq_data), .level()
  );

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_rx_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rxq_push_valid), .in_ready(rxq_push_ready), .in_data(rxq_push_data),
    .out_valid(rxq_valid), .out_ready(rxq_pop), .out_data(rxq_data), .level()
  );

  reduce_unit #(.LANES_P(LANES_P)) u_reduce (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (red_valid),
    .in_ready (red_ready),
    .mode     (red_mode),
    .tag_in   (red_tag),
    .a        (red_a),
    .b        (red_b),
    .out_valid(res_valid),
    .out_ready(res_ready),
    .tag_out  (res_tag),
    .y        (res_data)
  );

  sync_fifo #(.WIDTH(WORD_W + 1), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(txq_push_valid), .in_ready(txq_push_ready),
    .in_data({txq_push_last, txq_push_data}),
    .out_valid(txq_valid), .out_ready(txq_ready), .out_data(txq_out), .level()
  );

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(outq_push_valid), .in_ready(outq_push_ready), .in_data(outq_push_data),
    .out_valid(outq_valid), .out_ready(outq_ready), .out_data(outq_data), .level()
  );

  // ---------------- transmit path: FP32 to BFP, blocks to flits ----------------
  logic              bfp;
  logic              cmp_in_valid, cmp_in_ready, cmp_valid, cmp_ready, cmp_last;
  logic [BW-1:0]     cmp_data;
  logic              gtx_valid, gtx_ready, gtx_last, gtx_pad;
  logic [ETH_W-1:0]  gtx_data;

  assign bfp          = cfg.bfp_en;
  assign cmp_in_valid = txq_valid && bfp;
  assign txq_ready    = bfp ? cmp_in_ready : eth_tx_ready;

  bfp_compress #(.LANES_P(LANES_P)) u_fp32_to_bfp (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cmp_in_valid), .in_ready(cmp_in_ready),
    .in_data(txq_out[WORD_W-1:0]), .in_last(txq_out[WORD_W]),
    .out_valid(cmp_valid), .out_ready(cmp_ready), .out_data(cmp_data), .out_last(cmp_last)
  );

  stream_gearbox #(.IN_W(BW), .OUT_W(ETH_W), .PAD_TAIL(1'b1)) u_tx_pack (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cmp_valid), .in_ready(cmp_ready), .in_data(cmp_data), .in_last(cmp_last),
    .in_pad(1'b0),
    .out_valid(gtx_valid), .out_ready(gtx_ready), .out_data(gtx_data), .out_last(gtx_last),
    .out_pad(gtx_pad)
  );

  assign gtx_ready    = bfp && eth_tx_ready;
  assign eth_tx_valid = bfp ? gtx_valid : txq_valid;
  assign eth_tx_data  = bfp ? gtx_data  : txq_out[WORD_W-1:0];
  assign eth_tx_last  = bfp ? gtx_last  : txq_out[WORD_W];
  assign eth_tx_pad   = bfp && gtx_pad;

  // Messages pushed into the Tx FIFO and not yet fully sent.
  logic [7:0] tx_msgs;
  logic       msg_in, msg_out;
  assign msg_in  = txq_push_valid && txq_push_ready && txq_push_last;
  assign msg_out = eth_tx_valid && eth_tx_ready && eth_tx_last;
  assign tx_idle = (tx_msgs == '0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_msgs <= '0;
    else        tx_msgs <= tx_msgs + {7'd0, msg_in} - {7'd0, msg_out};
  end

  // ---------------- receive path: flits to blocks, BFP to FP32 ----------------
  logic              grx_in_valid, grx_in_ready, grx_valid, grx_ready, grx_last;
  logic [BW-1:0]     grx_data;
  logic              dcp_valid, dcp_ready, dcp_last;
  logic [WORD_W-1:0] dcp_data;

  assign grx_in_valid = eth_rx_valid && bfp;
  assign eth_rx_ready = bfp ? grx_in_ready : rxq_push_ready;

  stream_gearbox #(.IN_W(ETH_W), .OUT_W(BW), .PAD_TAIL(1'b0)) u_rx_unpack (
    .clk(clk), .rst_n(rst_n),
    .in_valid(grx_in_valid), .in_ready(grx_in_ready), .in_data(eth_rx_data), .in_last(eth_rx_last),
    .in_pad(eth_rx_pad),
    .out_valid(grx_valid), .out_ready(grx_ready), .out_data(grx_data), .out_last(grx_last), .out_pad()
  );

  bfp_decompress #(.LANES_P(LANES_P)) u_bfp_to_fp32 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(grx_valid), .in_ready(grx_ready), .in_data(grx_data), .in_last(grx_last),
    .out_valid(dcp_valid), .out_ready(dcp_ready), .out_data(dcp_data), .out_last(dcp_last)
  );

  assign dcp_ready      = bfp && rxq_push_ready;
  assign rxq_push_valid = bfp ? dcp_valid : eth_rx_valid;
  assign rxq_push_data  = bfp ? dcp_data  : eth_rx_data;

  // A link must be able to hold a whole segment (see allreduce_ctrl), and a
  // segment must be whole BFP blocks.
  initial assert (SEG_WORDS <= FIFO_DEPTH && SEG_WORDS % (BFP_BLOCK / LANES_P) == 0)
    else $error("ai_smart_nic: SEG_WORDS must fit the FIFOs and be whole BFP blocks");

  // The mode may only change while nothing is in flight.
  assert property (@(posedge clk) disable iff (!rst_n)
                   $changed(cfg.bfp_en) |-> tx_idle && !txq_valid);
endmodule
