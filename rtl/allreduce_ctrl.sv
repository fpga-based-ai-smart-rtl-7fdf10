// allreduce_ctrl: the control FSM (Ctrl) of the pipelined ring all-reduce.
//
// For a ring of N nodes the gradient vector is split into N equal chunks of
// CW words (zero-padded), and node r runs 2N-1 chunk operations, k = 0..2N-2:
//   k = 0          forward its own chunk r to the next node (In -> Tx);
//   k = 1..N-1     add the received partial sum of chunk r-k to its own copy
//                  (In + Rx) and send it on (Tx); at k = N-1 the sum is
//                  complete, so it is also written back (Out);
//   k = N..2N-2    store each received final chunk (Rx -> Out) and forward it
//                  to the next node (Tx), except the last one, which the next
//                  node already has.
// With N = 1 the single operation copies In to Out. The schedule runs once
// per segment of SEG_WORDS words (the last segment of a chunk may be
// shorter): segment s of all 2N-1 operations, then segment s+1. Each segment
// is an independent all-reduce of its part of every chunk. This pipelining
// keeps the ring from deadlocking. Operation 0 sends a whole segment
// before it needs anything from the previous node, so the Tx and Rx FIFOs of
// a link must hold a segment; with whole chunks they could not. This is the schedule of
// the paper's Fig. 1 (the 2(N-1) ring steps, with step 1's send pulled out as
// operation 0), and the steering of results to Tx and/or Out by ring step is
// the paper's description of Ctrl. The word-level handshakes, the chunk
// arithmetic, the segment size and the request/done protocol are this
// design's choices.
//
// On a request the FSM first computes CW = 2 * ceil(ceil(count / N) / 16),
// the chunk size rounded up to whole BFP blocks, with a 33-step serial divider,
// then pulses go for the DMA engine, then issues one word per cycle whenever
// its operands are present (In and/or Rx FIFO not empty) and the reduce
// pipeline accepts. Missing operands stall the issue. Results coming out of the
// reduce pipeline are steered by their tag; a result waits until every
// destination it needs can take it. done pulses once the DMA has written the
// last word back and the transmit path is empty.
//
// The data outputs (red_a, red_b, tx_data, out_data) are wires from the data
// inputs: this block only decides when words move and where they go. Bit 0
// of chunk_words is always 0, because chunks are whole two-word blocks.
module allreduce_ctrl
  import nic_pkg::*;
#(
  parameter int unsigned LANES_P = nic_pkg::LANES,
  parameter int unsigned BLOCK   = nic_pkg::BFP_BLOCK,
  parameter int unsigned SEG_WORDS = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // request from the worker
  input  logic                     req_valid,
  output logic                     req_ready,
  input  ar_req_t                  req,
  output logic                     done,
  output logic                     busy,
  // configuration for the DMA engine and the network path
  output ar_req_t                  cfg,
  output logic [COUNT_W-1:0]       chunk_words,
  output logic                     go,
  input  logic                     wr_done,
  input  logic                     tx_idle,
  // In FIFO (local operand)
  input  logic                     in_valid,
  output logic                     in_pop,
  input  logic [LANES_P*FP_W-1:0]  in_data,
  // Rx FIFO (received operand)
  input  logic                     rx_valid,
  output logic                     rx_pop,
  input  logic [LANES_P*FP_W-1:0]  rx_data,
  // to the reduce unit
  output logic                     red_valid,
  input  logic                     red_ready,
  output red_mode_e                red_mode,
  output route_t                   red_tag,
  output logic [LANES_P*FP_W-1:0]  red_a,
  output logic [LANES_P*FP_W-1:0]  red_b,
  // from the reduce unit
  input  logic                     res_valid,
  output logic                     res_ready,
  input  route_t                   res_tag,
  input  logic [LANES_P*FP_W-1:0]  res_data,
  // Tx FIFO (to the next node)
  output logic                     tx_valid,
  input  logic                     tx_ready,
  output logic [LANES_P*FP_W-1:0]  tx_data,
  output logic                     tx_last,
  // Out FIFO (to worker memory)
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [LANES_P*FP_W-1:0]  out_data
);
  localparam int unsigned WPB = BLOCK / LANES_P;   // words per BFP block
  localparam int unsigned OPW = NODE_W + 1;        // op counter, up to 2N-2

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_RUN, S_DRAIN} state_e;
  state_e state;

  // ---------------- chunk size: serial division ----------------
  logic [COUNT_W:0]   dividend;     // count + N - 1, shifted out MSB first
  logic [COUNT_W:0]   quot;
  logic [NODE_W:0]    rem;
  logic [5:0]         div_step;
  logic [NODE_W:0]    rem_sh;

  assign rem_sh = {rem[NODE_W-1:0], dividend[COUNT_W]};

  // ---------------- operation sequencing ----------------
  logic [OPW-1:0]     op;          // current chunk operation k
  logic [COUNT_W-1:0] word;        // word within the segment
  logic [COUNT_W-1:0] seg_base;    // first word of the current segment
  logic [COUNT_W-1:0] seg_len;     // words in the current segment
  logic [COUNT_W-1:0] left;
  logic [OPW-1:0]     last_op;     // 2N-2
  logic               need_in, need_rx, issue;
  red_mode_e          mode_c;
  route_t             tag_c;

  always_comb begin
    last_op = OPW'({cfg.nodes, 1'b0}) - OPW'(2);
    if (cfg.nodes == NODE_W'(1)) begin
      mode_c = RED_PASS_IN;
      tag_c  = '{to_tx: 1'b0, to_out: 1'b1, last: 1'b0};
    end else if (op == '0) begin
      mode_c = RED_PASS_IN;
      tag_c  = '{to_tx: 1'b1, to_out: 1'b0, last: 1'b0};
    end else if (op < OPW'(cfg.nodes)) begin
      mode_c = RED_SUM;
      tag_c  = '{to_tx: 1'b1, to_out: (op == OPW'(cfg.nodes) - OPW'(1)), last: 1'b0};
    end else begin
      mode_c = RED_PASS_RX;
      tag_c  = '{to_tx: (op != last_op), to_out: 1'b1, last: 1'b0};
    end
    tag_c.last = (word == seg_len - COUNT_W'(1));
  end

  assign need_in   = (mode_c != RED_PASS_RX);
  assign need_rx   = (mode_c != RED_PASS_IN);
  assign red_valid = (state == S_RUN) && chunk_words != '0
                     && (!need_in || in_valid) && (!need_rx || rx_valid);
  assign issue     = red_valid && red_ready;
  assign in_pop    = issue && need_in;
  assign rx_pop    = issue && need_rx;
  assign red_mode  = mode_c;
  assign red_tag   = tag_c;
  assign red_a     = in_data;
  assign red_b     = rx_data;

  // Segment length: SEG_WORDS, or what is left of the chunk.
  assign left    = chunk_words - seg_base;
  assign seg_len = (left > COUNT_W'(SEG_WORDS)) ? COUNT_W'(SEG_WORDS) : left;

  // ---------------- result steering ----------------
  assign res_ready = (!res_tag.to_tx || tx_ready) && (!res_tag.to_out || out_ready);
  assign tx_valid  = res_valid && res_tag.to_tx  && (!res_tag.to_out || out_ready);
  assign out_valid = res_valid && res_tag.to_out && (!res_tag.to_tx  || tx_ready);
  assign tx_data   = res_data;
  assign tx_last   = res_tag.last;
  assign out_data  = res_data;

  assign req_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cfg         <= '0;
      chunk_words <= '0;
      go          <= 1'b0;
      done        <= 1'b0;
      dividend    <= '0;
      quot        <= '0;
      rem         <= '0;
      div_step    <= '0;
      op          <= '0;
      word        <= '0;
      seg_base    <= '0;
    end else begin
      go   <= 1'b0;
      done <= 1'b0;
      case (state)
        S_IDLE: if (req_valid) begin
          cfg      <= req;
          dividend <= {1'b0, req.count} + (COUNT_W+1)'(req.nodes) - (COUNT_W+1)'(1);
          quot     <= '0;
          rem      <= '0;
          div_step <= '0;
          state    <= S_DIV;
        end
        S_DIV: begin
          if (div_step == 6'(COUNT_W + 1)) begin
            // quot = ceil(count / N) elements per chunk, rounded up to blocks
            chunk_words <= COUNT_W'(((quot + (COUNT_W+1)'(BLOCK - 1)) / (COUNT_W+1)'(BLOCK)) * (COUNT_W+1)'(WPB));
            op    <= '0;
            word  <= '0;
            seg_base <= '0;
            go    <= 1'b1;
            state <= S_RUN;
          end else begin
            dividend <= dividend << 1;
            div_step <= div_step + 1'b1;
            if (rem_sh >= {1'b0, cfg.nodes}) begin
              rem  <= rem_sh - {1'b0, cfg.nodes};
              quot <= {quot[COUNT_W-1:0], 1'b1};
            end else begin
              rem  <= rem_sh;
              quot <= {quot[COUNT_W-1:0], 1'b0};
            end
          end
        end
        S_RUN: begin
          if (chunk_words == '0) begin
            state <= S_DRAIN;
          end else if (issue) begin
            if (word == seg_len - COUNT_W'(1)) begin
              word <= '0;
              if (op == last_op || cfg.nodes == NODE_W'(1)) begin
                op <= '0;
                if (seg_base + seg_len == chunk_words) state <= S_DRAIN;
                else seg_base <= seg_base + seg_len;
              end else begin
                op <= op + 1'b1;
              end
            end else begin
              word <= word + 1'b1;
            end
          end
        end
        S_DRAIN: if (wr_done && tx_idle && !res_valid) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A summing issue needs both operands; a request needs 1 <= rank < nodes <= MAX_NODES.
  assert property (@(posedge clk) disable iff (!rst_n)
                   issue && red_mode == RED_SUM |-> in_valid && rx_valid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && req_ready |-> req.nodes >= 1 && req.rank < req.nodes
                                              && req.nodes <= MAX_NODES);
endmodule
