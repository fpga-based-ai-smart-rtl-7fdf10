// nic_pkg: constants and types shared by the AI smart NIC modules.
//
// The smart NIC reduces FP32 weight gradients with a pipelined ring all-reduce
// and can carry them between nodes in a block floating-point (BFP) format.
// The numbers that follow the paper's main configuration (40 Gb/s prototype):
// 8 SIMD lanes of FP32 (a 256-bit datapath word), BFP16 blocks of 16
// elements with an 8-bit shared exponent and 7-bit mantissas. The sign bit
// per element, the 32-node upper limit and the reduce-mode encoding are
// choices of this design.
package nic_pkg;

  localparam int unsigned FP_W        = 32;  // FP32 element
  localparam int unsigned LANES       = 8;   // SIMD lanes at 40 Gb/s
  localparam int unsigned BFP_BLOCK   = 16;  // elements sharing one exponent
  localparam int unsigned BFP_EXP_W   = 8;   // shared exponent width
  localparam int unsigned BFP_MAN_W   = 7;   // mantissa magnitude width (sign kept apart)
  localparam int unsigned MAX_NODES   = 32;  // largest ring the counters support
  localparam int unsigned NODE_W      = $clog2(MAX_NODES + 1);
  localparam int unsigned COUNT_W     = 32;  // gradients per all-reduce request
  localparam int unsigned ADDR_W      = 48;  // byte address in worker memory

  // One BFP block on the wire: shared exponent, then sign and magnitude per element.
  localparam int unsigned BFP_ELEM_W  = 1 + BFP_MAN_W;
  localparam int unsigned BFP_W       = BFP_EXP_W + BFP_BLOCK * BFP_ELEM_W;  // 136 bits

  // What the reduce stage does with its two operands.
  typedef enum logic [1:0] {
    RED_PASS_IN = 2'd0,   // forward the local (In FIFO) operand
    RED_PASS_RX = 2'd1,   // forward the received (Rx FIFO) operand
    RED_SUM     = 2'd2    // In + Rx, lane by lane
  } red_mode_e;

  // Routing tag that travels with a word through the reduce pipeline.
  typedef struct packed {
    logic to_tx;   // send to the next node
    logic to_out;  // write back to local worker memory
    logic last;    // last word of a chunk (ends a network message)
  } route_t;

  // An all-reduce request from the worker.
  typedef struct packed {
    logic [ADDR_W-1:0]  base;    // start byte address of the gradients (32-byte aligned)
    logic [COUNT_W-1:0] count;   // number of FP32 gradients
    logic [NODE_W-1:0]  nodes;   // ring size N, 1..MAX_NODES
    logic [NODE_W-1:0]  rank;    // position of this node in the ring, 0..N-1
    logic               bfp_en;  // carry gradients as BFP on the network
  } ar_req_t;

endpackage
