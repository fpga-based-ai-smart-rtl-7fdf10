// sync_fifo: single-clock FIFO with valid/ready on both sides.
//
// One module serves as the four buffers of the NIC datapath: the In FIFO
// (local gradients read over PCIe), the Rx FIFO (decompressed operands from
// the previous node), the Tx FIFO (results for the next node) and the Out
// FIFO (final results for worker memory). The paper names these FIFOs but
// gives neither their depth nor their handshake; both are this design's
// choice. Storage is an array of DEPTH words (DEPTH a power of two) with
// wrap-around pointers and an occupancy counter.
//
// Timing: a word pushed in cycle t can be popped in cycle t+1. Push and pop
// may happen in the same cycle. in_ready is low only when full; out_valid is
// high whenever the FIFO holds a word, and out_data shows the oldest word.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (level != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      case ({push, pop})
        2'b10:   level <= level + 1'b1;
        2'b01:   level <= level - 1'b1;
        default: level <= level;
      endcase
    end
  end

  // The occupancy never exceeds the depth.
  assert property (@(posedge clk) disable iff (!rst_n) level <= DEPTH);
  // DEPTH must be a power of two for the pointer wrap.
  initial assert ((1 << AW) == DEPTH) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
