// bfp_decompress: BFP to FP32 converter on the receive side.
//
// Takes one block floating-point block (shared exponent E, then BLOCK
// elements of sign and MAN_W-bit magnitude, as bfp_compress builds it) and
// emits its BLOCK values as FP32 words of LANES values. Each element is
// normalised: with p the position of the leading one of its magnitude, the
// FP32 exponent is E - (MAN_W-1) + p and the bits below the leading one
// become the top of the fraction. A zero magnitude, and any value that would
// fall below the normal range, gives +0.
//
// Following the paper: decompression from BFP16 into FP32 before reduction
// or write-back. This design's choices: the block layout, flushing of
// subnormal results to zero.
//
// Timing: a block is taken into a register when the previous one has been
// emitted or is on its last word; its words leave on consecutive cycles
// (BLOCK/LANES of them), so a steady stream of blocks gives one word per
// cycle. in_last is passed on with the last word of the block.
module bfp_decompress
  import nic_pkg::*;
#(
  parameter int unsigned LANES_P = nic_pkg::LANES,
  parameter int unsigned BLOCK   = nic_pkg::BFP_BLOCK,
  parameter int unsigned EXP_W   = nic_pkg::BFP_EXP_W,
  parameter int unsigned MAN_W   = nic_pkg::BFP_MAN_W,
  localparam int unsigned IN_W   = EXP_W + BLOCK * (1 + MAN_W)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [IN_W-1:0]         in_data,
  input  logic                    in_last,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [LANES_P*FP_W-1:0] out_data,
  output logic                    out_last
);
  localparam int unsigned WPB = BLOCK / LANES_P;
  localparam int unsigned CW  = (WPB > 1) ? $clog2(WPB) : 1;

  logic [IN_W-1:0] blk;
  logic            full, last_q;
  logic [CW-1:0]   widx;
  logic            in_fire, out_fire, final_word;

  assign final_word = (widx == CW'(WPB - 1));
  assign out_valid  = full;
  assign out_fire   = out_valid && out_ready;
  assign in_ready   = !full || (out_ready && final_word);
  assign in_fire    = in_valid && in_ready;
  assign out_last   = last_q && final_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= 1'b0;
      widx   <= '0;
      last_q <= 1'b0;
    end else begin
      if (out_fire) begin
        widx <= final_word ? '0 : widx + 1'b1;
        if (final_word) full <= 1'b0;
      end
      if (in_fire) begin
        full   <= 1'b1;
        last_q <= in_last;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire) blk <= in_data;
  end

  logic [EXP_W-1:0] e_sh;
  assign e_sh = blk[IN_W-1 -: EXP_W];

  always_comb begin
    out_data = '0;
    for (int l = 0; l < LANES_P; l++) begin
      logic             s;
      logic [MAN_W-1:0] mag;
      int               p, ex;
      logic [22:0]      frac;
      logic [31:0]      f;
      {s, mag} = blk[(int'(widx) * LANES_P + l) * (1 + MAN_W) +: (1 + MAN_W)];
      p = 0;
      for (int k = 0; k < MAN_W; k++) if (mag[k]) p = k;
      ex   = int'(e_sh) - (MAN_W - 1) + p;
      frac = 23'(({16'd0, mag} << (23 - p)));
      if (mag == '0 || ex <= 0) f = 32'd0;
      else                      f = {s, 8'(ex), frac};
      out_data[l*FP_W +: FP_W] = f;
    end
  end
endmodule
