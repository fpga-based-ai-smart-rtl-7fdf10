// bfp_compress: FP32 to BFP converter on the transmit side.
//
// Gathers BFP_BLOCK consecutive FP32 gradients (BFP_BLOCK/LANES input words)
// and emits them as one block floating-point block: the largest biased
// exponent of the block becomes the shared exponent E, and every element keeps
// its sign and a MAN_W-bit magnitude, its 24-bit significand shifted right by
// (E - own exponent) and cut to the top MAN_W bits. An element then stands for
// (-1)^s * mag * 2^(E - 127 - (MAN_W-1)).
//
// Following the paper: BFP16 with an 8-bit shared exponent, 7-bit mantissas
// and 16-element blocks, converted at line rate. This design's choices: the
// sign bit kept beside the 7 mantissa bits (8 bits per element, which gives
// the 136-bit block and the 512/136 = 3.8x ratio the paper reports),
// truncation instead of rounding, subnormal inputs taken as zero, and the block
// layout {E, elem[15], ..., elem[0]} with elem = {sign, mag}.
//
// Timing: the block is formed from registered inputs; out_valid rises the
// cycle after the last word of a block is accepted and the next block can be
// gathered meanwhile, so a full block leaves every BFP_BLOCK/LANES cycles.
// in_last on the final word of a block is passed on as out_last.
module bfp_compress
  import nic_pkg::*;
#(
  parameter int unsigned LANES_P = nic_pkg::LANES,
  parameter int unsigned BLOCK   = nic_pkg::BFP_BLOCK,
  parameter int unsigned EXP_W   = nic_pkg::BFP_EXP_W,
  parameter int unsigned MAN_W   = nic_pkg::BFP_MAN_W,
  localparam int unsigned OUT_W  = EXP_W + BLOCK * (1 + MAN_W)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [LANES_P*FP_W-1:0] in_data,
  input  logic                    in_last,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [OUT_W-1:0]        out_data,
  output logic                    out_last
);
  localparam int unsigned WPB = BLOCK / LANES_P;    // input words per block
  localparam int unsigned CW  = (WPB > 1) ? $clog2(WPB) : 1;

  logic [FP_W-1:0] elem [BLOCK];
  logic [CW-1:0]   widx;
  logic            full, last_q;

  logic in_fire, out_fire;
  assign in_ready = !full || out_ready;
  assign in_fire  = in_valid && in_ready;
  assign out_fire = out_valid && out_ready;
  assign out_valid = full;
  assign out_last  = last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx   <= '0;
      full   <= 1'b0;
      last_q <= 1'b0;
    end else begin
      if (out_fire) full <= 1'b0;
      if (in_fire) begin
        if (widx == CW'(WPB - 1)) begin
          widx   <= '0;
          full   <= 1'b1;
          last_q <= in_last;
        end else begin
          widx <= widx + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire) begin
      for (int l = 0; l < LANES_P; l++) elem[int'(widx) * LANES_P + l] <= in_data[l*FP_W +: FP_W];
    end
  end

  // Shared exponent and mantissas of the gathered block.
  logic [7:0] emax;
  always_comb begin
    emax = 8'd0;
    for (int i = 0; i < BLOCK; i++) begin
      if (elem[i][30:23] > emax) emax = elem[i][30:23];
    end
  end

  always_comb begin
    out_data = '0;
    out_data[OUT_W-1 -: EXP_W] = EXP_W'(emax);
    for (int i = 0; i < BLOCK; i++) begin
      logic [7:0]  e, dsh;
      logic [23:0] sig;
      logic [MAN_W-1:0] mag;
      e   = elem[i][30:23];
      sig = {1'b1, elem[i][22:0]};
      dsh = emax - e;
      if (e == 8'd0 || dsh >= 8'(MAN_W)) mag = '0;
      else                              mag = MAN_W'((sig >> dsh) >> (24 - MAN_W));
      out_data[i*(1+MAN_W) +: (1+MAN_W)] = {elem[i][31] & (mag != '0), mag};
    end
  end

  initial assert (BLOCK % LANES_P == 0) else $error("bfp_compress: BLOCK must be a multiple of LANES");
endmodule
