// stream_gearbox: width converter between BFP blocks and network flits.
//
// Packs a stream of IN_W-bit items into OUT_W-bit items with no gaps, least
// significant bit first, so that 136-bit BFP blocks fill 256-bit network flits
// completely and the compression shows up as fewer flits on the link; the
// same module with the widths swapped unpacks flits back into blocks. A
// message (one chunk of the all-reduce) ends with in_last. At that point a
// packer (PAD_TAIL = 1) sends out the remaining bits padded with zeros, and an
// unpacker (PAD_TAIL = 0) drops the leftover padding bits after the last whole
// item. The last output item of a message carries out_last. Padding can be as
// long as a whole unpacked item (2 blocks = 272 bits fill 2 flits and leave
// 240 padding bits, more than one 136-bit block), so the packer raises out_pad
// with the final flit when its padding holds at least one whole input item,
// and the unpacker, given in_pad, discards one item's worth of padding.
// Because the padding is shorter than one flit and a flit is shorter than two
// blocks, one flag is enough. The paper sends
// BFP over Ethernet but does not describe framing; this converter and its
// message rule are this design's own.
//
// Timing: a bit buffer of IN_W + OUT_W bits; an output leaves the cycle after
// enough bits are held. Input and output can both move in the same cycle.
module stream_gearbox #(
  parameter int unsigned IN_W     = 136,
  parameter int unsigned OUT_W    = 256,
  parameter bit          PAD_TAIL = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  input  logic             in_last,
  input  logic             in_pad,     // unpacker: final flit has a whole padding item
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_last,
  output logic             out_pad     // packer: padding of the final flit >= IN_W bits
);
  localparam int unsigned BUF_W = IN_W + OUT_W;
  localparam int unsigned CNT_W = $clog2(BUF_W + 1);

  logic [BUF_W-1:0] buf_q;
  logic [CNT_W-1:0] cnt;      // valid bits held
  logic             tail;     // the last input item of a message is held
  logic             skip;     // unpacker: one OUT_W-bit item of the tail is padding
  logic [CNT_W-1:0] real_cnt; // held bits that are not known padding

  logic             out_fire, in_fire, drop;
  logic [CNT_W-1:0] cnt_after_out;
  logic [BUF_W-1:0] buf_after_out;

  // A message tail shorter than one output item: sent padded, or dropped.
  assign real_cnt  = (tail && skip) ? cnt - CNT_W'(OUT_W) : cnt;
  assign drop      = !PAD_TAIL && tail && (real_cnt < CNT_W'(OUT_W));
  assign out_valid = (real_cnt >= CNT_W'(OUT_W)) || (PAD_TAIL && tail && cnt != '0);
  assign out_data  = buf_q[OUT_W-1:0];
  assign out_last  = tail && (PAD_TAIL ? (cnt <= CNT_W'(OUT_W))
                                       : (real_cnt < CNT_W'(2 * OUT_W)));
  assign out_pad   = PAD_TAIL && out_last
                     && ({1'b0, cnt} + (CNT_W + 1)'(IN_W) <= (CNT_W + 1)'(OUT_W));
  assign out_fire  = out_valid && out_ready;

  always_comb begin
    cnt_after_out = cnt;
    buf_after_out = buf_q;
    if (out_fire) begin
      cnt_after_out = (cnt > CNT_W'(OUT_W)) ? cnt - CNT_W'(OUT_W) : '0;
      buf_after_out = buf_q >> OUT_W;
    end
    // Message end: whatever is left is padding.
    if (drop || (out_fire && out_last)) begin
      cnt_after_out = '0;
      buf_after_out = '0;
    end
  end

  // one extra bit so that the sum cannot wrap (256 + 256 needs 10 bits)
  assign in_ready = !tail && ({1'b0, cnt_after_out} + (CNT_W + 1)'(IN_W) <= (CNT_W + 1)'(BUF_W));
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0;
      cnt   <= '0;
      tail  <= 1'b0;
      skip  <= 1'b0;
    end else begin
      buf_q <= buf_after_out;
      cnt   <= cnt_after_out;
      if (in_fire) begin
        buf_q <= buf_after_out | (BUF_W'(in_data) << cnt_after_out);
        cnt   <= cnt_after_out + CNT_W'(IN_W);
        tail  <= in_last;
        skip  <= in_last && in_pad && !PAD_TAIL;
      end else if ((out_fire && out_last) || drop) begin
        tail  <= 1'b0;
        skip  <= 1'b0;
      end
    end
  end
endmodule
