// fp32_add: pipelined IEEE-754 single-precision adder, one reduction lane.
//
// The paper reduces gradients "using a set of FP32 adders" (one per SIMD lane,
// which matches the 8 DSP blocks it reports for the all-reduce logic) but does
// not describe their insides. This is a plain three-stage adder of this
// design's own making:
//   stage 1  unpack, order the operands by magnitude, align the smaller one
//            (guard, round and sticky bits kept);
//   stage 2  add or subtract the mantissas;
//   stage 3  normalise, round to nearest even, pack.
// Subnormals are handled in full; infinities give infinity, and a NaN input or
// inf - inf gives the quiet NaN 0x7fc00000.
//
// Timing: LATENCY = 3. The whole pipeline advances when en is high, so a
// caller stalls it by holding en low; out_valid follows in_valid.
module fp32_add (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);
  // ---------------- stage 1: unpack, swap, align ----------------
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, ea_e, eb_e, el;
  logic [23:0] ma, mb, ml, ms;
  logic [7:0]  d;
  logic [53:0] sh;
  logic [26:0] ms_al;
  logic        a_nan, b_nan, a_inf, b_inf;
  logic        spec_c;
  logic [31:0] spec_y_c;

  always_comb begin
    sa = a[31]; sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = {ea != 8'd0, a[22:0]};
    mb = {eb != 8'd0, b[22:0]};
    ea_e = (ea == 8'd0) ? 8'd1 : ea;
    eb_e = (eb == 8'd0) ? 8'd1 : eb;
    if ({ea_e, ma} >= {eb_e, mb}) begin
      sl = sa; el = ea_e; ml = ma; ss = sb; ms = mb; d = ea_e - eb_e;
    end else begin
      sl = sb; el = eb_e; ml = mb; ss = sa; ms = ma; d = eb_e - ea_e;
    end
    sh = {ms, 3'b000, 27'd0} >> d;
    if (d >= 8'd27) begin
      ms_al = {26'd0, ms != 24'd0};
    end else begin
      ms_al = {sh[53:28], sh[27] | (sh[26:0] != 27'd0)};
    end
    a_nan = (ea == 8'hff) && (a[22:0] != 23'd0);
    b_nan = (eb == 8'hff) && (b[22:0] != 23'd0);
    a_inf = (ea == 8'hff) && (a[22:0] == 23'd0);
    b_inf = (eb == 8'hff) && (b[22:0] == 23'd0);
    spec_c   = (ea == 8'hff) || (eb == 8'hff);
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) spec_y_c = 32'h7fc0_0000;
    else if (a_inf)                                       spec_y_c = {sa, 8'hff, 23'd0};
    else                                                  spec_y_c = {sb, 8'hff, 23'd0};
  end

  logic        v1, sl1, sub1, both_neg1, spec1;
  logic [7:0]  el1;
  logic [26:0] ml1, ms1;
  logic [31:0] spec_y1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
    end else if (en) begin
      v1 <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      sl1       <= sl;
      sub1      <= (sl != ss);
      both_neg1 <= sa & sb;
      el1       <= el;
      ml1       <= {ml, 3'b000};
      ms1       <= ms_al;
      spec1     <= spec_c;
      spec_y1   <= spec_y_c;
    end
  end

  // ---------------- stage 2: add / subtract ----------------
  logic [27:0] sum_c;
  always_comb begin
    if (sub1) sum_c = {1'b0, ml1} - {1'b0, ms1};
    else      sum_c = {1'b0, ml1} + {1'b0, ms1};
  end

  logic        v2, sl2, sub2, both_neg2, spec2;
  logic [7:0]  el2;
  logic [27:0] sum2;
  logic [31:0] spec_y2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0;
    end else if (en) begin
      v2 <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      sl2       <= sl1;
      sub2      <= sub1;
      both_neg2 <= both_neg1;
      el2       <= el1;
      sum2      <= sum_c;
      spec2     <= spec1;
      spec_y2   <= spec_y1;
    end
  end

  // ---------------- stage 3: normalise, round, pack ----------------
  logic [4:0]  lzc;
  logic [26:0] n;
  logic [8:0]  e_n;
  logic [4:0]  shl;
  logic        rnd;
  logic [24:0] mr;
  logic [8:0]  e_r;
  logic [31:0] y_c;

  always_comb begin
    // leading zeros of sum2[26:0] (27 when zero)
    lzc = 5'd27;
    shl = 5'd0;
    for (int i = 0; i <= 26; i++) begin
      if (sum2[i]) lzc = 5'(26 - i);
    end
    if (sum2[27]) begin
      n   = {sum2[27:2], sum2[1] | sum2[0]};
      e_n = {1'b0, el2} + 9'd1;
    end else begin
      // do not shift below the smallest exponent: the result is then subnormal
      shl = (lzc > 5'(el2 - 8'd1)) ? 5'(el2 - 8'd1) : lzc;
      if (el2 - 8'd1 > 8'd26) shl = lzc;
      n   = sum2[26:0] << shl;
      e_n = {1'b0, el2} - {4'd0, shl};
    end
    rnd = n[2] & (n[1] | n[0] | n[3]);
    mr  = {1'b0, n[26:3]} + {24'd0, rnd};
    e_r = e_n;
    if (mr[24]) begin
      mr  = mr >> 1;
      e_r = e_n + 9'd1;
    end
    if (spec2) begin
      y_c = spec_y2;
    end else if (sum2 == 28'd0) begin
      y_c = {(sub2 ? 1'b0 : both_neg2), 31'd0};
    end else if (e_r >= 9'd255) begin
      y_c = {sl2, 8'hff, 23'd0};
    end else begin
      y_c = {sl2, (mr[23] ? e_r[7:0] : 8'd0), mr[22:0]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else if (en) begin
      out_valid <= v2;
      y         <= y_c;
    end
  end
endmodule
