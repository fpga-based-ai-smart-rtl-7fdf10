// tb_stream_gearbox: checks the width converters used on the network side.
// A packer (136 -> 256 bits, pads the message tail) feeds an unpacker
// (256 -> 136 bits, drops the tail padding) with random valid/ready gaps on
// every handshake. Messages of 1 to 40 random 136-bit items are sent. The
// testbench checks that the items come back in order with out_last on the
// last item of each message only, that each message uses exactly
// ceil(items*136/256) flits with the flit last flag only on the final flit,
// that the padding bits of that final flit are zero, and that the pad flag
// is raised exactly when that padding is at least one 136-bit item long.
`timescale 1ns/1ps
module tb_stream_gearbox;
  localparam int IW = 136, OW = 256;
  logic clk = 0, rst_n = 0;
  logic a_valid = 0, a_ready, a_last = 0;
  logic [IW-1:0] a_data = '0;
  logic f_valid, f_ready, f_last, f_pad;
  logic [OW-1:0] f_data;
  logic b_valid, b_ready = 0, b_last;
  logic [IW-1:0] b_data;
  logic link_ok = 0;
  int checks = 0, failures = 0;

  stream_gearbox #(.IN_W(IW), .OUT_W(OW), .PAD_TAIL(1'b1)) u_pack (
    .clk, .rst_n, .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data), .in_last(a_last), .in_pad(1'b0),
    .out_valid(f_valid), .out_ready(f_ready && link_ok), .out_data(f_data), .out_last(f_last),
    .out_pad(f_pad));
  stream_gearbox #(.IN_W(OW), .OUT_W(IW), .PAD_TAIL(1'b0)) u_unpack (
    .clk, .rst_n, .in_valid(f_valid && link_ok), .in_ready(f_ready), .in_data(f_data),
    .in_last(f_last), .in_pad(f_pad), .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data),
    .out_last(b_last), .out_pad());

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s at %0t", what, $time);
    end
  endtask

  // expected items {last, data} and flits per message
  logic [IW:0] exp_items[$];
  int exp_flits[$];
  int flits_seen = 0;

  always @(negedge clk) begin
    b_ready = $urandom_range(0, 3) != 0;
    link_ok = $urandom_range(0, 4) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (f_valid && f_ready && link_ok) begin
      flits_seen++;
      if (f_last) begin
        int n;
        n = exp_flits.pop_front();
        check(flits_seen == n, $sformatf("flits per message %0d vs %0d", flits_seen, n));
        flits_seen = 0;
      end
    end
    if (b_valid && b_ready) begin
      logic [IW:0] e;
      e = exp_items.pop_front();
      check({b_last, b_data} == e, $sformatf("item got %0b/%h exp %0b/%h", b_last, b_data, e[IW], e[IW-1:0]));
    end
  end

  // padding of the final flit of a message must be zero
  int pad_bits;
  always @(posedge clk) if (rst_n && f_valid && f_ready && link_ok && f_last && pad_bits > 0)
  begin
    check((f_data >> (OW - pad_bits)) == '0, "zero padding");
    check(f_pad == (pad_bits >= IW), "pad flag");
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 600; m++) begin
      int n;
      n = (m < 40) ? m + 1 : $urandom_range(1, 40);
      exp_flits.push_back((n * IW + OW - 1) / OW);
      for (int i = 0; i < n; i++) begin
        a_data = {$urandom, $urandom, $urandom, $urandom, $urandom};
        a_last = (i == n - 1);
        // random gap, then hold valid until accepted; inputs are looked at
        // 1 ns after the falling edge, once the ready inputs have settled
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        a_valid = 1;
        exp_items.push_back({a_last, a_data});
        #1;
        while (!a_ready) begin
          @(negedge clk);
          #1;
        end
        // the bits left over in the final flit of this message
        if (a_last) pad_bits = ((n * IW + OW - 1) / OW) * OW - n * IW;
        @(negedge clk);
        a_valid = 0;
      end
      // pad_bits is per message: wait until this message has left the packer
      while (exp_flits.size() != 0) @(negedge clk);
    end
    while (exp_items.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
