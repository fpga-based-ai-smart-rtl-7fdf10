// reduce_unit: the Reduce block, SIMD lanes of FP32 adders.
//
// Each cycle it takes one word of LANES FP32 values from the In FIFO side
// (a, local gradients) and one from the Rx FIFO side (b, operands received
// from the previous node) and, per the mode chosen by the control FSM,
// outputs a+b lane by lane (RED_SUM) or forwards a (RED_PASS_IN) or b
// (RED_PASS_RX) unchanged. Forwarding goes through a delay line as long as
// the adders, so words leave in the order they came in. A routing tag rides
// along for the control FSM to steer the result.
//
// Following the paper: FP32 adders, 8 lanes in the 40 Gb/s configuration (16
// at 100 Gb/s). This design's choices: the pass modes, the valid/ready
// handshake, and a stall that holds the whole pipeline while the output is
// not accepted.
//
// Timing: LATENCY = 3 cycles from an accepted input to out_valid; one word
// per cycle; in_ready = !out_valid || out_ready.
module reduce_unit
  import nic_pkg::*;
#(
  parameter int unsigned LANES_P = nic_pkg::LANES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  red_mode_e                 mode,
  input  route_t                    tag_in,
  input  logic [LANES_P*FP_W-1:0]   a,
  input  logic [LANES_P*FP_W-1:0]   b,
  output logic                      out_valid,
  input  logic                      out_ready,
  output route_t                    tag_out,
  output logic [LANES_P*FP_W-1:0]   y
);
  localparam int unsigned LAT = 3;

  logic en;
  logic [LANES_P-1:0]      lane_v;
  logic [LANES_P*FP_W-1:0] sum;

  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  for (genvar l = 0; l < LANES_P; l++) begin : g_lane
    fp32_add u_add (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (en),
      .in_valid (in_valid),
      .a        (a[l*FP_W +: FP_W]),
      .b        (b[l*FP_W +: FP_W]),
      .out_valid(lane_v[l]),
      .y        (sum[l*FP_W +: FP_W])
    );
  end

  // Pass values, mode and tag travel beside the adders.
  logic [LANES_P*FP_W-1:0] pass_q [LAT];
  red_mode_e               mode_q [LAT];
  route_t                  tag_q  [LAT];

  always_ff @(posedge clk) begin
    if (en) begin
      pass_q[0] <= (mode == RED_PASS_RX) ? b : a;
      mode_q[0] <= mode;
      tag_q[0]  <= tag_in;
      for (int i = 1; i < LAT; i++) begin
        pass_q[i] <= pass_q[i-1];
        mode_q[i] <= mode_q[i-1];
        tag_q[i]  <= tag_q[i-1];
      end
    end
  end

  assign out_valid = lane_v[0];
  assign tag_out   = tag_q[LAT-1];
  assign y         = (mode_q[LAT-1] == RED_SUM) ? sum : pass_q[LAT-1];

  // All lanes run in lock step.
  assert property (@(posedge clk) disable iff (!rst_n) lane_v == {LANES_P{lane_v[0]}});
endmodule
