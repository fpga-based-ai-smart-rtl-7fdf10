// tb_full_size: one all-reduce of a full 2048x2048 layer of FP32 weight
// gradients (4,194,304 per node) across a ring of six smart NICs, the
// prototype size, with BFP compression on and every NIC parameter at its
// default. Checks every node's result bit for bit against the model in
// nic_ring_env and the cycle count against one word per cycle.
`timescale 1ns/1ps
module tb_full_size;
  nic_ring_env #(.NODES(6), .TEST(1)) env ();
endmodule
