// tb_ai_smart_nic: end-to-end test of a ring of six smart NICs at default
// parameters. Runs small all-reduces with BFP on and off, with heavy zero
// padding and on a single node, with and without random link and memory
// stalls, and checks every node's memory against an independent model, the
// number of flits on every link, the cycle count at full speed, and that each
// mechanism of the design was exercised (see nic_ring_env).
`timescale 1ns/1ps
module tb_ai_smart_nic;
  nic_ring_env #(.NODES(6), .TEST(0)) env ();
endmodule
