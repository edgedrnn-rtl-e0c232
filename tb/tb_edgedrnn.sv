// tb_edgedrnn -- end-to-end test of the accelerator at its default parameters,
// running a small 2-layer network (N = 40, M = 64) for six time steps with a
// re-initialisation before step 3 and a threshold change on the last step.
// See edgedrnn_tb_body for what is checked.
module tb_edgedrnn;
  edgedrnn_tb_body #(.L(2), .N(40), .M(64), .STEPS(6), .THETA('h40), .REINIT_AT(3)) body ();
endmodule
