// tb_edgedrnn_full -- full-size test: the accelerator at its default parameters
// running the largest network the paper evaluates, two GRU layers of 768 units
// on 40 filter-bank inputs (2L-768H), for three time steps with Theta = 0x40
// and the last step at Theta = 0. See edgedrnn_tb_body for what is checked.
module tb_edgedrnn_full;
  edgedrnn_tb_body #(.L(2), .N(40), .M(768), .STEPS(3), .THETA('h40), .REINIT_AT(99),
                     .MAX_CYC(5_000_000)) body ();
endmodule
