// tb_edgedrnn_1l -- workload test for the single-layer networks: the
// accelerator at its default parameters running one GRU layer of 256 units on
// 40 filter-bank inputs (1L-256H, the smallest network of the published
// evaluation), configured with LAYERS = 1. Five time steps with Theta = 0x40,
// the last at Theta = 0, and the state cleared again before step 3. It covers
// what the two-layer tests do not: the output stream started straight after
// layer 0, and a layer base that never advances. The larger single-layer sizes
// (512 and 768 units) differ only in M, which tb_edgedrnn_full covers at 768.
// See edgedrnn_tb_body for what is checked on every step. The body has its own
// cycle watchdog; the one here, in simulated time, only guards against a body
// that stops advancing its clock.
module tb_edgedrnn_1l;
  edgedrnn_tb_body #(.L(1), .N(40), .M(256), .STEPS(5), .THETA('h40), .REINIT_AT(3),
                     .MAX_CYC(3_000_000)) body ();

  initial begin
    #100ms;
    $display("TB_RESULT checks=%0d failures=%0d", body.checks, body.failures + 1);
    $finish;
  end
endmodule
