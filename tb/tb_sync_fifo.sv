// tb_sync_fifo -- random push/pop test of sync_fifo (used for the D-FIFOs and
// the W-FIFO) against a queue model: data order, empty/full/almost_full, count.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full, af;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty,
                                         .full, .almost_full(af), .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == D), "full flag");
      check(af == (q.size() >= D - 2), "almost_full flag");
      check(count == q.size(), "count");
      if (q.size() > 0) check(dout == q[0], $sformatf("dout %h expected %h", dout, q[0]));
      if (full) n_full++;
      if (empty) n_empty++;
      // phases biased towards filling, then towards draining
      push = ((i / 200) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      pop  = !empty && (((i / 200) % 2 == 0) ? ($urandom % 4 == 0) : ($urandom % 4 != 0));
      if (full && !pop) push = 0;
      din  = W'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    check(n_full > 0 && n_empty > 0, "both full and empty reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
