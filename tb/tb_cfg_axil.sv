// tb_cfg_axil -- configuration register test: AXI-Lite writes and read-back
// of every register, the one-cycle init pulse, the status word, and a write
// response held under BREADY back-pressure.
module tb_cfg_axil;
  import edgedrnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [7:0] awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic enable, init, busy;
  logic [1:0] layers;
  logic [IDX_W-1:0] n, m;
  act_t theta;
  logic [31:0] wbase;
  logic [30:0] steps;
  int checks = 0, failures = 0, n_init = 0;

  cfg_axil dut (.clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .cfg_enable(enable), .cfg_init(init), .cfg_layers(layers), .cfg_n(n), .cfg_m(m),
    .cfg_theta(theta), .cfg_wbase(wbase), .st_busy(busy), .st_steps(steps));

  always @(posedge clk) if (rst_n && init) n_init++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input int bdelay);
    @(negedge clk); awvalid = 1; awaddr = a; wvalid = 1; wdata = d; bready = 0;
    #1;   // let the combinational ready settle, then sample it before the edge
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat (bdelay) begin check(bvalid, "BVALID held"); @(negedge clk); end
    bready = 1;
    while (!bvalid) @(negedge clk);
    check(bresp == 2'b00, "BRESP");
    @(negedge clk); bready = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0; rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0; wdata = 0;
    busy = 1; steps = 31'd1234;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(8'h08, 2, 3);    check(layers == 2, "LAYERS");
    wr(8'h0C, 40, 0);   check(n == 40, "N");
    wr(8'h10, 768, 1);  check(m == 768, "M");
    wr(8'h14, 'h40, 0); check(theta == 16'h40, "THETA");
    wr(8'h18, 32'h1234_5678, 0); check(wbase == 32'h1234_5678, "WBASE");
    wr(8'h00, 32'h3, 0); check(enable, "enable");
    check(n_init == 1, $sformatf("one init pulse, saw %0d", n_init));
    @(negedge clk); check(!init, "init self-clears");
    rd(8'h08, d); check(d == 2, "read LAYERS");
    rd(8'h0C, d); check(d == 40, "read N");
    rd(8'h10, d); check(d == 768, "read M");
    rd(8'h14, d); check(d == 'h40, "read THETA");
    rd(8'h18, d); check(d == 32'h1234_5678, "read WBASE");
    rd(8'h00, d); check(d == 1, "read CTRL");
    rd(8'h04, d); check(d == {31'd1234, 1'b1}, "read STATUS");
    rd(8'h3C, d); check(d == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
