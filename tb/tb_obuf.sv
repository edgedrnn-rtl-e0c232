// tb_obuf -- output buffer test: clear, PE-port writes of every row of both
// layers, random single-element reads through the delta-unit port, PE-port
// reads, and the h(t) stream of each layer under random back-pressure
// (element order, TLAST, beat count; without back-pressure M/4 beats take M/4 + M/8
// cycles without back-pressure).
module tb_obuf;
  import edgedrnn_pkg::*;
  localparam int MAX_M = 32, MB = MAX_M / K;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, clr_done, du_en, du_layer, pe_en, out_start, out_layer, out_done;
  logic [IDX_W-1:0] du_idx, out_m;
  act_t du_data, pe_rdata [K], pe_wdata [K];
  logic [K-1:0] pe_we;
  logic [$clog2(2*MB)-1:0] pe_raddr, pe_waddr;
  logic tvalid, tready, tlast;
  logic [63:0] tdata;
  int checks = 0, failures = 0;
  int h [2][MAX_M];

  obuf #(.MAX_M(MAX_M), .MAX_L(2)) dut (
    .clk, .rst_n, .clear, .clr_done, .du_rd_en(du_en), .du_rd_layer(du_layer), .du_rd_idx(du_idx),
    .du_rd_data(du_data), .pe_rd_en(pe_en), .pe_rd_addr(pe_raddr), .pe_rd_data(pe_rdata),
    .pe_we, .pe_wr_addr(pe_waddr), .pe_wdata, .out_start, .out_layer, .out_m, .out_done,
    .m_h_tvalid(tvalid), .m_h_tready(tready), .m_h_tdata(tdata), .m_h_tlast(tlast));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic du_read(int l, int i, output int v);
    @(negedge clk); du_en = 1; du_layer = l[0]; du_idx = IDX_W'(i);
    @(negedge clk); du_en = 0; v = int'(du_data);
  endtask

  task automatic stream(int l, int m, bit bp, output int cycles);
    int b = 0, c = 0;
    @(negedge clk); out_start = 1; out_layer = l[0]; out_m = IDX_W'(m);
    @(negedge clk); out_start = 0;
    while (b < m / 4) begin
      tready = bp ? ($urandom % 2) : 1'b1;
      @(posedge clk); c++;
      if (tvalid && tready) begin
        for (int e = 0; e < 4; e++)
          check(int'($signed(tdata[16*e +: 16])) == h[l][4*b+e], $sformatf("stream layer %0d element %0d", l, 4*b+e));
        check(tlast == (b == m / 4 - 1), "TLAST");
        b++;
      end
      @(negedge clk);
    end
    tready = 0;
    cycles = c;
    while (!out_done) @(negedge clk);
  endtask

  initial begin
    int v, cyc;
    clear = 0; du_en = 0; du_layer = 0; du_idx = 0; pe_en = 0; pe_raddr = 0; pe_we = 0; pe_waddr = 0;
    out_start = 0; out_layer = 0; out_m = 0; tready = 0;
    foreach (pe_wdata[k]) pe_wdata[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (!clr_done) @(negedge clk);
    du_read(1, 5, v); check(v == 0, "cleared");
    for (int l = 0; l < 2; l++)
      for (int r = 0; r < MB; r++) begin
        @(negedge clk);
        pe_we = '1; pe_waddr = 3'(l * MB + r);
        for (int k = 0; k < K; k++) begin
          h[l][K*r+k] = int'($urandom % 65536) - 32768;
          pe_wdata[k] = act_t'(h[l][K*r+k]);
        end
      end
    @(negedge clk); pe_we = 0;
    for (int n = 0; n < 40; n++) begin
      automatic int l = $urandom % 2, i = $urandom % MAX_M;
      du_read(l, i, v);
      check(v == h[l][i], $sformatf("du read layer %0d idx %0d: %0d vs %0d", l, i, v, h[l][i]));
    end
    for (int r = 0; r < MB; r++) begin
      @(negedge clk); pe_en = 1; pe_raddr = 3'(MB + r);
      @(negedge clk); pe_en = 0;
      for (int k = 0; k < K; k++) check(int'(pe_rdata[k]) == h[1][K*r+k], "pe read");
    end
    stream(0, MAX_M, 1'b1, cyc);
    stream(1, MAX_M, 1'b0, cyc);
    // K/4 = 2 beats per row plus one read cycle per row
    check(cyc == MAX_M / 4 + MB, $sformatf("stream took %0d cycles, expected %0d", cyc, MAX_M / 4 + MB));
    stream(1, 16, 1'b1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
