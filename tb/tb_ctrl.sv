// tb_ctrl -- global controller test with simple models of its neighbours
// (delta unit, D-FIFO/W-FIFO occupancy, Datamover, output buffer). Two time
// steps of a 2-layer network (n = 6, m = 16) with chosen non-zero columns.
// Checks: clear handshake, first-step flag, one Datamover instruction per
// column with the right address and byte count, the MAC control words (gate,
// slot, row, zero-select) for every weight beat and their number, the
// activation micro-steps (6 per row, OBUF read at step 1), the layer order,
// the output start and the time-step counter.
module tb_ctrl;
  import edgedrnn_pkg::*;
  localparam int MAX_M = 32, N = 6, M = 16, MBr = M / K, WBASE = 'h100;
  localparam int COLB = 3 * MBr * 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, init, busy, x_valid;
  logic [31:0] ts_count;
  logic du_clear, du_start, du_layer, du_first, du_done, dv_valid, pcol_af;
  logic [IDX_W-1:0] du_n_in, du_m, dv_pcol, out_m;
  col_t dv_ctype;
  logic cmd_tvalid, cmd_tready;
  logic [CMD_W-1:0] cmd_tdata;
  logic wf_empty, wf_pop, df_empty, df_pop;
  pe_ctrl_t s;
  logic ob_clear, ob_clr_done, ob_rd_en, out_start, out_layer, out_done;
  logic [$clog2(2*MAX_M/K)-1:0] ob_rd_addr;
  int checks = 0, failures = 0;

  ctrl #(.MAX_M(MAX_M), .MAX_L(2)) dut (
    .clk, .rst_n, .cfg_enable(enable), .cfg_init(init), .cfg_layers(2'd2), .cfg_n(IDX_W'(N)),
    .cfg_m(IDX_W'(M)), .cfg_wbase(32'(WBASE)), .busy, .ts_count, .x_valid,
    .du_clear, .du_start, .du_layer, .du_n_in, .du_m, .du_first, .du_done,
    .dv_valid, .dv_pcol, .dv_ctype, .pcol_almost_full(pcol_af),
    .m_cmd_tvalid(cmd_tvalid), .m_cmd_tready(cmd_tready), .m_cmd_tdata(cmd_tdata),
    .wf_empty, .wf_pop, .df_empty, .df_pop, .s,
    .obuf_clear(ob_clear), .obuf_clr_done(ob_clr_done), .obuf_rd_en(ob_rd_en),
    .obuf_rd_addr(ob_rd_addr), .out_start, .out_layer, .out_m, .out_done);

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

  // ---- neighbour models ----
  int df_cnt = 0, wf_cnt = 0, beats_per_cmd = 3 * MBr;
  assign df_empty = (df_cnt == 0);
  assign wf_empty = (wf_cnt == 0);
  always @(posedge clk) if (rst_n) begin
    df_cnt <= df_cnt + (dv_valid ? 1 : 0) - (df_pop ? 1 : 0);
    wf_cnt <= wf_cnt + ((cmd_tvalid && cmd_tready) ? beats_per_cmd : 0) - (wf_pop ? 1 : 0);
  end
  always @(negedge clk) cmd_tready <= ($urandom % 3 != 0);

  // obuf model
  always @(posedge clk) begin
    ob_clr_done <= 1'b0;
    out_done    <= 1'b0;
    if (rst_n && ob_clear)  fork begin repeat (4) @(posedge clk); ob_clr_done <= 1'b1; end join_none
    if (rst_n && out_start) fork begin repeat (6) @(posedge clk); out_done <= 1'b1; end join_none
  end

  // expected columns of each layer: list of (pcol, kind)
  int cols [2][$];
  int exp_addr [$], exp_kind [$], layer_seen [$];

  // delta unit model: on start, emit the layer's columns then done
  always @(posedge clk) begin
    if (rst_n && du_clear) fork begin repeat (3) @(posedge clk); du_done <= 1'b1; @(posedge clk); du_done <= 1'b0; end join_none
    if (rst_n && du_start) fork begin
      automatic int l = du_layer;
      layer_seen.push_back(l);
      check(du_n_in == ((l == 0) ? N : M), "du_n_in");
      foreach (cols[l][i]) begin
        @(negedge clk);
        while (pcol_af) @(negedge clk);
        dv_valid = 1; dv_pcol = IDX_W'(cols[l][i] % 1000); dv_ctype = col_t'(cols[l][i] / 1000);
        @(negedge clk); dv_valid = 0;
      end
      repeat (2) @(posedge clk);
      du_done <= 1'b1; @(posedge clk); du_done <= 1'b0;
    end join_none
  end

  // instruction and MAC checking
  int n_cmd = 0, n_mac = 0, n_act = 0, n_obrd = 0, beat = 0, cur_kind = 0;
  int col_q [$];
  always @(posedge clk) if (rst_n) begin
    if (cmd_tvalid && cmd_tready) begin
      automatic dm_cmd_t c = dm_cmd_t'(cmd_tdata);
      n_cmd++;
      check(c.btt == 23'(COLB), "byte count");
      check(c.incr && c.eof, "command flags");
      check(exp_addr.size() > 0 && c.saddr == 32'(exp_addr[0]),
            $sformatf("address %h expected %h", c.saddr, exp_addr.size() ? exp_addr[0] : 0));
      if (exp_addr.size()) void'(exp_addr.pop_front());
    end
    if (s.op == OP_MAC) begin
      automatic int g = beat / MBr, r = beat % MBr, k = exp_kind[0];
      automatic slot_t es = (g == 0) ? SL_R : (g == 1) ? SL_U : (k == 1) ? SL_CH : SL_CX;
      check(wf_pop, "MAC word pops the W-FIFO");
      check(s.slot == es && int'(s.row) == r && s.zero == (k == 2),
            $sformatf("MAC word beat %0d: slot %0d row %0d zero %0d", beat, s.slot, s.row, s.zero));
      check(df_pop == (beat == 3 * MBr - 1), "D-FIFO popped with the last beat");
      n_mac++;
      beat++;
      if (beat == 3 * MBr) begin beat = 0; void'(exp_kind.pop_front()); end
    end
    if (s.op == OP_ACT) begin
      check(int'(s.step) == n_act % 6 && int'(s.row) == (n_act / 6) % MBr, "activation step/row order");
      check(ob_rd_en == (s.step == 3'd1), "OBUF read at step 1");
      n_act++;
    end
  end

  task automatic plan(int l, int pcs [], int kinds [], bit first);
    int base = WBASE + ((l == 0) ? 0 : (N + M + 1) * COLB);
    cols[l].delete();
    foreach (pcs[i]) begin
      cols[l].push_back(kinds[i] * 1000 + pcs[i]);
      exp_addr.push_back(base + pcs[i] * COLB);
      exp_kind.push_back(kinds[i]);
    end
  endtask

  initial begin
    enable = 0; init = 0; x_valid = 0; dv_valid = 0; dv_pcol = 0; dv_ctype = COL_IN; du_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    @(negedge clk);
    check(busy, "busy while clearing");
    while (busy) @(negedge clk);
    enable = 1;
    for (int t = 0; t < 2; t++) begin
      automatic int m0 = n_mac, a0 = n_act, c0 = n_cmd;
      if (t == 0) begin
        plan(0, '{N + M, 1, 4}, '{2, 0, 0}, 1);
        plan(1, '{M + M, 3, M + 2}, '{2, 0, 1}, 1);
      end else begin
        plan(0, '{0, N + 5}, '{0, 1}, 0);
        plan(1, '{M + 15}, '{1}, 0);
      end
      layer_seen.delete();
      x_valid = 1;
      @(negedge clk);
      check(du_first == (t == 0), "first-step flag");
      x_valid = 0;
      while (!out_done) @(negedge clk);
      check(out_layer == 1 && int'(out_m) == M, "output of the last layer");
      while (busy) @(negedge clk);
      check(layer_seen.size() == 2 && layer_seen[0] == 0 && layer_seen[1] == 1, "layer order");
      check(n_cmd - c0 == ((t == 0) ? 6 : 3), "instruction count");
      check(n_mac - m0 == ((t == 0) ? 6 : 3) * 3 * MBr, $sformatf("MAC beats %0d", n_mac - m0));
      check(n_act - a0 == 2 * 6 * MBr, $sformatf("activation cycles %0d", n_act - a0));
      check(ts_count == 32'(t + 1), "time-step counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
