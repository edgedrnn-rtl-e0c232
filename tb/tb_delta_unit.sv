// tb_delta_unit -- delta unit test. Runs layer 0 (x from the stream, with a
// bias column on the first step) and layer 1 (input from the output-buffer
// model) for several steps with random frames, random output back-pressure and
// a threshold of 0x40, and compares the sequence of emitted (pcol, delta, kind)
// with a model of the delta rule. Also checks the rate: with no back-pressure
// the hidden part takes one element per cycle (start to done seen = n_in + m + 3
// cycles for a layer whose input comes from the output buffer).
module tb_delta_unit;
  import edgedrnn_pkg::*;
  import edgedrnn_tb_pkg::*;
  localparam int N = 10, M = 16, THETA = 'h40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, start, st_layer, st_first, busy, done;
  logic [IDX_W-1:0] st_n_in, st_m;
  logic x_tvalid, x_tready;
  logic [63:0] x_tdata;
  logic ob_en, ob_layer;
  logic [IDX_W-1:0] ob_idx;
  act_t ob_data;
  logic out_ready, dv_valid;
  act_t dv_delta;
  logic [IDX_W-1:0] dv_pcol;
  col_t dv_ctype;
  int checks = 0, failures = 0;

  delta_unit #(.MAX_L(2), .MAX_IN(32), .MAX_M(32)) dut (
    .clk, .rst_n, .theta(act_t'(THETA)), .clear, .start, .st_layer, .st_n_in, .st_m, .st_first,
    .busy, .done, .s_x_tvalid(x_tvalid), .s_x_tready(x_tready), .s_x_tdata(x_tdata),
    .obuf_rd_en(ob_en), .obuf_rd_layer(ob_layer), .obuf_rd_idx(ob_idx), .obuf_rd_data(ob_data),
    .out_ready, .dv_valid, .dv_delta, .dv_pcol, .dv_ctype);

  // output buffer model: h[layer][i], one cycle read latency
  int hmem [2][M];
  always @(posedge clk) if (ob_en) ob_data <= act_t'(hmem[ob_layer][ob_idx]);

  // collected outputs
  int got_pcol [$], got_d [$], got_k [$];
  always @(posedge clk) if (rst_n && dv_valid) begin
    got_pcol.push_back(int'(dv_pcol)); got_d.push_back(int'(dv_delta)); got_k.push_back(int'(dv_ctype));
  end

  // random back-pressure (when enabled)
  bit bp_on = 1;
  int n_done = 0, cyc_now = 0;
  always @(posedge clk) begin cyc_now++; if (done) n_done++; end
  always @(negedge clk) out_ready <= bp_on ? ($urandom % 3 != 0) : 1'b1;

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

  int px [2][N > M ? N : M], ph [2][M];
  int xin [N];
  int exp_pcol [$], exp_d [$], exp_k [$];

  function automatic void model(int layer, bit first);
    int nin = (layer == 0) ? N : M;
    if (first) begin exp_pcol.push_back(nin + M); exp_d.push_back(256); exp_k.push_back(2); end
    for (int i = 0; i < nin + M; i++) begin
      int cur = (i < nin) ? ((layer == 0) ? xin[i] : hmem[0][i]) : hmem[layer][i - nin];
      int prev = (i < nin) ? px[layer][i] : ph[layer][i - nin];
      int d = sat16(longint'(cur) - prev);
      if (d != 0 && ((d < 0) ? -d : d) >= THETA) begin
        exp_pcol.push_back(i); exp_d.push_back(d); exp_k.push_back(i < nin ? 0 : 1);
        if (i < nin) px[layer][i] = prev + d; else ph[layer][i - nin] = prev + d;
      end
    end
  endfunction

  task automatic run_layer(int layer, bit first, output int cycles);
    int t0, d0;
    @(negedge clk);
    d0 = n_done;
    start = 1; st_layer = layer[0]; st_first = first; st_n_in = IDX_W'((layer == 0) ? N : M); st_m = M;
    @(negedge clk);
    start = 0;
    t0 = cyc_now;
    if (layer == 0)
      for (int b = 0; b < (N + 3) / 4; b++) begin
        logic [63:0] beat = '0;
        for (int e = 0; e < 4; e++) if (4 * b + e < N) beat[16*e +: 16] = 16'(xin[4*b+e]);
        x_tvalid = 1; x_tdata = beat;
        do @(posedge clk); while (!x_tready);
        @(negedge clk);
        x_tvalid = 0;
      end
    while (n_done == d0) @(negedge clk);
    cycles = cyc_now - t0 + 1;
  endtask

  initial begin
    int cyc;
    clear = 0; start = 0; st_layer = 0; st_first = 0; st_n_in = 0; st_m = 0;
    x_tvalid = 0; x_tdata = 0;
    foreach (hmem[l, i]) hmem[l][i] = 0;
    foreach (px[l, i]) px[l][i] = 0;
    foreach (ph[l, i]) ph[l][i] = 0;
    foreach (xin[i]) xin[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (n_done == 0) @(negedge clk);
    for (int t = 0; t < 6; t++) begin
      foreach (xin[i]) if (t == 0 || $urandom % 2) xin[i] = int'($urandom % 400) - 200;
      model(0, t == 0);
      run_layer(0, t == 0, cyc);
      foreach (hmem[l, i]) if (t == 0 || $urandom % 2) hmem[l][i] = int'($urandom % 400) - 200;
      model(1, t == 0);
      bp_on = (t != 5);
      run_layer(1, t == 0, cyc);
      // start edge, one issue per element (n_in + m = 2M), drain, done register, sampling edge
      if (t == 5) check(cyc == M + M + 3, $sformatf("layer-1 pass took %0d cycles, expected %0d", cyc, 2 * M + 3));
      @(negedge clk);
      check(got_pcol.size() == exp_pcol.size(),
            $sformatf("step %0d: %0d deltas emitted, expected %0d", t, got_pcol.size(), exp_pcol.size()));
      while (got_pcol.size() > 0 && exp_pcol.size() > 0) begin
        int gp, gd, gk, ep, ed, ek;
        gp = got_pcol.pop_front(); gd = got_d.pop_front(); gk = got_k.pop_front();
        ep = exp_pcol.pop_front(); ed = exp_d.pop_front(); ek = exp_k.pop_front();
        check(gp == ep && gd == ed && gk == ek,
              $sformatf("step %0d: got (%0d,%0d,%0d) expected (%0d,%0d,%0d)", t, gp, gd, gk, ep, ed, ek));
      end
      got_pcol.delete(); got_d.delete(); got_k.delete();
      exp_pcol.delete(); exp_d.delete(); exp_k.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
