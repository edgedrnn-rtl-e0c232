// edgedrnn_tb_body -- end-to-end test of the EdgeDRNN top level, shared by the
// small end-to-end test and the full-size test (they differ only in the network
// configured at run time; the accelerator keeps its default parameters).
//
// The body configures the accelerator over AXI-Lite, clears its state, then
// streams STEPS input frames x(t) and collects h(t) of the last layer. A
// bit-exact DeltaGRU model (delta rule with threshold, bias loaded as a column
// with delta 1.0 on the first step, Q8.8/Q1.7 arithmetic, table sigmoid/tanh)
// gives the expected h(t); weights come from the same DRAM function the
// Datamover model serves. Checked per step: every h element, TLAST, the number
// of Datamover instructions (= non-zero columns), the number of MAC beats
// (= columns * 3M/8) and activation cycles (= 6M/8 per layer). Counted, and
// required to happen at least once: thresholded skips, exact-zero skips, bias
// loads, delta-unit stalls on full FIFOs, PE waits for weights, output
// back-pressure, second-layer runs, a re-initialisation and a threshold change.
module edgedrnn_tb_body #(
  parameter int L         = 2,
  parameter int N         = 40,
  parameter int M         = 64,
  parameter int STEPS     = 5,
  parameter int THETA     = 'h40,
  parameter int REINIT_AT = 3,       // step before which the state is cleared again
  parameter int STALL_PCT = 20,
  parameter int WBASE     = 'h1000,
  parameter int MAX_CYC   = 2_000_000
) ();
  import edgedrnn_pkg::*;
  import edgedrnn_tb_pkg::*;

  localparam int MB = M / 8;
  localparam int COLB = 3 * MB * 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [7:0]  awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic        x_tvalid, x_tready, h_tvalid, h_tready, h_tlast;
  logic [63:0] x_tdata, h_tdata;
  logic        cmd_tvalid, cmd_tready, w_tvalid, w_tready;
  logic [71:0] cmd_tdata;
  logic [63:0] w_tdata;
  int          n_cmds;

  edgedrnn dut (
    .clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_x_tvalid(x_tvalid), .s_x_tready(x_tready), .s_x_tdata(x_tdata),
    .m_h_tvalid(h_tvalid), .m_h_tready(h_tready), .m_h_tdata(h_tdata), .m_h_tlast(h_tlast),
    .m_cmd_tvalid(cmd_tvalid), .m_cmd_tready(cmd_tready), .m_cmd_tdata(cmd_tdata),
    .s_w_tvalid(w_tvalid), .s_w_tready(w_tready), .s_w_tdata(w_tdata));

  datamover_model #(.STALL_PCT(STALL_PCT)) u_dm (
    .clk, .rst_n, .cmd_tvalid, .cmd_tready, .cmd_tdata, .w_tvalid, .w_tready, .w_tdata, .n_cmds);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int c_skip_thr = 0, c_skip_zero = 0, c_bias = 0, c_du_stall = 0, c_w_wait = 0;
  int c_out_bp = 0, c_layer1 = 0, c_reinit = 0, c_theta_sw = 0, c_mac = 0, c_act = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_du.busy && !dut.u_du.out_ready &&
        (dut.u_du.state == dut.u_du.S_IN || dut.u_du.state == dut.u_du.S_HID)) c_du_stall++;
    if (dut.u_ctrl.state == dut.u_ctrl.C_MXV && !dut.u_ctrl.iq_empty && dut.wf_empty) c_w_wait++;
    if (h_tvalid && !h_tready) c_out_bp++;
    if (dut.du_start && dut.du_layer) c_layer1++;
    if (dut.s.op == OP_MAC) c_mac++;
    if (dut.s.op == OP_ACT) c_act++;
  end

  initial begin
    repeat (MAX_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog after %0d cycles", MAX_CYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI-Lite host ----------------
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awvalid = 1'b1; awaddr = a; wvalid = 1'b1; wdata = d;
    #1;   // let the combinational ready settle, then sample it before the edge
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(posedge clk);
    @(negedge clk);
  endtask
  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1'b1; araddr = a;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk);
  endtask

  // ---------------- reference model state ----------------
  int     px [L][];
  int     ph [L][];
  int     hh [L][];
  longint acc [L][][4];
  int     xin [];
  bit     first;
  int     theta;

  function automatic int w_of(int l, int c, int g, int j);
    longint unsigned base;
    base = longint'(WBASE) + ((l == 0) ? 0 : longint'(N + M + 1) * COLB);
    return wbyte(base + longint'(c) * COLB + longint'((g * MB + j / 8) * 8 + j % 8));
  endfunction

  function automatic void ref_clear();
    for (int l = 0; l < L; l++) begin
      foreach (px[l][i]) px[l][i] = 0;
      foreach (ph[l][i]) ph[l][i] = 0;
      foreach (hh[l][i]) hh[l][i] = 0;
    end
    first = 1'b1;
  endfunction

  // add column c (delta d) of layer l to the sums; kind 0 input, 1 hidden, 2 bias
  function automatic void ref_col(int l, int c, int d, int kind);
    for (int g = 0; g < 3; g++)
      for (int j = 0; j < M; j++) begin
        int s = (g < 2) ? g : ((kind == 1) ? 3 : 2);
        longint p = longint'(d) * w_of(l, c, g, j);
        if (kind == 2) begin
          acc[l][j][s] = p;
          if (g == 2) acc[l][j][3] = 0;
        end else begin
          acc[l][j][s] = wrap32(acc[l][j][s] + p);
        end
      end
  endfunction

  // one time step; returns the number of columns fetched
  function automatic int ref_step();
    int ncol = 0;
    for (int l = 0; l < L; l++) begin
      int nin = (l == 0) ? N : M;
      int hnew [];
      if (first) begin
        ref_col(l, nin + M, 256, 2);
        ncol++; c_bias++;
      end
      for (int i = 0; i < nin + M; i++) begin
        int cur  = (i < nin) ? ((l == 0) ? xin[i] : hh[l-1][i]) : hh[l][i - nin];
        int prev = (i < nin) ? px[l][i] : ph[l][i - nin];
        int d    = sat16(longint'(cur) - prev);
        int mag  = (d < 0) ? -d : d;
        if (d == 0) c_skip_zero++;
        else if (mag < theta) c_skip_thr++;
        else begin
          if (i < nin) px[l][i] = prev + d; else ph[l][i - nin] = prev + d;
          ref_col(l, i, d, (i < nin) ? 0 : 1);
          ncol++;
        end
      end
      hnew = new[M];
      for (int j = 0; j < M; j++)
        hnew[j] = ref_neuron(acc[l][j][0], acc[l][j][1], acc[l][j][2], acc[l][j][3], hh[l][j]);
      for (int j = 0; j < M; j++) hh[l][j] = hnew[j];
    end
    first = 1'b0;
    return ncol;
  endfunction

  // compare the last layer's sums in the PE accumulation memories with the model
  task automatic check_acc(input int t);
    int bad = 0;
    for (int j = 0; j < M; j++) begin
      longint a [4];
      case (j % 8)
        0: a = '{dut.g_lane[0].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[0].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[0].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[0].u_pe.mem_ch[(L-1)*96 + j/8]};
        1: a = '{dut.g_lane[1].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[1].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[1].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[1].u_pe.mem_ch[(L-1)*96 + j/8]};
        2: a = '{dut.g_lane[2].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[2].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[2].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[2].u_pe.mem_ch[(L-1)*96 + j/8]};
        3: a = '{dut.g_lane[3].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[3].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[3].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[3].u_pe.mem_ch[(L-1)*96 + j/8]};
        4: a = '{dut.g_lane[4].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[4].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[4].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[4].u_pe.mem_ch[(L-1)*96 + j/8]};
        5: a = '{dut.g_lane[5].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[5].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[5].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[5].u_pe.mem_ch[(L-1)*96 + j/8]};
        6: a = '{dut.g_lane[6].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[6].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[6].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[6].u_pe.mem_ch[(L-1)*96 + j/8]};
        default: a = '{dut.g_lane[7].u_pe.mem_r[(L-1)*96 + j/8], dut.g_lane[7].u_pe.mem_u[(L-1)*96 + j/8], dut.g_lane[7].u_pe.mem_cx[(L-1)*96 + j/8], dut.g_lane[7].u_pe.mem_ch[(L-1)*96 + j/8]};
      endcase
      for (int g = 0; g < 4; g++)
        if (longint'(int'(a[g])) != acc[L-1][j][g]) begin
          bad++;
          if (bad < 6) $display("  acc mismatch step %0d neuron %0d slot %0d: %0d vs %0d", t, j, g, int'(a[g]), acc[L-1][j][g]);
        end
    end
    check(bad == 0, $sformatf("step %0d: %0d accumulator mismatches", t, bad));
  endtask

  // ---------------- stimulus ----------------
  logic [31:0] rd;
  int          exp_h [];
  int          cyc = 0, t_first_x, t_last_h;
  always @(posedge clk) cyc++;

  task automatic send_x();
    for (int b = 0; b < (N + 3) / 4; b++) begin
      logic [63:0] beat = '0;
      for (int e = 0; e < 4; e++)
        if (4 * b + e < N) beat[16*e +: 16] = 16'(xin[4 * b + e]);
      while (($urandom % 100) < STALL_PCT) @(negedge clk);
      x_tvalid = 1'b1; x_tdata = beat;
      do @(posedge clk); while (!x_tready);
      if (b == 0) t_first_x = cyc;
      @(negedge clk);
      x_tvalid = 1'b0;
    end
  endtask

  task automatic recv_h(input int t);
    for (int b = 0; b < M / 4; b++) begin
      h_tready = ($urandom % 100) >= STALL_PCT;
      @(posedge clk);
      while (!(h_tvalid && h_tready)) begin
        @(negedge clk);
        h_tready = ($urandom % 100) >= STALL_PCT;
        @(posedge clk);
      end
      for (int e = 0; e < 4; e++) begin
        int got = int'($signed(h_tdata[16*e +: 16]));
        check(got == exp_h[4 * b + e],
              $sformatf("step %0d h[%0d] = %0d, expected %0d", t, 4 * b + e, got, exp_h[4 * b + e]));
      end
      check(h_tlast == (b == M / 4 - 1), $sformatf("step %0d TLAST at beat %0d", t, b));
      t_last_h = cyc;
      @(negedge clk);
      h_tready = 1'b0;
    end
  endtask

  initial begin
    awvalid = 0; wvalid = 0; bready = 1; arvalid = 0; rready = 1;
    awaddr = 0; wdata = 0; araddr = 0;
    x_tvalid = 0; x_tdata = 0; h_tready = 0;
    for (int l = 0; l < L; l++) begin
      px[l] = new[(l == 0) ? N : M];
      ph[l] = new[M];
      hh[l] = new[M];
      acc[l] = new[M];
    end
    xin = new[N];
    foreach (xin[i]) xin[i] = 0;
    theta = THETA;

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    axil_write(8'h08, L);
    axil_write(8'h0C, N);
    axil_write(8'h10, M);
    axil_write(8'h14, THETA);
    axil_write(8'h18, WBASE);
    axil_read(8'h10, rd);
    check(rd == M, "CFG read-back of M");
    axil_write(8'h00, 32'h2);           // init: clear state
    do axil_read(8'h04, rd); while (rd[0]);
    axil_write(8'h00, 32'h1);           // enable
    ref_clear();

    for (int t = 0; t < STEPS; t++) begin
      int ncol, cmd0, mac0, act0;
      if (t == REINIT_AT) begin
        axil_write(8'h00, 32'h2);
        do axil_read(8'h04, rd); while (rd[0]);
        axil_write(8'h00, 32'h1);
        ref_clear();
        c_reinit++;
      end
      if (t == STEPS - 1 && STEPS > 1) begin   // last step: exact-delta mode
        axil_write(8'h14, 0);
        theta = 0;
        c_theta_sw++;
      end
      // new frame: some elements unchanged, some moved a little, some a lot
      for (int i = 0; i < N; i++) begin
        automatic int r = $urandom % 10;
        if (t == 0 || r >= 6)  xin[i] = int'($urandom % 1024) - 512;
        else if (r >= 3)       xin[i] = sat16(longint'(xin[i]) + int'($urandom % 31) - 15);
      end
      ncol = ref_step();
      exp_h = new[M];
      foreach (exp_h[j]) exp_h[j] = hh[L-1][j];
      cmd0 = n_cmds; mac0 = c_mac; act0 = c_act;
      fork
        send_x();
        recv_h(t);
      join
      repeat (3) @(posedge clk);
      check_acc(t);
      check(n_cmds - cmd0 == ncol,
            $sformatf("step %0d: %0d instructions, expected %0d", t, n_cmds - cmd0, ncol));
      check(c_mac - mac0 == ncol * 3 * MB,
            $sformatf("step %0d: %0d MAC beats, expected %0d", t, c_mac - mac0, ncol * 3 * MB));
      check(c_act - act0 == L * 6 * MB,
            $sformatf("step %0d: %0d activation cycles, expected %0d", t, c_act - act0, L * 6 * MB));
      $display("step %0d: %0d columns, latency %0d cycles (x in to last h out)",
               t, ncol, t_last_h - t_first_x);
    end
    axil_read(8'h04, rd);
    check(rd[31:1] == 31'(STEPS), "STATUS time-step count");

    $display("mechanisms: thr_skip=%0d zero_skip=%0d bias=%0d du_stall=%0d w_wait=%0d out_bp=%0d layer1=%0d reinit=%0d theta_switch=%0d",
             c_skip_thr, c_skip_zero, c_bias, c_du_stall, c_w_wait, c_out_bp, c_layer1, c_reinit, c_theta_sw);
    check(c_skip_thr > 0,  "mechanism: threshold skip never happened");
    check(c_skip_zero > 0, "mechanism: zero skip never happened");
    check(c_bias > 0,      "mechanism: bias load never happened");
    check(c_du_stall > 0,  "mechanism: delta unit stall never happened");
    check(c_w_wait > 0,    "mechanism: PE wait for weights never happened");
    check(c_out_bp > 0,    "mechanism: output back-pressure never happened");
    check(L < 2 || c_layer1 > 0, "mechanism: second layer never ran");
    check(STEPS <= REINIT_AT || c_reinit > 0, "mechanism: re-initialisation never happened");
    check(STEPS < 2 || c_theta_sw > 0, "mechanism: threshold change never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
