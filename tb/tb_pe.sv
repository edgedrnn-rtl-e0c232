// tb_pe -- processing element test. Drives the control word s as CTRL would:
// a bias column (zero-select), several input and hidden columns of random
// deltas and weights over all rows and gates, then the activation sequence
// for every row with a random h(t-1). Checks each h(t) against the GRU model
// and that h_we arrives exactly 7 cycles after micro-step 0 (six steps plus
// the registered output).
module tb_pe;
  import edgedrnn_pkg::*;
  import edgedrnn_tb_pkg::*;
  localparam int MAX_M = 64, MB = MAX_M / K;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pe_ctrl_t s;
  act_t delta, h_prev, h_out;
  wgt_t w;
  logic h_we;
  logic [$clog2(2*MB)-1:0] h_addr;
  int checks = 0, failures = 0;
  longint acc [MB][4];
  int hp [MB];

  pe #(.MAX_M(MAX_M), .MAX_L(2)) dut (.clk, .rst_n, .s, .delta, .w, .h_prev, .h_we, .h_addr, .h_out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one column: 3*MB beats, gate-major, rows within
  task automatic column(input int kind, input int d, input bit layer);
    for (int g = 0; g < 3; g++)
      for (int r = 0; r < MB; r++) begin
        int wv = int'($urandom % 256) - 128;
        int sl = (g < 2) ? g : (kind == 1 ? 3 : 2);
        @(negedge clk);
        s = '0; s.op = OP_MAC; s.layer = layer; s.row = 10'(r);
        s.slot = slot_t'(sl); s.zero = (kind == 2);
        delta = act_t'(d); w = wgt_t'(wv);
        if (kind == 2) begin
          acc[r][sl] = longint'(d) * wv;
          if (g == 2) acc[r][3] = 0;
        end else acc[r][sl] = wrap32(acc[r][sl] + longint'(d) * wv);
        // random idle cycles between beats
        if ($urandom % 4 == 0) begin @(negedge clk); s = '0; end
      end
    @(negedge clk); s = '0;
  endtask

  initial begin
    s = '0; delta = 0; w = 0; h_prev = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 2; layer++) begin
      column(2, 256, layer[0]);
      for (int c = 0; c < 12; c++)
        column((c % 3 == 0) ? 1 : 0, int'($urandom % 1024) - 512, layer[0]);
      @(negedge clk); @(negedge clk);
      for (int r = 0; r < MB; r++) begin
        int t0, exp_h;
        hp[r] = int'($urandom % 512) - 256;
        exp_h = ref_neuron(acc[r][0], acc[r][1], acc[r][2], acc[r][3], hp[r]);
        h_prev = act_t'(hp[r]);
        for (int st = 0; st < ACT_STEPS; st++) begin
          @(negedge clk);
          s = '0; s.op = OP_ACT; s.step = 3'(st); s.row = 10'(r); s.layer = layer[0];
          if (st == 0) t0 = 0;
        end
        @(negedge clk); s = '0;
        check(h_we == 1'b0, "h_we early");
        @(negedge clk);
        // step 0 was driven 7 cycles ago; output valid now
        check(h_we == 1'b1, $sformatf("row %0d: h_we not high 7 cycles after step 0", r));
        check(int'(h_out) == exp_h, $sformatf("layer %0d row %0d: h %0d expected %0d", layer, r, h_out, exp_h));
        check(int'(h_addr) == layer * MB + r, "h_addr");
        @(negedge clk);
        check(h_we == 1'b0, "h_we is a single pulse");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
