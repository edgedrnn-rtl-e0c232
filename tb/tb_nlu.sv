// tb_nlu -- exhaustive test of the nonlinear unit: every Q8.8 input, sigmoid
// and tanh, against a real-arithmetic model sampled the same way.
module tb_nlu;
  import edgedrnn_pkg::*;
  import edgedrnn_tb_pkg::*;
  act_t x, y;
  logic sel_tanh;
  int checks = 0, failures = 0;

  nlu dut (.x, .sel_tanh, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 2; f++)
      for (int v = -32768; v < 32768; v++) begin
        x = act_t'(v); sel_tanh = f[0];
        #1;
        checks++;
        if (int'(y) != ref_nl(v, f[0])) begin
          failures++;
          if (failures < 10) $display("FAIL: f=%0d x=%0d y=%0d expected %0d", f, v, y, ref_nl(v, f[0]));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
