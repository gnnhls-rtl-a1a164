// tb_gnn_pkg: checks the fp32 operators of gnn_pkg (add, multiply, divide,
// integer conversion, exp, sigmoid, tanh, ELU, LeakyReLU) on random operands
// against real arithmetic.
// fp32 arithmetic is the paper's data format; the operator implementations
// and tolerances (1e-6 relative for add/mul/div, 1e-5 for exp-based
// functions, 2e-6 absolute for tanh) are this design's.
module tb_gnn_pkg;
  import tb_pkg::*;
  import gnn_pkg::*;
  int checks = 0, failures = 0;

  task automatic t(input string op, input real a, input real b, input logic [31:0] got, input real e,
                   input real rel);
    checks++;
    if (!near(f2r(got), e, rel, 1e-6)) begin
      failures++;
      if (failures < 20) $display("%s(%g, %g) = %g, expected %g", op, a, b, f2r(got), e);
    end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real a, b;
      logic [31:0] fa, fb;
      a = rnd(8.0) * ((n % 3 == 0) ? 100.0 : 1.0);
      b = rnd(8.0);
      fa = r2f(a); fb = r2f(b);
      a = f2r(fa); b = f2r(fb);
      t("add", a, b, fp_add(fa, fb), a + b, 1e-6);
      t("mul", a, b, fp_mul(fa, fb), a * b, 1e-6);
      if (b != 0.0) t("div", a, b, fp_div(fa, fb), a / b, 1e-6);
      t("exp", b, 0, fp_exp(fb), $exp(b), 1e-5);
      t("sigmoid", b, 0, fp_sigmoid(fb), sigmoid_r(b), 1e-5);
      checks++;
      if (!near(f2r(fp_tanh(fb)), $tanh(b), 0.0, 2e-6)) begin
        failures++;
        $display("tanh(%g) = %g, expected %g", b, f2r(fp_tanh(fb)), $tanh(b));
      end
      t("elu", b, 0, fp_elu(fb), elu_r(b), 1e-5);
      t("lrelu", b, 0, fp_lrelu(fb), lrelu_r(b), 1e-6);
      t("from_uint", real'(n), 0, fp_from_uint(32'(n)), real'(n), 0.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog: the checks take no simulated time, so any delay means a hang
  initial begin
    #1000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
