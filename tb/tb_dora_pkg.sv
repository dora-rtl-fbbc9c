// tb_dora_pkg -- checks the Q16.16 arithmetic helpers of dora_pkg against
// real-number math: multiply, divide, exp on x <= 0 and square root.
module tb_dora_pkg;
  import dora_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(input string what, input real got, input real exp_v, input real tol);
    checks++;
    if ((got - exp_v > tol) || (exp_v - got > tol)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp_v);
    end
  endtask

  initial begin
    real a, b2;
    for (int t = 0; t < 200; t++) begin
      a  = (real'($urandom_range(0, 2000)) - 1000.0) / 100.0;
      b2 = (real'($urandom_range(1, 2000))) / 100.0;
      chk("mul", q2r(q_mul(r2q(a), r2q(b2))), a*b2, 0.01);
      chk("div", q2r(q_div(r2q(a), r2q(b2))), a/b2, 0.01);
      a = -real'($urandom_range(0, 1600)) / 100.0;
      chk("exp", q2r(q_exp_neg(r2q(a))), $exp(a), 0.003 * $exp(a) + 0.0001);
      b2 = real'($urandom_range(0, 100000)) / 100.0;
      chk("sqrt", q2r(q_sqrt(r2q(b2))), $sqrt(b2), 0.001);
    end
    chk("exp0", q2r(q_exp_neg(0)), 1.0, 0.0001);
    chk("isqrt", real'(isqrt64(64'd1000000)), 1000.0, 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
