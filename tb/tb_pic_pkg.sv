// tb_pic_pkg -- checks the fixed-point helpers of pic_pkg against real
// arithmetic: multiply, divide, 1/sqrt(1+s), dot and cross products.
module tb_pic_pkg;
  import pic_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(string what, real got, real exp, real tol);
    checks++;
    if (absr(got - exp) > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, b, s;
    vec3_t va, vb, vc;
    for (int i = 0; i < 500; i++) begin
      a = ($urandom % 20000) / 1000.0 - 10.0;
      b = ($urandom % 20000) / 1000.0 - 10.0;
      chk("mul", r(fx_mul(f(a), f(b))), a * b, 1e-5);
      if (absr(b) > 0.1) chk("div", r(fx_div(f(a), f(b))), r(f(a)) / r(f(b)), 1e-5);
      s = ($urandom % 50000) / 1000.0;
      chk("rsqrt1", r(fx_rsqrt1(f(s))), 1.0 / $sqrt(1.0 + s), 1e-6);
      va = '{f(a), f(b), f(s / 10.0)};
      vb = '{f(b / 3.0), f(a / 2.0), f(1.5)};
      vc = cross3(va, vb);
      chk("cross.x", r(vc.x), b * 1.5 - (s / 10.0) * (a / 2.0), 1e-4);
      chk("cross.y", r(vc.y), (s / 10.0) * (b / 3.0) - a * 1.5, 1e-4);
      chk("cross.z", r(vc.z), a * (a / 2.0) - b * (b / 3.0), 1e-4);
      chk("dot", r(dot3(va, vb)), a * b / 3.0 + b * a / 2.0 + (s / 10.0) * 1.5, 1e-4);
    end
    checks++;
    if (caddr(3, 2) != CADDR_W'(2 * 28 + 3)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
