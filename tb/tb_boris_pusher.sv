// tb_boris_pusher -- random momenta and fields (warm-plasma momenta up to
// |u| ~ 3, fields up to 1); the new momentum, displacement and vz are
// compared with a real-valued Boris push. Also checks that a pure magnetic
// field conserves |u| (the rotation property of the scheme).
module tb_boris_pusher;
  import pic_pkg::*;
  import tb_ref_pkg::*;
  vec3_t u, ep, bp, u_new;
  fx_t   tem, dt_dx, dt_dy, dx, dy, vz;
  int checks = 0, failures = 0;

  boris_pusher dut (.*);

  task automatic chk(string what, real got, real exp, real tol);
    checks++;
    if (absr(got - exp) > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask

  function automatic real rnd(real m);
    return (($urandom % 20001) / 10000.0 - 1.0) * m;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ur[3], er[3], br[3], un[3], rdx, rdy, rvz;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 3; i++) begin ur[i] = rnd(2.0); er[i] = rnd(1.0); br[i] = rnd(1.0); end
      if (t % 4 == 0) for (int i = 0; i < 3; i++) er[i] = 0.0;
      u  = '{f(ur[0]), f(ur[1]), f(ur[2])};
      ep = '{f(er[0]), f(er[1]), f(er[2])};
      bp = '{f(br[0]), f(br[1]), f(br[2])};
      tem = f(0.5 * 0.07 * -1.0);       // q/m = -1, dt = 0.07
      dt_dx = f(0.07 / 0.1);
      dt_dy = f(0.07 / 0.1);
      #1;
      ref_boris('{r(u.x), r(u.y), r(u.z)}, '{r(ep.x), r(ep.y), r(ep.z)},
                '{r(bp.x), r(bp.y), r(bp.z)}, r(tem), r(dt_dx), r(dt_dy), un, rdx, rdy, rvz);
      chk("ux", r(u_new.x), un[0], 1e-4);
      chk("uy", r(u_new.y), un[1], 1e-4);
      chk("uz", r(u_new.z), un[2], 1e-4);
      chk("dx", r(dx), rdx, 1e-4);
      chk("dy", r(dy), rdy, 1e-4);
      chk("vz", r(vz), rvz, 1e-4);
      if (t % 4 == 0)
        chk("|u| kept by B", r(dot3(u_new, u_new)), r(dot3(u, u)), 1e-3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
