// tb_field_interp -- random 3x3 field windows and positions; each of the six
// interpolated components is compared with a real-valued bilinear
// interpolation that places every sample at its staggered position.
module tb_field_interp;
  import pic_pkg::*;
  import tb_ref_pkg::*;
  emf_t  win [3][3];
  fx_t   x0, y0;
  vec3_t ep, bp;
  int checks = 0, failures = 0;

  field_interp dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real got [6];
    for (int t = 0; t < 2000; t++) begin
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < 3; b++)
          win[a][b] = '{'{f(($urandom % 2000) / 1000.0 - 1.0), f(($urandom % 2000) / 1000.0 - 1.0),
                          f(($urandom % 2000) / 1000.0 - 1.0)},
                        '{f(($urandom % 2000) / 1000.0 - 1.0), f(($urandom % 2000) / 1000.0 - 1.0),
                          f(($urandom % 2000) / 1000.0 - 1.0)}};
      x0 = fx_t'($urandom % (1 << FRAC));
      y0 = fx_t'($urandom % (1 << FRAC));
      if (t < 4) begin x0 = (t % 2) ? FX_HALF : 0; y0 = (t / 2) ? FX_HALF : 0; end
      #1;
      got = '{r(ep.x), r(ep.y), r(ep.z), r(bp.x), r(bp.y), r(bp.z)};
      for (int c = 0; c < 6; c++) begin
        real e;
        e = ref_interp1(win, r(x0), r(y0), c);
        checks++;
        if (absr(got[c] - e) > 1e-5) begin
          failures++;
          $display("FAIL comp %0d x0=%f y0=%f got %f exp %f", c, r(x0), r(y0), got[c], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
