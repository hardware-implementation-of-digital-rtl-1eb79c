// clause_unit_tb: the clause datapath against a floating-point model.
//
// Drives random clauses (variable values in [-1, 1], random negations, x_s in
// [eps, 1-eps], x_l in [1, 2000]) plus directed cases (a tie for the minimum,
// values at +-1, x_s and x_l at their bounds, init mode) and compares every
// output with the DMM equations evaluated here in double precision:
// C, G, R, the three dv contributions, the clipped Euler updates of x_s and
// x_l, and the Boolean satisfaction of the clause. The tolerance covers the
// truncation of the fixed-point format, scaled with the size of x_l.
module clause_unit_tb;
  import dmm_pkg::*;

  localparam int  M        = 43;
  localparam int  DT_SHIFT = 5;
  localparam real ZETA_R   = 0.1;

  logic      init = 0;
  fx_t [2:0] v = '0;
  logic [2:0] neg = '0;
  fx_t xs = '0, xl = '0;
  fx_t [2:0] dv;
  fx_t xs_next, xl_next, c_val;
  logic sat;

  clause_unit #(.M(M), .DT_SHIFT(DT_SHIFT), .ZETA(ZETA_7)) dut (
    .init, .v, .neg, .xs, .xl, .dv, .xs_next, .xl_next, .c_val, .sat
  );

  int checks = 0, failures = 0;
  localparam real SCALE = 65536.0;

  function automatic real r_of(input fx_t x);
    return real'(x) / SCALE;
  endfunction

  function automatic fx_t fx_of(input real r);
    return fx_t'($rtoi(r * SCALE));
  endfunction

  task automatic close(input real got, input real exp, input real tol, input string what);
    checks++;
    if (!((got - exp) <= tol && (exp - got) <= tol)) begin
      failures++;
      if (failures < 15) $display("FAIL: %s got %f expected %f", what, got, exp);
    end
  endtask

  task automatic apply_and_check(input string tag);
    real rv[3], q[3], a[3], amin, c, g, r, dvr, dt, xsr, xlr, xsn, xln, tol, eps;
    bit  s;
    #1;
    dt  = 1.0 / real'(1 << DT_SHIFT);
    eps = 1.0e-3;
    xsr = r_of(xs);
    xlr = r_of(xl);
    for (int k = 0; k < 3; k++) begin
      rv[k] = r_of(v[k]);
      q[k]  = neg[k] ? -1.0 : 1.0;
      a[k]  = 1.0 - q[k] * rv[k];
    end
    amin = a[0];
    if (a[1] < amin) amin = a[1];
    if (a[2] < amin) amin = a[2];
    c = 0.5 * amin;
    tol = 1.0e-3 * (1.0 + xlr);
    close(r_of(c_val), c, 1.0e-4, {tag, " C"});
    for (int k = 0; k < 3; k++) begin
      real o1, o2;
      o1 = a[(k + 1) % 3];
      o2 = a[(k + 2) % 3];
      g = 0.5 * q[k] * ((o1 < o2) ? o1 : o2);
      r = (a[k] == amin) ? 0.5 * (q[k] - rv[k]) : 0.0;
      dvr = xlr * xsr * g + (1.0 + ZETA_R * xlr) * (1.0 - xsr) * r;
      close(r_of(dv[k]), dvr, tol, $sformatf("%s dv[%0d]", tag, k));
    end
    if (init) begin
      xsn = c;
      xln = 1.0;
    end else begin
      xsn = xsr + dt * 20.0 * (xsr + eps) * (c - 0.25);
      if (xsn < eps) xsn = eps;
      if (xsn > 1.0 - eps) xsn = 1.0 - eps;
      xln = xlr + dt * 5.0 * (c - 0.05);
      if (xln < 1.0) xln = 1.0;
      if (xln > 1.0e4 * M) xln = 1.0e4 * M;
    end
    close(r_of(xs_next), xsn, 1.0e-3, {tag, " x_s update"});
    close(r_of(xl_next), xln, 1.0e-3, {tag, " x_l update"});
    s = 0;
    for (int k = 0; k < 3; k++) if ((rv[k] >= 0.0) != neg[k]) s = 1;
    checks++;
    if (sat != s) begin
      failures++;
      $display("FAIL: %s satisfaction", tag);
    end
  endtask

  initial begin
    // random clauses
    for (int i = 0; i < 3000; i++) begin
      for (int k = 0; k < 3; k++) v[k] = fx_t'($signed($urandom_range(131072))) - FX_ONE;
      neg  = 3'($urandom);
      xs   = fx_t'($urandom_range(65536 - 66, 66));
      xl   = FX_ONE + fx_t'($urandom_range(2000 * 65536 - 65536));
      init = ($urandom_range(9) == 0);
      apply_and_check($sformatf("random %0d", i));
    end
    init = 0;
    // tie: two literals attain the minimum, both receive R
    v[0] = fx_of(0.5); v[1] = fx_of(-0.5); v[2] = fx_of(-0.75); neg = 3'b010; xs = fx_of(0.5); xl = fx_of(3.0);
    apply_and_check("tie");
    checks++;
    if (dut.r[0] == 0 || dut.r[1] == 0 || dut.r[2] != 0) begin failures++; $display("FAIL: tie R"); end
    // all literals false at the corners: C = 1, x_s at the upper bound
    v[0] = -FX_ONE; v[1] = -FX_ONE; v[2] = FX_ONE; neg = 3'b100; xs = FX_ONE - EPSILON; xl = fx_of(10.0);
    apply_and_check("corner false");
    // all satisfied: C = 0, x_s pushed below eps, x_l at 1 clipped
    v[0] = FX_ONE; v[1] = -FX_ONE; v[2] = FX_ONE; neg = 3'b010; xs = EPSILON; xl = FX_ONE;
    apply_and_check("corner true");
    // x_l at its ceiling 10^4 M
    v[0] = -FX_ONE; v[1] = -FX_ONE; v[2] = -FX_ONE; neg = 3'b000; xs = fx_of(0.5);
    xl = fx_t'(64'(M) * 64'd10000) <<< FX_F;
    apply_and_check("x_l ceiling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
