// clause_unit: the per-clause datapath of one sub-step.
//
// For the clause m presented at its inputs (the three variable values, the
// three negation flags and the memory variables x_s,m, x_l,m) it evaluates,
// in one combinational pass:
//   C_m     = 1/2 min_k (1 - q_k v_k)                         clause function
//   G_k     = 1/2 q_k min(1 - q_j v_j, 1 - q_l v_l)           gradient term
//   R_k     = 1/2 (q_k - v_k) if 1 - q_k v_k is the minimum, else 0
//   dv_k    = x_l x_s G_k + (1 + zeta x_l)(1 - x_s) R_k       contribution to dv_k/dt
//   x_s'    = x_s + dt beta (x_s + eps)(C_m - gamma), clipped to [eps, 1-eps]
//   x_l'    = x_l + dt alpha (C_m - delta),           clipped to [1, 10^4 M]
// and whether the clause is satisfied by the Boolean assignment (v >= 0 -> 1).
// q_k = +1 for a plain literal and -1 for a negated one. These are the DMM
// equations of the solver; j, l are the other two literals of the clause.
// The time step is dt = 2^-DT_SHIFT, a shift (this design's choice).
// The memory-variable update uses the memory variables and C_m of time t, as
// forward Euler does. With init=1 the unit instead produces the initial memory
// values x_s(0) = C_m(0) and x_l(0) = 1.
//
// A tie for the minimum gives R to every literal that attains it, which is what
// the equation for R states. Purely combinational; all arithmetic is the
// fixed-point format of dmm_pkg.
module clause_unit
  import dmm_pkg::*;
#(
  parameter int  M        = 387,       // number of clauses (sets the x_l ceiling)
  parameter int  DT_SHIFT = 5,         // dt = 2^-DT_SHIFT
  parameter fx_t ZETA     = ZETA_4P3   // zeta of the instance's clause ratio
) (
  input  logic            init,
  input  fx_t       [2:0] v,
  input  logic      [2:0] neg,
  input  fx_t             xs,
  input  fx_t             xl,
  output fx_t       [2:0] dv,
  output fx_t             xs_next,
  output fx_t             xl_next,
  output fx_t             c_val,
  output logic            sat
);

  localparam fx_t XL_MAX = fx_t'(64'(M) * 64'd10000) <<< FX_F;
  localparam fx_t XS_MIN = EPSILON;
  localparam fx_t XS_MAX = FX_ONE - EPSILON;

  fx_t [2:0] a;       // 1 - q_k v_k
  fx_t [2:0] g, r;
  fx_t       amin, c, w_g, w_r, dxs, dxl;

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      a[k] = neg[k] ? (FX_ONE + v[k]) : (FX_ONE - v[k]);
    end
    amin = fx_min(a[0], fx_min(a[1], a[2]));
    c    = amin >>> 1;

    // G_k = 1/2 q_k min over the two other literals
    g[0] = fx_min(a[1], a[2]) >>> 1;
    g[1] = fx_min(a[0], a[2]) >>> 1;
    g[2] = fx_min(a[0], a[1]) >>> 1;
    for (int k = 0; k < 3; k++) begin
      if (neg[k]) g[k] = -g[k];
      // R_k = 1/2 (q_k - v_k) when literal k sets the clause function
      if (a[k] == amin) r[k] = ((neg[k] ? -FX_ONE : FX_ONE) - v[k]) >>> 1;
      else              r[k] = '0;
    end

    w_g = fx_mul(xl, xs);                                   // x_l x_s
    w_r = fx_mul(FX_ONE + fx_mul(ZETA, xl), FX_ONE - xs);   // (1 + zeta x_l)(1 - x_s)
    for (int k = 0; k < 3; k++) begin
      dv[k] = fx_mul(w_g, g[k]) + fx_mul(w_r, r[k]);
    end

    dxs = fx_t'(BETA) * fx_mul(xs + EPSILON, c - GAMMA);
    dxl = fx_t'(ALPHA) * (c - DELTA);
    if (init) begin
      xs_next = c;
      xl_next = FX_ONE;
    end else begin
      xs_next = fx_clip(xs + (dxs >>> DT_SHIFT), XS_MIN, XS_MAX);
      xl_next = fx_clip(xl + (dxl >>> DT_SHIFT), FX_ONE, XL_MAX);
    end
    c_val = c;

    sat = 1'b0;
    for (int k = 0; k < 3; k++) begin
      // Boolean value of variable: 1 when v >= 0; literal true when value != neg
      if ((v[k] >= 0) != neg[k]) sat = 1'b1;
    end
  end

endmodule
