// dmm_solver_full_tb: one complete solve with every parameter of the solver at
// its default: N = 90 variables, M = 387 clauses (M/N = 4.3), zeta = 0.001,
// dt = 2^-5, seed 1 (about 14,000 Euler steps, 5.5 million cycles). The
// checks are those of dmm_solver_tb for a single run; the local N, M,
// DT_SHIFT and SEED repeat the defaults for the reference computations.
//
// The checks, in detail:
// Starts the solver, waits for `solved`, and checks that
//  - the reported assignment satisfies every clause of the instance (the
//    clauses are regenerated here from the instance recipe and evaluated with
//    plain Boolean logic, independently of the solver's datapath);
//  - the time to solution equals the schedule: one load cycle, one
//    initialisation sweep and steps+1 integration sweeps of M+1 cycles each;
//  - every time step takes exactly M+1 cycles (spacing of the update pulses);
//  - a second `start` restarts from the same initial point and reproduces the
//    same number of steps (the start point is a constant of the design).
// It also counts how often each mechanism of the integration happened:
// initialisation sweep, Euler update, clipping of a variable at +-1, x_s at
// its bounds, the R term selecting a literal, solution detection. A mechanism
// that never happened counts as a failure.
module dmm_solver_full_tb;
  import dmm_pkg::*;

  localparam int          N        = 90;
  localparam int          M        = 387;
  localparam int          DT_SHIFT = 5;
  localparam logic [31:0] SEED     = 32'd1;
  localparam int          WATCHDOG = 50_000_000;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, solved;
  logic [31:0] steps;
  logic [N-1:0] assignment;
  fx_t  [N-1:0] v;

  dmm_solver dut (
    .clk, .rst_n, .start, .busy, .solved, .steps, .assignment, .v
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_init = 0, n_update = 0, n_vclip = 0, n_xsclip = 0, n_rsel = 0, n_solved = 0;
  longint last_update = -1;
  int bad_spacing = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.init && dut.u_ctrl.last) n_init++;
    if (dut.update) begin
      n_update++;
      if (last_update >= 0 && cyc - last_update != M + 1) bad_spacing++;
      last_update = cyc;
      for (int n = 0; n < N; n++) begin
        if (dut.u_vars.v[n] + (dut.u_vars.acc[n] >>> DT_SHIFT) > FX_ONE ||
            dut.u_vars.v[n] + (dut.u_vars.acc[n] >>> DT_SHIFT) < -FX_ONE) n_vclip++;
      end
    end
    if (dut.acc_en) begin
      if (dut.xs_next == EPSILON || dut.xs_next == FX_ONE - EPSILON) n_xsclip++;
      for (int k = 0; k < 3; k++) if (dut.u_clause.r[k] != 0) n_rsel++;
    end
  end

  function automatic bit all_satisfied(input logic [N-1:0] asg);
    clause_t c;
    bit ok = 1;
    for (int m = 0; m < M; m++) begin
      bit cs = 0;
      c = gen_clause(SEED, N, m);
      for (int k = 0; k < 3; k++) if (asg[c.idx[k]] ^ c.neg[k]) cs = 1;
      if (!cs) ok = 0;
    end
    return ok;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t0, t1;
  int first_steps;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(!busy && !solved, "idle after reset");
    for (int run = 0; run < 1; run++) begin
      last_update = -1;
      start <= 1;
      @(posedge clk);
      t0 = cyc;
      start <= 0;
      @(posedge clk);
      check(busy, "busy after start");
      while (!solved) @(posedge clk);
      t1 = cyc;
      n_solved++;
      $display("run %0d: solved after %0d steps, %0d cycles", run, steps, t1 - t0);
      check(all_satisfied(assignment), "assignment satisfies all clauses");
      check(t1 - t0 == longint'(steps + 2) * (M + 1) + 1, "time to solution matches M+1 schedule");
      if (run == 0) first_steps = steps;
      else check(steps == first_steps, "restart reproduces the run");
      repeat (5) @(posedge clk);
      check(solved && !busy, "solved holds");
    end
    check(bad_spacing == 0, "every time step takes M+1 cycles");

    $display("mechanisms: init=%0d update=%0d vclip=%0d xsclip=%0d rsel=%0d solved=%0d",
             n_init, n_update, n_vclip, n_xsclip, n_rsel, n_solved);
    check(n_init > 0,   "initialisation sweep happened");
    check(n_update > 0, "Euler update happened");
    check(n_vclip > 0,  "variable clipping happened");
    check(n_xsclip > 0, "x_s clipping happened");
    check(n_rsel > 0,   "R term happened");
    check(n_solved > 0, "solution detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
