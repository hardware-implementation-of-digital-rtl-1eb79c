// dmm_instances_large_tb: ten instances per problem size for the larger sizes.
//
// For N = 70 at M/N = 4.3 (zeta = 0.001) and N = 70, 90 at M/N = 7
// (zeta = 0.1) the testbench builds ten solvers with SEED = 1..10, that is ten different
// instances and start points, and starts them all together. Every solver must
// reach `solved` with an assignment that satisfies all clauses of its own
// instance (regenerated here and evaluated in Boolean logic) and with a time
// to solution that matches the M+1-cycle schedule. The median number of Euler
// steps and the median time at 100 MHz are printed per size. The clock of a
// solver is stopped once it has solved.
module dmm_instances_large_tb;
  import dmm_pkg::*;

  localparam int NSZ = 3;
  localparam int NSEED = 10;
  localparam int NS [NSZ] = '{70, 70, 90};
  localparam int MS [NSZ] = '{301, 490, 630};
  localparam int WATCHDOG = 40_000_000;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NSZ*NSEED-1:0] solved;
  int unsigned steps_of [NSZ][NSEED];
  int n_done = 0;
  longint cyc = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  for (genvar z = 0; z < NSZ; z++) begin : g_size
    for (genvar s = 0; s < NSEED; s++) begin : g_seed
      localparam int          N = NS[z];
      localparam int          M = MS[z];
      localparam fx_t         Z = (z < 1) ? ZETA_4P3 : ZETA_7;
      localparam logic [31:0] SEED = 32'(s + 1);
      logic busy;
      logic [31:0] steps;
      logic [N-1:0] assignment;
      fx_t [N-1:0] v;
      logic run_en = 1'b1, lclk;

      // a solved solver keeps its result; its clock is stopped so that the
      // simulation only pays for solvers that are still integrating
      always @(negedge clk) if (solved[z*NSEED+s]) run_en <= 1'b0;
      assign lclk = clk & run_en;

      dmm_solver #(.N(N), .M(M), .ZETA(Z), .DT_SHIFT(5), .SEED(SEED)) dut (
        .clk(lclk), .rst_n, .start, .busy, .solved(solved[z*NSEED+s]), .steps, .assignment, .v
      );

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

      initial begin
        longint t0;
        wait (rst_n);
        @(posedge start);
        @(posedge clk);
        t0 = cyc;
        @(posedge solved[z*NSEED+s]);
        @(posedge clk);
        steps_of[z][s] = steps;
        check(all_satisfied(assignment),
              $sformatf("N=%0d M=%0d seed %0d assignment satisfies all clauses", N, M, s + 1));
        check(cyc - t0 == longint'(steps + 2) * (M + 1) + 1,
              $sformatf("N=%0d M=%0d seed %0d time matches M+1 schedule", N, M, s + 1));
        n_done++;
      end
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired, %0d of %0d solved", n_done, NSZ * NSEED);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (n_done == NSZ * NSEED);
    for (int z = 0; z < NSZ; z++) begin
      int unsigned a [NSEED];
      a = steps_of[z];
      a.sort();
      $display("N=%0d M=%0d: steps min %0d median %0d max %0d; median time %0.3f ms at 100 MHz",
               NS[z], MS[z], a[0], (a[4] + a[5]) / 2, a[NSEED-1],
               real'((a[4] + a[5]) / 2 + 2) * real'(MS[z] + 1) * 1.0e-5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
