// dmm_workload_tb: the solver on the evaluated problem sizes.
//
// Instantiates one solver per size of the evaluation: M/N = 4.3 (zeta =
// 0.001) for N = 10, 30, 50, 70 and M/N = 7 (zeta = 0.1) for N = 10, 30, 50,
// 70, 90, with M = round(N * M/N). The N = 90, M/N = 4.3 case is the default
// configuration and is run by dmm_solver_full_tb. All solvers start together;
// for each one the testbench waits for `solved`, checks the assignment
// against every clause of its instance (regenerated here and evaluated in
// Boolean logic) and checks the time to solution against the M+1 schedule.
// It prints the Euler steps and the time at 100 MHz for each size.
module dmm_workload_tb;
  import dmm_pkg::*;

  localparam int NW = 9;
  localparam int NS [NW] = '{10, 30, 50, 70, 10, 30, 50, 70, 90};
  localparam int MS [NW] = '{43, 129, 215, 301, 70, 210, 350, 490, 630};
  localparam int WATCHDOG = 30_000_000;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NW-1:0] solved;
  logic [31:0] steps [NW];
  longint t_solved [NW];
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

  for (genvar w = 0; w < NW; w++) begin : g_w
    localparam int  N = NS[w];
    localparam int  M = MS[w];
    localparam fx_t Z = (w < 4) ? ZETA_4P3 : ZETA_7;
    logic busy;
    logic [N-1:0] assignment;
    fx_t [N-1:0] v;

    dmm_solver #(.N(N), .M(M), .ZETA(Z), .DT_SHIFT(5), .SEED(32'd1)) dut (
      .clk, .rst_n, .start, .busy, .solved(solved[w]), .steps(steps[w]), .assignment, .v
    );

    function automatic bit all_satisfied(input logic [N-1:0] asg);
      clause_t c;
      bit ok = 1;
      for (int m = 0; m < M; m++) begin
        bit cs = 0;
        c = gen_clause(32'd1, N, m);
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
      @(posedge solved[w]);
      @(posedge clk);
      t_solved[w] = cyc - t0;
      $display("N=%0d M=%0d: %0d steps, %0d cycles, %0.3f ms at 100 MHz",
               N, M, steps[w], t_solved[w], real'(t_solved[w]) * 1.0e-5);
      check(all_satisfied(assignment), $sformatf("N=%0d M=%0d assignment satisfies all clauses", N, M));
      check(t_solved[w] == longint'(steps[w] + 2) * (M + 1) + 1,
            $sformatf("N=%0d M=%0d time matches M+1 schedule", N, M));
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired, solved = %b", solved);
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
    wait (&solved);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
