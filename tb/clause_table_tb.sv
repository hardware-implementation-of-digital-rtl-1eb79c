// clause_table_tb: checks the generated instance and the ROM read timing.
//
// Reads every clause at the full default size (N = 90, M = 387) and checks:
// the entry appears exactly one clock after its address; indices are below N
// and pairwise distinct; the planted assignment satisfies every clause; every
// clause, seen from the planted assignment, has 0, 1 or 2 false literals and
// never 3; and the share of clauses with all three literals true is near
// p0 = 0.08, with one false literal near 3p1 = 0.34 and two near 3p2 = 0.58.
// The planted assignment is rebuilt here from the per-variable flip bits.
module clause_table_tb;
  import dmm_pkg::*;

  localparam int          N    = 90;
  localparam int          M    = 387;
  localparam logic [31:0] SEED = 32'd1;

  logic clk = 0;
  logic [$clog2(M)-1:0] addr = '0;
  clause_t clause;

  clause_table #(.N(N), .M(M), .SEED(SEED)) dut (.clk, .addr, .clause);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int nfalse_hist [4] = '{0, 0, 0, 0};

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] planted;
    for (int n = 0; n < N; n++) planted[n] = !planted_flip(SEED, n);
    for (int m = 0; m < M; m++) begin
      clause_t exp_c;
      int nfalse;
      @(negedge clk);
      addr = ($clog2(M))'(m);
      @(negedge clk);
      exp_c = gen_clause(SEED, N, m);
      check(clause == exp_c, $sformatf("clause %0d read one clock after its address", m));
      check(clause.idx[0] < N && clause.idx[1] < N && clause.idx[2] < N,
            $sformatf("clause %0d indices in range", m));
      check(clause.idx[0] != clause.idx[1] && clause.idx[0] != clause.idx[2] &&
            clause.idx[1] != clause.idx[2], $sformatf("clause %0d distinct variables", m));
      nfalse = 0;
      for (int k = 0; k < 3; k++) if (!(planted[clause.idx[k]] ^ clause.neg[k])) nfalse++;
      check(nfalse <= 2, $sformatf("clause %0d satisfied by the planted assignment", m));
      nfalse_hist[nfalse]++;
    end
    $display("false-literal histogram: %0d %0d %0d %0d",
             nfalse_hist[0], nfalse_hist[1], nfalse_hist[2], nfalse_hist[3]);
    // expected 31, 132, 224 of 387; allow a wide binomial margin
    check(nfalse_hist[0] >= 10 && nfalse_hist[0] <= 60,  "share of 0 false literals near 0.08");
    check(nfalse_hist[1] >= 95 && nfalse_hist[1] <= 170, "share of 1 false literal near 0.34");
    check(nfalse_hist[2] >= 185 && nfalse_hist[2] <= 265, "share of 2 false literals near 0.58");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
