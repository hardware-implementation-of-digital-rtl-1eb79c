// dmm_controller_tb: the M+1 sub-step schedule and the stop rule.
//
// With M = 5 clauses the testbench predicts every control output cycle by
// cycle from a simple reference schedule: after start, one load cycle, an
// initialisation sweep (init=1, writes to clauses 0..M-1, no accumulation),
// then integration sweeps (writes and accumulation for clauses 0..M-1, then
// one update cycle); read addresses lead the write addresses by one and wrap
// to 0 in the last sub-step. clause_sat is driven so that sweeps 0..K-1 each
// contain one unsatisfied clause and sweep K is fully satisfied: the
// controller must take exactly K updates and then raise solved.
module dmm_controller_tb;

  localparam int M  = 5;
  localparam int AW = $clog2(M);
  localparam int K  = 4;

  logic clk = 0, rst_n = 0, start = 0, clause_sat = 1;
  logic [AW-1:0] raddr, waddr;
  logic we, init, load, acc_en, update, busy, solved;
  logic [31:0] steps;

  dmm_controller #(.M(M)) dut (
    .clk, .rst_n, .start, .clause_sat, .raddr, .we, .waddr, .init, .load,
    .acc_en, .update, .busy, .solved, .steps
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !solved && raddr == 0, "idle");
    for (int run = 0; run < 2; run++) begin
      start = 1;
      #1 check(load, "load with start");
      @(negedge clk);
      start = 0;
      // initialisation sweep
      for (int s = 0; s <= M; s++) begin
        #1;
        check(busy && init && !acc_en && !update, $sformatf("init sweep sub %0d", s));
        check(we == (s < M), "init write enable");
        if (s < M) check(waddr == AW'(s), "init write address");
        check(raddr == ((s < M - 1) ? AW'(s + 1) : AW'(0)) || (s == M && raddr == 0),
              $sformatf("init read address %0d", s));
        @(negedge clk);
      end
      // integration sweeps
      for (int sweep = 0; sweep <= K; sweep++) begin
        for (int s = 0; s <= M; s++) begin
          clause_sat = !(sweep < K && s == (sweep % M));
          #1;
          check(busy && !init, "integrating");
          check(steps == 32'(sweep), "step count");
          if (s < M) begin
            check(we && acc_en && !update && waddr == AW'(s), $sformatf("sweep %0d sub %0d", sweep, s));
            check(raddr == ((s < M - 1) ? AW'(s + 1) : AW'(0)), "read address leads by one");
          end else begin
            check(!we && !acc_en && raddr == 0, "last sub-step");
            check(update == (sweep < K), $sformatf("update at end of sweep %0d", sweep));
          end
          @(negedge clk);
        end
      end
      clause_sat = 1;
      #1 check(solved && !busy && steps == 32'(K), "solved after K steps");
      repeat (3) @(negedge clk);
      check(solved, "solved holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
