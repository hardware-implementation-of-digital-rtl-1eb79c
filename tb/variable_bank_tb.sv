// variable_bank_tb: accumulation, parallel Euler update and clipping.
//
// With N = 8 variables, runs several time steps. Each step presents random
// clauses (random indices, sometimes naming one variable twice, random
// contributions) with acc_en, then one update cycle. A shadow model in 64-bit
// integers keeps the expected sums and variables; after every update all v[n]
// are compared, with the sum scaled by dt = 2^-DT_SHIFT and clipped to
// [-1, 1]. Also checked: the combinational read port, the Boolean assignment,
// the initial values after load (inside [-1, 1) and reproduced by a second
// load), and that both clipping bounds were reached.
module variable_bank_tb;
  import dmm_pkg::*;

  localparam int          N        = 8;
  localparam int          DT_SHIFT = 5;
  localparam logic [31:0] SEED     = 32'd7;
  localparam longint      ONE      = 64'd1 << 16;

  logic clk = 0, rst_n = 0, load = 0, acc_en = 0, update = 0;
  logic [2:0][IDX_W-1:0] rd_idx = '0;
  fx_t [2:0] dv = '0;
  fx_t [2:0] rd_v;
  fx_t [N-1:0] v_out;
  logic [N-1:0] assignment;

  variable_bank #(.N(N), .DT_SHIFT(DT_SHIFT), .SEED(SEED)) dut (
    .clk, .rst_n, .load, .acc_en, .update, .rd_idx, .dv, .rd_v, .v_out, .assignment
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;
  longint sv [N], sacc [N], v0 [N];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    for (int n = 0; n < N; n++) begin
      v0[n] = longint'(v_out[n]);
      sv[n] = v0[n];
      sacc[n] = 0;
      check(v0[n] >= -ONE && v0[n] < ONE, "initial value in [-1, 1)");
    end
    for (int step = 0; step < 60; step++) begin
      for (int m = 0; m < 12; m++) begin
        for (int k = 0; k < 3; k++) begin
          rd_idx[k] = IDX_W'($urandom_range(N - 1));
          // scale grows with the step so that both bounds get hit
          dv[k] = fx_t'($signed($urandom_range(2 * 65536)) - 65536) * fx_t'(1 + step / 4);
        end
        if (m == 0) rd_idx[1] = rd_idx[0];    // a variable named twice
        acc_en = 1;
        #1;
        for (int k = 0; k < 3; k++) check(longint'(rd_v[k]) == sv[rd_idx[k]], "read port");
        for (int k = 0; k < 3; k++) sacc[rd_idx[k]] += longint'(dv[k]);
        @(negedge clk);
      end
      acc_en = 0;
      update = 1;
      @(negedge clk);
      update = 0;
      for (int n = 0; n < N; n++) begin
        longint nv;
        nv = sv[n] + (sacc[n] >>> DT_SHIFT);
        if (nv >= ONE) begin nv = ONE; n_hi++; end
        if (nv <= -ONE) begin nv = -ONE; n_lo++; end
        sv[n] = nv;
        sacc[n] = 0;
        check(longint'(v_out[n]) == sv[n], $sformatf("v[%0d] after step %0d: %0d vs %0d", n, step, v_out[n], sv[n]));
        check(assignment[n] == (sv[n] >= 0), "assignment bit");
      end
    end
    check(n_hi > 0 && n_lo > 0, "both clipping bounds reached");
    // a new load restores the initial point and clears the sums
    acc_en = 1; rd_idx = '0; dv[0] = 64'sd12345; @(negedge clk); acc_en = 0;
    load = 1; @(negedge clk); load = 0;
    update = 1; @(negedge clk); update = 0;
    for (int n = 0; n < N; n++) check(longint'(v_out[n]) == v0[n], "load restores initial point");
    $display("clip events: upper %0d lower %0d", n_hi, n_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
