// clause_table: the instance-specific clause memory of the solver.
//
// The solver is built for one 3-SAT instance: its M clauses are constants of
// the design, as in a bitstream compiled for a single problem. Each entry holds
// three 0-based variable indices and three negation flags (dmm_pkg::clause_t).
// The entries are computed at elaboration by dmm_pkg::gen_clause, which follows
// the planted-solution recipe for hard random 3-SAT: three distinct variables
// per clause, 0, 1 or 2 negated literals with probabilities p0, 3p1, 3p2 for
// p0 = 0.08, then a random planted assignment applied by flipping every
// occurrence of each variable whose planted value is 0. The hash-based random
// source and the SEED parameter are this design's own choice.
//
// Interface: addr selects a clause; clause is the registered entry, valid one
// clock after addr (a synchronous ROM, mapped to block RAM or LUTs).
module clause_table
  import dmm_pkg::*;
#(
  parameter int          N    = 90,        // number of variables
  parameter int          M    = 387,       // number of clauses (M/N = 4.3)
  parameter logic [31:0] SEED = 32'd1      // selects the instance
) (
  input  logic                 clk,
  input  logic [$clog2(M)-1:0] addr,
  output clause_t              clause
);

  clause_t rom [M];

  for (genvar m = 0; m < M; m++) begin : g_entry
    localparam clause_t ENTRY = gen_clause(SEED, N, m);
    assign rom[m] = ENTRY;
  end

  always_ff @(posedge clk) begin
    clause <= rom[addr];
  end

  initial begin
    assert (N >= 3 && N < 2**IDX_W) else $error("clause_table: N out of range");
  end

endmodule
