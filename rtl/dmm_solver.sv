// dmm_solver: digital memcomputing 3-SAT solver, clause-serial / variable-parallel.
//
// The solver integrates the DMM equations of a fixed 3-SAT instance with
// forward Euler. Every time step takes M+1 clock cycles: in cycle m (m < M)
// the clause unit evaluates clause m from the clause table, the block RAM
// word (x_s,m, x_l,m) and the three variables it names, writes the updated
// memory variables back and adds the clause's three contributions to the
// per-variable sums; in cycle M+1 all N variables are advanced in parallel.
// The instance (clause_table) and start point (variable_bank) are constants
// chosen by SEED, as in an instance-specific bitstream.
//
// Interface: pulse `start` to (re)start from the initial point; `busy` is high
// while integrating; `solved` rises, and stays high, when the Boolean values of
// the variables (assignment[n] = v_n >= 0) satisfy every clause. `steps` is the
// number of Euler steps taken; v holds the continuous variables. The clock is
// the board clock (100 MHz on the reference board).
//
// Defaults: N = 90 variables, M = 387 clauses (M/N = 4.3) with zeta = 0.001,
// the largest published instance size. dt = 2^-DT_SHIFT, the word format and
// the seed are this design's choices.
module dmm_solver
  import dmm_pkg::*;
#(
  parameter int          N        = 90,
  parameter int          M        = 387,
  parameter fx_t         ZETA     = ZETA_4P3,
  parameter int          DT_SHIFT = 5,
  parameter logic [31:0] SEED     = 32'd1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic         busy,
  output logic         solved,
  output logic [31:0]  steps,
  output logic [N-1:0] assignment,
  output fx_t  [N-1:0] v
);

  localparam int AW = $clog2(M);

  logic [AW-1:0] raddr, waddr;
  logic          we, init, load, acc_en, update, clause_sat;
  clause_t       clause;
  fx_t           xs, xl, xs_next, xl_next;
  fx_t [2:0]     rd_v, dv;

  dmm_controller #(.M(M)) u_ctrl (
    .clk, .rst_n, .start, .clause_sat,
    .raddr, .we, .waddr, .init, .load, .acc_en, .update,
    .busy, .solved, .steps
  );

  clause_table #(.N(N), .M(M), .SEED(SEED)) u_clauses (
    .clk, .addr(raddr), .clause
  );

  xmem #(.M(M)) u_xmem (
    .clk, .raddr, .rdata_xs(xs), .rdata_xl(xl),
    .we, .waddr, .wdata_xs(xs_next), .wdata_xl(xl_next)
  );

  clause_unit #(.M(M), .DT_SHIFT(DT_SHIFT), .ZETA(ZETA)) u_clause (
    .init, .v(rd_v), .neg(clause.neg), .xs, .xl,
    .dv, .xs_next, .xl_next, .c_val(), .sat(clause_sat)
  );

  variable_bank #(.N(N), .DT_SHIFT(DT_SHIFT), .SEED(SEED)) u_vars (
    .clk, .rst_n, .load, .acc_en, .update,
    .rd_idx(clause.idx), .dv, .rd_v, .v_out(v), .assignment
  );

endmodule
