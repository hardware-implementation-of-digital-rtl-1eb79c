// dmm_controller: sequencer of the clause-serial forward-Euler integration.
//
// One time step dt is split into M+1 sub-steps counted by `sub`:
//   sub = 0..M-1  clause `sub` is evaluated: its memory variables are written
//                 back (we, waddr = sub), its contributions are added to the
//                 variable sums (acc_en) and its Boolean satisfaction is ANDed
//                 into all_sat;
//   sub = M       all variables are updated from the sums (update). This extra
//                 sub-step also gives the synchronous clause table and block
//                 RAM the cycle they need to present clause 0 again.
// Reads run one sub-step ahead of use: raddr = sub+1 for sub < M-1, and 0 in
// the last two sub-steps (clause 0 is read again in sub-step M, for the next
// step; the read in sub-step M-1 is unused).
//
// Operation: `start` (in IDLE or DONE) loads the initial variables (load) and
// runs one initialisation sweep of M+1 sub-steps (init=1) in which every
// clause writes x_s(0) = C_m(0), x_l(0) = 1. Then integration steps follow.
// At sub-step M of a step whose sweep found every clause satisfied, the
// controller stops instead of updating: `solved` rises and the variables hold
// the solution. `steps` counts completed Euler updates, so the time to
// solution is (steps + 1) * (M+1) + 1 clock cycles after `start`.
// The M+1 schedule follows the published scheme; the stop rule, the
// initialisation sweep and the counters are this design's choices.
module dmm_controller
  import dmm_pkg::*;
#(
  parameter int M = 387                  // number of clauses
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 clause_sat,
  output logic [$clog2(M)-1:0] raddr,
  output logic                 we,
  output logic [$clog2(M)-1:0] waddr,
  output logic                 init,
  output logic                 load,
  output logic                 acc_en,
  output logic                 update,
  output logic                 busy,
  output logic                 solved,
  output logic [31:0]          steps
);

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_RUN, S_DONE} state_t;
  localparam int SW = $clog2(M + 1);

  state_t        state;
  logic [SW-1:0] sub;
  logic          all_sat;
  logic          last;          // sub-step M+1 of the sweep

  assign last   = (sub == SW'(M));
  assign busy   = (state == S_INIT) || (state == S_RUN);
  assign solved = (state == S_DONE);
  assign init   = (state == S_INIT);
  assign load   = start && !busy;
  assign we     = busy && !last;
  assign waddr  = sub[$clog2(M)-1:0];
  assign acc_en = (state == S_RUN) && !last;
  assign update = (state == S_RUN) && last && !all_sat;
  assign raddr  = (busy && sub < SW'(M - 1)) ? ($clog2(M))'(sub + 1'b1) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      sub     <= '0;
      all_sat <= 1'b1;
      steps   <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state   <= S_INIT;
            sub     <= '0;
            all_sat <= 1'b1;
            steps   <= '0;
          end
        end
        S_INIT: begin
          if (last) begin
            state <= S_RUN;
            sub   <= '0;
          end else begin
            sub <= sub + 1'b1;
          end
        end
        S_RUN: begin
          if (last) begin
            sub     <= '0;
            all_sat <= 1'b1;
            if (all_sat) state <= S_DONE;
            else         steps <= steps + 1;
          end else begin
            sub     <= sub + 1'b1;
            all_sat <= all_sat & clause_sat;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The write of clause m and the read of clause m+1 never share an address.
  a_no_rw_collision: assert property (@(posedge clk) disable iff (!rst_n)
    (we && M > 1) |-> (raddr != waddr));
  a_update_only_last: assert property (@(posedge clk) disable iff (!rst_n)
    update |-> (last && !acc_en && !we));

endmodule
