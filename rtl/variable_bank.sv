// variable_bank: the N continuous variables v_n and their right-hand-side sums.
//
// Each variable has a register v[n] and an accumulator acc[n]. During the M
// clause sub-steps of a time step the bank reads the three variables of the
// current clause (rd_v, combinational from rd_idx) and, with acc_en=1, adds
// that clause's three contributions dv[k] to acc[rd_idx[k]]; every accumulator
// compares its own index with all three, so a clause that names one variable
// twice is also summed correctly. In sub-step M+1 (update=1) all N variables
// are advanced at once by forward Euler, v[n] <= clip(v[n] + dt*acc[n], -1, 1)
// with dt = 2^-DT_SHIFT, and the accumulators are cleared. load=1 sets every
// v[n] to its initial value, a fixed pseudo-random number in [-1, 1) derived
// from SEED (the start point is a constant of the design, like the instance),
// and clears the accumulators. Priority: load, then update, then acc_en.
// assignment[n] is the Boolean value of v[n] (1 when v[n] >= 0).
//
// Registers v and acc, the parallel update and the clipping follow the
// integration scheme; the accumulator-per-variable organisation and the hash
// seed of the start point are this design's choices.
module variable_bank
  import dmm_pkg::*;
#(
  parameter int          N        = 90,      // number of variables
  parameter int          DT_SHIFT = 5,       // dt = 2^-DT_SHIFT
  parameter logic [31:0] SEED     = 32'd1    // selects the initial point
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic                        acc_en,
  input  logic                        update,
  input  logic [2:0][IDX_W-1:0]       rd_idx,
  input  fx_t  [2:0]                  dv,
  output fx_t  [2:0]                  rd_v,
  output fx_t  [N-1:0]                v_out,
  output logic [N-1:0]                assignment
);

  fx_t v   [N];
  fx_t acc [N];

  for (genvar n = 0; n < N; n++) begin : g_var
    localparam fx_t V0 = init_v(SEED, n);
    fx_t sum;

    always_comb begin
      sum = acc[n];
      for (int k = 0; k < 3; k++) begin
        if (32'(rd_idx[k]) == n) sum = sum + dv[k];
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v[n]   <= V0;
        acc[n] <= '0;
      end else if (load) begin
        v[n]   <= V0;
        acc[n] <= '0;
      end else if (update) begin
        v[n]   <= fx_clip(v[n] + (acc[n] >>> DT_SHIFT), -FX_ONE, FX_ONE);
        acc[n] <= '0;
      end else if (acc_en) begin
        acc[n] <= sum;
      end
    end

    assign v_out[n]      = v[n];
    assign assignment[n] = (v[n] >= 0);
  end

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      rd_v[k] = (32'(rd_idx[k]) < N) ? v[rd_idx[k][$clog2(N)-1:0]] : '0;
    end
  end

endmodule
