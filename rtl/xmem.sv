// xmem: block RAM of the memory variables.
//
// One word per clause holds the pair (x_s,m, x_l,m). The memory has one
// synchronous read port and one synchronous write port, the shape of a simple
// dual-port FPGA block RAM: rdata is the word at raddr one clock after raddr
// is presented, and a write with we=1 lands at the clock edge. The solver
// never reads and writes the same word in the same cycle (it writes clause m
// while it reads clause m+1), so read-during-write behaviour is left to the
// RAM (here: the read returns the old word). Keeping x_s and x_l in block RAM
// rather than in registers is what the clause-serial schedule is built for.
module xmem
  import dmm_pkg::*;
#(
  parameter int M = 387                    // number of clauses = words
) (
  input  logic                 clk,
  input  logic [$clog2(M)-1:0] raddr,
  output fx_t                  rdata_xs,
  output fx_t                  rdata_xl,
  input  logic                 we,
  input  logic [$clog2(M)-1:0] waddr,
  input  fx_t                  wdata_xs,
  input  fx_t                  wdata_xl
);

  logic [2*FX_W-1:0] mem [M];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= {wdata_xs, wdata_xl};
    {rdata_xs, rdata_xl} <= mem[raddr];
  end

endmodule
