// dmm_pkg: number format, model constants and shared helpers of the digital
// memcomputing (DMM) 3-SAT solver.
//
// All continuous quantities (the variables v_n, the memory variables x_s,m and
// x_l,m, the clause function C_m and the right-hand-side sums) are signed
// two's-complement fixed-point numbers of FX_W bits with FX_F fraction bits.
// The model constants alpha=5, beta=20, gamma=1/4, delta=1/20, epsilon=1e-3
// and the two zeta values (0.1 for M/N=7, 0.001 for M/N=4.3) are the published
// ones; the word length, the fraction length and the power-of-two time step
// are this design's own choices (the source gives no number format and no dt).
//
// The package also holds the integer hash used at elaboration time to build
// the instance-specific clause table and the initial values of v_n, so that a
// given (N, M, SEED) always yields the same instance and start point.
package dmm_pkg;

  // ---------------------------------------------------------------- format
  localparam int unsigned FX_W = 48;   // word length
  localparam int unsigned FX_F = 16;   // fraction bits
  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_ONE  = fx_t'(64'sd1 <<< FX_F);

  // Convert a real constant to the fixed-point format (elaboration only).
  function automatic fx_t fx_from_real(input real r);
    return fx_t'($rtoi(r * real'(64'sd1 <<< FX_F) + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  // ------------------------------------------------------- model constants
  localparam int  ALPHA   = 5;                      // integer, used as a constant factor
  localparam int  BETA    = 20;                     // integer, used as a constant factor
  localparam fx_t GAMMA   = FX_ONE >>> 2;           // 1/4
  localparam fx_t DELTA   = fx_from_real(0.05);     // 1/20
  localparam fx_t EPSILON = fx_from_real(1.0e-3);   // 10^-3
  localparam fx_t ZETA_4P3 = fx_from_real(1.0e-3);  // zeta for M/N = 4.3
  localparam fx_t ZETA_7   = fx_from_real(0.1);     // zeta for M/N = 7

  // ------------------------------------------------------------ arithmetic
  // Fixed-point product, truncated toward minus infinity.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FX_F);
  endfunction

  function automatic fx_t fx_min(input fx_t a, input fx_t b);
    return (a < b) ? a : b;
  endfunction

  function automatic fx_t fx_clip(input fx_t a, input fx_t lo, input fx_t hi);
    if (a < lo) return lo;
    if (a > hi) return hi;
    return a;
  endfunction

  // ------------------------------------------------------------ clause type
  localparam int unsigned IDX_W = 16;  // width of a stored variable index
  typedef struct packed {
    logic [2:0]            neg;  // neg[k]=1: literal k is negated (q=-1)
    logic [2:0][IDX_W-1:0] idx;  // variable index (0-based) of literal k
  } clause_t;

  // -------------------------------------------------- elaboration-time hash
  // 32-bit integer finaliser (xor-shift-multiply); a pure function of its
  // input, used as a counter-based random number generator.
  function automatic logic [31:0] hash32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Random word number k of stream s for seed `seed`.
  function automatic logic [31:0] rnd(input logic [31:0] seed, input logic [31:0] s,
                                      input logic [31:0] k);
    return hash32(hash32(seed ^ (s * 32'h9e3779b9)) + k);
  endfunction

  // Planted-solution flip of variable n: the planted value of n is !flip.
  function automatic logic planted_flip(input logic [31:0] seed, input int n);
    return rnd(seed, 32'd3, 32'(n))[31];
  endfunction

  // Number of negated literals before the planted flips, drawn with
  // probabilities p0, 3p1, 3p2 for p0 = 0.08 (0.08, 0.34, 0.58); the draw is a
  // 16-bit uniform number u compared with the cumulative thresholds.
  localparam int unsigned TH0 = 5243;   // round(0.08 * 65536)
  localparam int unsigned TH1 = 27525;  // round(0.42 * 65536)

  // Clause m of the instance with n_vars variables.
  function automatic clause_t gen_clause(input logic [31:0] seed, input int n_vars,
                                         input int m);
    clause_t c;
    int v0, v1, v2, k, nneg, pick;
    logic [15:0] u;
    logic [2:0] base;
    k  = 0;
    v0 = int'(rnd(seed, 32'd1, 32'(m * 64 + k)) % 32'(n_vars)); k++;
    v1 = int'(rnd(seed, 32'd1, 32'(m * 64 + k)) % 32'(n_vars)); k++;
    while (n_vars > 1 && v1 == v0 && k < 60) begin
      v1 = int'(rnd(seed, 32'd1, 32'(m * 64 + k)) % 32'(n_vars)); k++;
    end
    v2 = int'(rnd(seed, 32'd1, 32'(m * 64 + k)) % 32'(n_vars)); k++;
    while (n_vars > 2 && (v2 == v0 || v2 == v1) && k < 62) begin
      v2 = int'(rnd(seed, 32'd1, 32'(m * 64 + k)) % 32'(n_vars)); k++;
    end
    u    = rnd(seed, 32'd2, 32'(2 * m))[15:0];
    pick = int'(rnd(seed, 32'd2, 32'(2 * m + 1)) % 32'd3);
    if (32'(u) < TH0)      nneg = 0;
    else if (32'(u) < TH1) nneg = 1;
    else                   nneg = 2;
    case (nneg)
      0:       base = 3'b000;
      1:       base = 3'b001 << pick;         // one literal negated
      default: base = ~(3'b001 << pick);      // two literals negated
    endcase
    c.idx[0] = IDX_W'(v0);
    c.idx[1] = IDX_W'(v1);
    c.idx[2] = IDX_W'(v2);
    c.neg[0] = base[0] ^ planted_flip(seed, v0);
    c.neg[1] = base[1] ^ planted_flip(seed, v1);
    c.neg[2] = base[2] ^ planted_flip(seed, v2);
    return c;
  endfunction

  // Initial value of v_n: uniform in [-1, 1) with FX_F-bit resolution.
  function automatic fx_t init_v(input logic [31:0] seed, input int n);
    logic [FX_F:0] r;
    r = rnd(seed, 32'd4, 32'(n))[FX_F:0];
    return fx_t'($signed({1'b0, r})) - FX_ONE;
  endfunction

endpackage
