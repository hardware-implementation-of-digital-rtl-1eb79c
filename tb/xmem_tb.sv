// xmem_tb: block RAM of the memory variables against a shadow array.
//
// Fills all words, then runs random cycles that each present a read address
// and, half of the time, a write to a different address, as the solver does.
// Read data must be the shadow value of the address presented one clock
// earlier.
module xmem_tb;
  import dmm_pkg::*;

  localparam int M = 43;
  localparam int AW = $clog2(M);

  logic clk = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic we = 0;
  fx_t wdata_xs = '0, wdata_xl = '0, rdata_xs, rdata_xl;

  xmem #(.M(M)) dut (.clk, .raddr, .rdata_xs, .rdata_xl, .we, .waddr, .wdata_xs, .wdata_xl);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fx_t sh_xs [M], sh_xl [M];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t exp_xs, exp_xl;
    for (int m = 0; m < M; m++) begin
      @(negedge clk);
      we = 1; waddr = AW'(m);
      wdata_xs = fx_t'({$urandom, $urandom}); wdata_xl = fx_t'({$urandom, $urandom});
      sh_xs[m] = wdata_xs; sh_xl[m] = wdata_xl;
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      raddr = AW'($urandom_range(M - 1));
      we = $urandom_range(1);
      waddr = AW'((int'(raddr) + 1 + $urandom_range(M - 2)) % M);
      wdata_xs = fx_t'({$urandom, $urandom}); wdata_xl = fx_t'({$urandom, $urandom});
      exp_xs = sh_xs[raddr]; exp_xl = sh_xl[raddr];
      if (we) begin sh_xs[waddr] = wdata_xs; sh_xl[waddr] = wdata_xl; end
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata_xs != exp_xs || rdata_xl != exp_xl) begin
        failures++;
        if (failures < 10) $display("FAIL: read of word %0d", raddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
