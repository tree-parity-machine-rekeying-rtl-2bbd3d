// tb_tpmra_sweep: key exchanges at the configurations of the evaluation.
// K=3, L=4 and 32-bit bit packages, with N = 7, 13, 19, 25 and 49 (keys of
// 84, 156, 228, 300 and 588 bits), each for the serial architecture (one
// adder lane) and the semi-parallel one (six lanes). Every pair of cores must
// deliver five keys that agree at both parties. For each configuration the
// average number of iterations and of clock cycles per key, and the cycles
// per iteration, are printed; the last must be the design's schedule, which
// the testbench bounds from above.
module tb_tpmra_sweep;
  localparam int NCFG = 10;
  localparam int NS [5] = '{7, 13, 19, 25, 49};

  logic clk = 1'b0, rst_n = 1'b0;
  logic   fin  [NCFG];
  int     keys [NCFG];
  int     bad  [NCFG];
  longint its  [NCFG];
  longint cyc  [NCFG];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    tb_tpmra_pair #(.N(NS[i / 2]), .ADDERS((i % 2 == 0) ? 1 : 6), .KEYS(5)) u_pair (
      .clk, .rst_n, .finished(fin[i]), .n_keys(keys[i]), .n_bad(bad[i]), .iterations(its[i]), .cycles(cyc[i]));
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do begin
      repeat (1000) @(negedge clk);
      all = 1;
      for (int i = 0; i < NCFG; i++) all &= fin[i];
    end while (!all);
    $display("  N  key bits  adders  iterations/key  cycles/key  cycles/iteration");
    for (int i = 0; i < NCFG; i++) begin
      int n, a, c;
      real cpi;
      n = NS[i / 2]; a = (i % 2 == 0) ? 1 : 6;
      c = (n + a - 1) / a;
      cpi = real'(cyc[i]) / real'(its[i]);
      $display("%3d  %8d  %6d  %14.1f  %10.1f  %16.1f", n, 12 * n, a,
               real'(its[i]) / 5.0, real'(cyc[i]) / 5.0, cpi);
      // software models of the same protocol need about 700 to 1800
      // iterations on average; a far larger count means a broken exchange
      check(its[i] / 5 < 4000, $sformatf("N=%0d adders=%0d: %0d iterations per key", n, a, its[i] / 5));
      check(keys[i] == 5 && bad[i] == 0, $sformatf("N=%0d adders=%0d: keys agree", n, a));
      // computing one output takes 3*C+1 cycles, learning at most 3*C+1 more,
      // plus the package exchange
      check(cpi >= real'(3 * c + 1) && cpi <= real'(2 * (3 * c + 1) + 2),
            $sformatf("N=%0d adders=%0d: %0.1f cycles per iteration", n, a, cpi));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
