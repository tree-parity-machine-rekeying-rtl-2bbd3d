// tb_tpm_parity: self-checking test of the parity computation unit.
// Three instances see the same random weights and the same random input
// bits: party A and party B with the party-specific sign rule for a zero
// sum (TIE_BY_PARTY=1), and party B with the default common rule. The testbench records the bits each lane consumed
// (from x_we/k_idx/c_idx), recomputes alpha_k, the party-specific signs and
// the parity in plain integer arithmetic, and compares y and o. It also
// checks that 'done' comes K*ceil(N/ADDERS) cycles after 'start' and that
// sums of zero occurred (where the two parties must differ).
module tb_tpm_parity;
  import tpm_pkg::*;
  localparam int unsigned K = 3, N = 49, L = 4, WB = 4, ADDERS = 6;
  localparam int unsigned C = (N + ADDERS - 1) / ADDERS;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic signed [WB-1:0] w [K*N];
  logic [ADDERS-1:0] x_bits;
  logic x_adv_a, x_we_a, busy_a, done_a, o_a, x_adv_b, x_we_b, busy_b, done_b, o_b;
  logic [1:0] k_a, k_b;
  logic [3:0] c_a, c_b;
  logic [K-1:0] y_a, y_b, y_c;
  logic done_c, o_c;
  int checks = 0, failures = 0, zero_sums = 0;
  logic xrec [K*N];

  tpm_parity #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS), .TIE_BY_PARTY(1'b1)) dut_a (
    .party(PARTY_A), .clk, .rst_n, .start, .w, .x_bits, .x_adv(x_adv_a), .x_we(x_we_a), .k_idx(k_a), .c_idx(c_a),
    .busy(busy_a), .done(done_a), .y(y_a), .o(o_a));
  tpm_parity #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS)) dut_c (
    .party(PARTY_B), .clk, .rst_n, .start, .w, .x_bits, .x_adv(), .x_we(), .k_idx(), .c_idx(),
    .busy(), .done(done_c), .y(y_c), .o(o_c));
  tpm_parity #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS), .TIE_BY_PARTY(1'b1)) dut_b (
    .party(PARTY_B), .clk, .rst_n, .start, .w, .x_bits, .x_adv(x_adv_b), .x_we(x_we_b), .k_idx(k_b), .c_idx(c_b),
    .busy(busy_b), .done(done_b), .y(y_b), .o(o_b));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // New input bits after a falling edge; they are consumed at the next rising
  // edge if the unit is busy, so they are recorded here.
  task automatic drive_bits();
    x_bits = ADDERS'($urandom());
    #1;
    if (x_we_a) for (int p = 0; p < int'(ADDERS); p++)
      if (int'(c_a) * ADDERS + p < N) xrec[int'(k_a) * N + int'(c_a) * ADDERS + p] = x_bits[p];
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, range;
    for (int i = 0; i < int'(K*N); i++) w[i] = '0;
    x_bits = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 600; trial++) begin
      range = (trial % 3 == 0) ? 1 : L;   // small weights make alpha = 0 likely
      @(negedge clk);
      for (int i = 0; i < int'(K*N); i++) w[i] = WB'($urandom_range(0, 2 * range) - range);
      start = 1'b1;
      drive_bits();
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done_a) begin
        drive_bits();
        @(negedge clk);
        cyc++;
      end
      check(cyc == int'(K * C) + 1, $sformatf("latency %0d", cyc));
      check(done_b, "party B done together with party A");
      begin
        logic ya, yb, oa, ob;
        oa = 1'b1; ob = 1'b1;
        for (int k = 0; k < int'(K); k++) begin
          automatic int alpha = 0;
          for (int j = 0; j < int'(N); j++) alpha += xrec[k*N+j] ? int'(w[k*N+j]) : -int'(w[k*N+j]);
          if (alpha == 0) zero_sums++;
          ya = (alpha > 0) || (alpha == 0);
          yb = (alpha > 0);
          check(y_c[k] == ya, $sformatf("trial %0d unit %0d common rule", trial, k));
          check(y_a[k] == ya && y_b[k] == yb, $sformatf("trial %0d unit %0d alpha %0d y_a %b y_b %b", trial, k, alpha, y_a[k], y_b[k]));
          oa = oa ~^ ya;   // product of +-1 values in 1/0 encoding
          ob = ob ~^ yb;
        end
        check(o_a == oa && o_b == ob && o_c == oa && done_c, $sformatf("trial %0d parity", trial));
      end
    end
    check(zero_sums > 0, "alpha = 0 case exercised");
    $display("zero sums seen: %0d", zero_sums);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
