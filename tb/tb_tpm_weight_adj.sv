// tb_tpm_weight_adj: self-checking test of the weight adjustment unit.
// For random weights (many at the +-L boundary), inputs, hidden signs and
// output, one learning step is run; the lane writes are collected into a
// copy of the weights and compared with the Hebbian rule plus clipping
// computed here in integer arithmetic. Hidden units whose sign differs from
// the output must not be written. The step length must be C cycles per
// learning unit and 1 per other unit.
module tb_tpm_weight_adj;
  localparam int unsigned K = 3, N = 49, L = 4, WB = 4, ADDERS = 6;
  localparam int unsigned C = (N + ADDERS - 1) / ADDERS;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, o = 1'b0;
  logic [K-1:0] y = '0;
  logic [K*N-1:0] x_row = '0;
  logic signed [WB-1:0] w [K*N];
  logic signed [WB-1:0] w_new [ADDERS];
  logic signed [WB-1:0] w_out [K*N];
  logic w_we, busy, done;
  logic [1:0] k_idx;
  logic [3:0] c_idx;
  int checks = 0, failures = 0, clipped = 0;

  tpm_weight_adj #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Lane writes seen before a rising edge are what the register bank stores.
  task automatic collect();
    #1;
    if (w_we) for (int p = 0; p < int'(ADDERS); p++)
      if (int'(c_idx) * ADDERS + p < N) w_out[int'(k_idx) * N + int'(c_idx) * ADDERS + p] = w_new[p];
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, exp_cyc;
    for (int i = 0; i < int'(K*N); i++) w[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 500; trial++) begin
      @(negedge clk);
      for (int i = 0; i < int'(K*N); i++) begin
        int r;
        r = $urandom_range(0, 3);
        if (r == 0)      w[i] = WB'(L);
        else if (r == 1) w[i] = -WB'(L);
        else             w[i] = WB'($urandom_range(0, 2 * L) - L);
        w_out[i] = w[i];
      end
      for (int i = 0; i < int'(K*N); i++) x_row[i] = $urandom_range(0, 1);
      y = K'($urandom());
      o = $urandom_range(0, 1);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      collect();
      while (!done) begin
        @(negedge clk);
        cyc++;
        collect();
      end
      exp_cyc = 1;
      for (int k = 0; k < int'(K); k++) exp_cyc += (y[k] == o) ? C : 1;
      check(cyc == exp_cyc, $sformatf("trial %0d latency %0d expected %0d", trial, cyc, exp_cyc));
      for (int k = 0; k < int'(K); k++) begin
        for (int j = 0; j < int'(N); j++) begin
          int e;
          e = int'(w[k*N+j]);
          if (y[k] == o) begin
            e += (x_row[k*N+j] == o) ? 1 : -1;
            if (e > int'(L))  begin e = L;  clipped++; end
            if (e < -int'(L)) begin e = -L; clipped++; end
          end
          check(int'(w_out[k*N+j]) == e, $sformatf("trial %0d w[%0d][%0d] got %0d exp %0d", trial, k, j, w_out[k*N+j], e));
        end
      end
    end
    check(clipped > 0, "clipping at +-L exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
