// tb_tpm_regbank: self-checking test of the TPM register bank.
// Checks the initial weight load with clipping into [-L, L], lane writes of
// weights and inputs (lanes beyond N must be ignored), the per-iteration
// hidden-sign and output storage, the read port for iteration rd_t, the
// packed own bit package and the packed key, against a model kept here.
module tb_tpm_regbank;
  localparam int unsigned K = 3, N = 49, L = 4, WB = 4, ADDERS = 6, B = 32;
  localparam int unsigned C = (N + ADDERS - 1) / ADDERS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic init_load = 1'b0, w_we = 1'b0, x_we = 1'b0, h_we = 1'b0, h_o = 1'b0;
  logic [K*N*WB-1:0] w_init = '0;
  logic [1:0] w_k = '0, x_k = '0;
  logic [3:0] w_c = '0, x_c = '0;
  logic signed [WB-1:0] w_new [ADDERS];
  logic [4:0] x_t = '0, h_t = '0, rd_t = '0;
  logic [ADDERS-1:0] x_bits = '0;
  logic [K-1:0] h_y = '0, y_rd;
  logic signed [WB-1:0] w [K*N];
  logic [K*N*WB-1:0] key;
  logic [K*N-1:0] x_row;
  logic o_rd;
  logic [B-1:0] pkg;
  int checks = 0, failures = 0;

  int m_w [K*N];
  logic [K*N-1:0] m_x [B];
  logic [K-1:0] m_y [B];
  logic [B-1:0] m_o;

  tpm_regbank #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS), .B(B)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic compare_all(input string tag);
    for (int i = 0; i < int'(K*N); i++) begin
      check(int'(w[i]) == m_w[i], $sformatf("%s w[%0d] %0d exp %0d", tag, i, w[i], m_w[i]));
      check(int'($signed(key[i*WB +: WB])) == m_w[i], $sformatf("%s key[%0d]", tag, i));
    end
    for (int t = 0; t < int'(B); t++) begin
      rd_t = 5'(t);
      #1;
      check(x_row == m_x[t] && y_rd == m_y[t] && o_rd == m_o[t], $sformatf("%s row %0d", tag, t));
    end
    check(pkg == m_o, $sformatf("%s package", tag));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < int'(ADDERS); p++) w_new[p] = '0;
    for (int i = 0; i < int'(K*N); i++) m_w[i] = 0;
    for (int t = 0; t < int'(B); t++) begin m_x[t] = '0; m_y[t] = '0; end
    m_o = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare_all("reset");
    for (int round = 0; round < 20; round++) begin
      // initial weights: any 4-bit pattern, clipped to [-L, L]
      @(negedge clk);
      for (int i = 0; i < int'(K*N); i++) begin
        int v;
        v = $urandom_range(0, 15);
        w_init[i*WB +: WB] = WB'(v);
        v = (v > 7) ? v - 16 : v;
        m_w[i] = (v > int'(L)) ? L : (v < -int'(L)) ? -L : v;
      end
      init_load = 1'b1;
      @(negedge clk);
      init_load = 1'b0;
      compare_all("init");
      // random lane writes
      for (int n = 0; n < 200; n++) begin
        w_we = $urandom_range(0, 1);
        x_we = $urandom_range(0, 1);
        h_we = $urandom_range(0, 1);
        w_k = 2'($urandom_range(0, K - 1)); w_c = 4'($urandom_range(0, C - 1));
        x_k = 2'($urandom_range(0, K - 1)); x_c = 4'($urandom_range(0, C - 1));
        x_t = 5'($urandom()); h_t = 5'($urandom());
        x_bits = ADDERS'($urandom()); h_y = K'($urandom()); h_o = $urandom_range(0, 1);
        for (int p = 0; p < int'(ADDERS); p++) w_new[p] = WB'($urandom_range(0, 2 * L) - L);
        for (int p = 0; p < int'(ADDERS); p++) begin
          int j;
          j = int'(w_c) * ADDERS + p;
          if (w_we && j < int'(N)) m_w[int'(w_k) * N + j] = int'(w_new[p]);
          j = int'(x_c) * ADDERS + p;
          if (x_we && j < int'(N)) m_x[x_t][int'(x_k) * N + j] = x_bits[p];
        end
        if (h_we) begin m_y[h_t] = h_y; m_o[h_t] = h_o; end
        @(negedge clk);
        w_we = 1'b0; x_we = 1'b0; h_we = 1'b0;
      end
      compare_all("writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
