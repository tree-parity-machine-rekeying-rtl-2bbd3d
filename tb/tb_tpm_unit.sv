// tb_tpm_unit: self-checking test of the TPM unit against a software model.
// The model here is written from the equations alone: a bit-serial CRC
// generator, alpha_k = sum w_kj x_kj, the party's sign rule, the parity, and
// for each iteration where both outputs agree the Hebbian update with
// clipping. It consumes ADDERS generator bits per chunk of each hidden unit,
// as the hardware does. For several packages the unit's own package and,
// after learning with a partner package (partly equal to the own one so that
// learning happens), all weights are compared with the model. A second
// 'init' must reload the weights without reseeding the generator. The
// package must be ready 2 + B*(K*C+1) cycles after the command.
module tb_tpm_unit;
  import tpm_pkg::*;
  localparam int unsigned K = 3, N = 49, L = 4, WB = 4, ADDERS = 6, B = 32, CRC_W = 32;
  localparam int unsigned C = (N + ADDERS - 1) / ADDERS;
  localparam logic [31:0] POLY = 32'h04C1_1DB7;

  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0, next = 1'b0, learn = 1'b0;
  logic [B-1:0] partner = '0, pkg;
  logic [CRC_W-1:0] crc_seed = '0;
  logic [K*N*WB-1:0] w_init = '0, key;
  logic pkg_valid, learn_done, busy;
  int checks = 0, failures = 0, learn_steps = 0;

  tpm_unit #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS), .B(B), .CRC_W(CRC_W)) dut (.party(PARTY_A), .*);

  always #5 clk = ~clk;

  // ---- reference model ----
  logic [CRC_W-1:0] m_crc;
  int m_w [K*N];
  logic m_x [B][K*N];
  logic m_y [B][K];
  logic [B-1:0] m_o;

  function automatic logic crc_bit();
    logic b = m_crc[CRC_W-1];
    m_crc = b ? ({m_crc[CRC_W-2:0], 1'b0} ^ POLY) : {m_crc[CRC_W-2:0], 1'b0};
    return b;
  endfunction

  task automatic model_package();
    for (int t = 0; t < int'(B); t++) begin
      logic o = 1'b1;
      for (int k = 0; k < int'(K); k++) begin
        int alpha = 0;
        for (int c = 0; c < int'(C); c++)
          for (int p = 0; p < int'(ADDERS); p++) begin
            logic b = crc_bit();
            int j = c * ADDERS + p;
            if (j < int'(N)) begin
              m_x[t][k*N+j] = b;
              alpha += b ? m_w[k*N+j] : -m_w[k*N+j];
            end
          end
        m_y[t][k] = (alpha >= 0);     // party A: sigma(0) = +1
        o = (o == m_y[t][k]);
      end
      m_o[t] = o;
    end
  endtask

  task automatic model_learn(input logic [B-1:0] other);
    for (int t = 0; t < int'(B); t++) begin
      if (m_o[t] != other[t]) continue;
      learn_steps++;
      for (int k = 0; k < int'(K); k++) begin
        if (m_y[t][k] != m_o[t]) continue;
        for (int j = 0; j < int'(N); j++) begin
          int v = m_w[k*N+j] + ((m_x[t][k*N+j] == m_o[t]) ? 1 : -1);
          m_w[k*N+j] = (v > int'(L)) ? L : (v < -int'(L)) ? -L : v;
        end
      end
    end
  endtask

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic new_weights();
    for (int i = 0; i < int'(K*N); i++) begin
      int v = $urandom_range(0, 2 * L) - L;
      w_init[i*WB +: WB] = WB'(v);
      m_w[i] = v;
    end
  endtask

  task automatic one_package(input bit is_init, input int pkg_no);
    int cyc;
    @(negedge clk);
    init = is_init; next = !is_init;
    @(negedge clk);
    init = 1'b0; next = 1'b0;
    cyc = 1;
    while (!pkg_valid && cyc < 5000) begin @(negedge clk); cyc++; end
    check(cyc == 2 + int'(B * (K * C + 1)), $sformatf("package %0d ready after %0d cycles", pkg_no, cyc));
    model_package();
    check(pkg == m_o, $sformatf("package %0d: %h expected %h", pkg_no, pkg, m_o));
    // partner agrees on most bits
    partner = m_o ^ (B'($urandom()) & B'($urandom()));
    learn = 1'b1;
    @(negedge clk);
    learn = 1'b0;
    cyc = 0;
    while (!learn_done && cyc < 20000) begin @(negedge clk); cyc++; end
    check(learn_done, "learn_done");
    @(negedge clk);
    model_learn(partner);
    for (int i = 0; i < int'(K*N); i++)
      check(int'($signed(key[i*WB +: WB])) == m_w[i], $sformatf("package %0d weight %0d: %0d expected %0d",
            pkg_no, i, $signed(key[i*WB +: WB]), m_w[i]));
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    crc_seed = 32'h1234_5678;
    m_crc = crc_seed;
    new_weights();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    one_package(1'b1, 0);
    for (int n = 1; n < 12; n++) one_package(1'b0, n);
    // a new exchange: new weights, generator continues
    crc_seed = 32'hdead_beef;
    new_weights();
    one_package(1'b1, 12);
    for (int n = 13; n < 16; n++) one_package(1'b0, n);
    check(learn_steps > 0, "learning steps happened");
    $display("learning steps: %0d", learn_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
