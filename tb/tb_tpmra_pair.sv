// tb_tpmra_pair: two back-to-back TPMRA cores (party A and party B) at a
// given N and adder count, used by the configuration sweep. Both encryption
// units commit each key immediately. The pair runs until KEYS keys have been
// delivered, checks that both parties hold the same key each time, and
// reports the number of TPM iterations (outputs) and clock cycles from the
// start of each exchange to its key.
module tb_tpmra_pair #(
  parameter int unsigned N      = 49,
  parameter int unsigned ADDERS = 6,
  parameter int unsigned KEYS   = 3
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    finished,
  output int      n_keys,
  output int      n_bad,
  output longint  iterations,
  output longint  cycles
);
  import tpm_pkg::*;
  localparam int unsigned KEYW = K_DEF * N * WB_DEF;

  logic cha_a, cha_b, err_a, err_b, com_a, com_b;
  logic [KEYW-1:0] key_a, key_b, winit_a, winit_b;
  logic [31:0] a2b, b2a;
  logic req_ab, ack_ba, req_ba, ack_ab;

  tpmra #(.N(N), .ADDERS(ADDERS)) u_a (
    .party(PARTY_A), .clk, .rst_n, .req_key(1'b1), .key_cha(cha_a), .key_com(com_a), .key(key_a),
    .bp_out(a2b), .bp_req_out(req_ab), .bp_ack_in(ack_ba), .bp_in(b2a), .bp_req_in(req_ba), .bp_ack_out(ack_ab),
    .sync_error(err_a), .wd_limit(16'd0), .crc_seed(32'hbb67_ae85), .w_init(winit_a));
  tpmra #(.N(N), .ADDERS(ADDERS)) u_b (
    .party(PARTY_B), .clk, .rst_n, .req_key(1'b1), .key_cha(cha_b), .key_com(com_b), .key(key_b),
    .bp_out(b2a), .bp_req_out(req_ba), .bp_ack_in(ack_ab), .bp_in(a2b), .bp_req_in(req_ab), .bp_ack_out(ack_ba),
    .sync_error(err_b), .wd_limit(16'd0), .crc_seed(32'hbb67_ae85), .w_init(winit_b));

  assign com_a = cha_a && cha_b;
  assign com_b = cha_a && cha_b;

  always @(negedge clk) begin
    for (int i = 0; i < int'(K_DEF * N); i++) begin
      winit_a[i*WB_DEF +: WB_DEF] <= WB_DEF'($urandom_range(0, 2 * L_DEF) - L_DEF);
      winit_b[i*WB_DEF +: WB_DEF] <= WB_DEF'($urandom_range(0, 2 * L_DEF) - L_DEF);
    end
  end

  initial begin
    finished = 1'b0; n_keys = 0; n_bad = 0; iterations = 0; cycles = 0;
  end

  logic running = 1'b0;
  always @(negedge clk) if (rst_n && !finished) begin
    if (u_a.u_khbpc.state_q != 3'd0 && u_a.u_khbpc.state_q < 3'd4) begin   // an exchange is running
      cycles++;
      if (u_a.u_khbpc.tpm_learn) iterations += 32;
    end
    if (cha_a && cha_b && !running) begin
      running = 1'b1;
      n_keys++;
      if (key_a != key_b) n_bad++;
      if (n_keys >= int'(KEYS)) finished = 1'b1;
    end
    if (!cha_a) running = 1'b0;
  end
endmodule
