// tb_tpmra: end-to-end test of two Tree Parity Machine Rekeying cores.
// Party A and party B, both at the default parameters (K=3, N=49, L=4,
// 588-bit keys, 32-bit bit packages, six adder lanes), are wired back to
// back over their bit package ports and given the same CRC seed but
// independent random initial weights. Each has its own model of an
// encryption unit that requests keys and commits each announced key after
// its own random delay, so the two cores drift apart in time and must wait
// for each other in the bit package handshake.
// Phase 1 sets a watchdog limit far below the synchronisation time, so
// exchanges fail with sync_error and restart. Phase 2 sets a usable limit;
// the cores must then deliver a sequence of keys, and each key must be equal
// at both parties and differ from the key before it.
// Counted mechanisms (each must occur): keys, rekeying (a second key of the
// same request), watchdog expiries, handshake stalls on either side, skipped
// learning steps (outputs disagreed) and learning steps.
module tb_tpmra;
  import tpm_pkg::*;
  localparam int unsigned KEYW = K_DEF * N_DEF * WB_DEF;
  localparam int unsigned NKEYS = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_a = 1'b0, req_b = 1'b0, com_a = 1'b0, com_b = 1'b0;
  logic cha_a, cha_b, err_a, err_b;
  logic [KEYW-1:0] key_a, key_b, winit_a = '0, winit_b = '0;
  logic [31:0] a2b, b2a;
  logic req_ab, ack_ba, req_ba, ack_ab;
  logic [15:0] wd_limit = 16'd64;
  logic [31:0] seed = 32'h6a09_e667;
  int checks = 0, failures = 0;
  int n_keys_a = 0, n_keys_b = 0, n_err = 0, stall_a = 0, stall_b = 0;
  int n_learn = 0, n_skip = 0;
  logic [KEYW-1:0] keys_a [NKEYS], keys_b [NKEYS];
  longint t_start;

  tpmra u_a (
    .party(PARTY_A), .clk, .rst_n, .req_key(req_a), .key_cha(cha_a), .key_com(com_a), .key(key_a),
    .bp_out(a2b), .bp_req_out(req_ab), .bp_ack_in(ack_ba), .bp_in(b2a), .bp_req_in(req_ba), .bp_ack_out(ack_ab),
    .sync_error(err_a), .wd_limit, .crc_seed(seed), .w_init(winit_a));
  tpmra u_b (
    .party(PARTY_B), .clk, .rst_n, .req_key(req_b), .key_cha(cha_b), .key_com(com_b), .key(key_b),
    .bp_out(b2a), .bp_req_out(req_ba), .bp_ack_in(ack_ab), .bp_in(a2b), .bp_req_in(req_ab), .bp_ack_out(ack_ba),
    .sync_error(err_b), .wd_limit, .crc_seed(seed), .w_init(winit_b));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [KEYW-1:0] random_weights();
    logic [KEYW-1:0] v;
    for (int i = 0; i < int'(KEYW / WB_DEF); i++) v[i*WB_DEF +: WB_DEF] = WB_DEF'($urandom_range(0, 2 * L_DEF) - L_DEF);
    return v;
  endfunction

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired: keys A=%0d B=%0d errors=%0d", n_keys_a, n_keys_b, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Fresh secret weights for every exchange, independent per party.
  always @(negedge clk) begin
    winit_a <= random_weights();
    winit_b <= random_weights();
  end

  // Mechanism counters, from the cores' ports and their TPM units.
  always @(negedge clk) if (rst_n) begin
    if (req_ab && !ack_ba) stall_a++;
    if (req_ba && !ack_ab) stall_b++;
    // a restart issued together with the end of learning is a watchdog expiry
    if (u_a.tpm_init && u_a.learn_done) n_err++;
    if (u_a.u_tpm.wa_start) n_learn++;
    // state 4 is the learning check
    if (u_a.u_tpm.u_ctrl.state_q == 3'd4 && !u_a.u_tpm.wa_start) n_skip++;
  end

  // Encryption unit of party A.
  initial begin
    wait (rst_n);
    req_a = 1'b1;
    forever begin
      @(negedge clk);
      if (cha_a && !com_a) begin
        if (n_keys_a < int'(NKEYS)) keys_a[n_keys_a] = key_a;
        n_keys_a++;
        $display("party A key %0d at cycle %0d", n_keys_a, ($time / 10) - t_start);
        repeat ($urandom_range(0, 200)) @(negedge clk);
        com_a = 1'b1;
        wait (!cha_a);
        @(negedge clk);
        com_a = 1'b0;
      end
    end
  end

  // Encryption unit of party B, slower to commit.
  initial begin
    wait (rst_n);
    req_b = 1'b1;
    forever begin
      @(negedge clk);
      if (cha_b && !com_b) begin
        if (n_keys_b < int'(NKEYS)) keys_b[n_keys_b] = key_b;
        n_keys_b++;
        repeat ($urandom_range(100, 2000)) @(negedge clk);
        com_b = 1'b1;
        wait (!cha_b);
        @(negedge clk);
        com_b = 1'b0;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Phase 1: the watchdog limit is far too short.
    wait (n_err >= 2);
    check(err_b, "both parties flag the synchronisation error");
    check(n_keys_a == 0, "no key while the watchdog is too short");
    @(negedge clk);
    wd_limit = 16'd20000;
    t_start = $time / 10;
    // Phase 2: keys.
    wait (n_keys_a >= int'(NKEYS) && n_keys_b >= int'(NKEYS));
    repeat (5) @(negedge clk);
    for (int i = 0; i < int'(NKEYS); i++) begin
      check(keys_a[i] == keys_b[i], $sformatf("key %0d equal at both parties", i));
      if (i > 0) check(keys_a[i] != keys_a[i-1], $sformatf("key %0d differs from key %0d", i, i - 1));
    end
    check(!err_a && !err_b, "sync_error cleared by the keys");
    check(n_err > 0, "watchdog expiry happened");
    check(n_keys_a > 1, "rekeying happened");
    check(stall_a > 0 && stall_b > 0, "handshake stalls on both sides");
    check(n_learn > 0 && n_skip > 0, "learning and skipped learning steps");
    $display("keys=%0d errors=%0d stalls A=%0d B=%0d learning steps=%0d skipped=%0d cycles=%0d",
             n_keys_a, n_err, stall_a, stall_b, n_learn, n_skip, ($time / 10) - t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
