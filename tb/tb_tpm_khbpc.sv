// tb_tpm_khbpc: self-checking test of the key handshake and bit package control.
// Around the controller the testbench models the TPM unit (packages after a
// random delay, learning after a random delay, weights that change with each
// learning step), the watchdog (expires after a set number of packages), the
// other party (four-phase handshake in both directions with random delays)
// and the encryption unit (req_key, and key_com some cycles after key_cha).
// Each cycle the testbench first drives its signals after the falling edge,
// then samples the controller's outputs, so that it sees exactly what the
// controller acts on at the next rising edge. Checked: the package sent is
// the TPM's, the package handed to the TPM is the partner's, the equal-output
// counter of Eq. 5 (modelled here) decides synchronisation, the key equals
// the weights after the last learning step, sync_error rises on watchdog
// expiry and the exchange restarts, key_cha is held until key_com, and the
// next exchange starts only after key_com has fallen.
module tb_tpm_khbpc;
  localparam int unsigned B = 32, T_MIN = 96, KEYW = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_key = 1'b0, key_com = 1'b0, key_cha, sync_error;
  logic [KEYW-1:0] key, weights = '0;
  logic [B-1:0] bp_out, bp_in = '0, partner, pkg = '0;
  logic bp_req_out, bp_ack_in = 1'b0, bp_req_in = 1'b0, bp_ack_out;
  logic tpm_init, tpm_next, tpm_learn, pkg_valid = 1'b0, learn_done = 1'b0;
  logic wd_clear, wd_tick, wd_expired = 1'b0;
  int checks = 0, failures = 0;
  int n_keys = 0, n_errors = 0, n_pkgs = 0, n_tx_stalls = 0, n_rx_stalls = 0;

  tpm_khbpc #(.B(B), .T_MIN(T_MIN), .KEYW(KEYW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // testbench state
  int tpm_timer = -1, learn_timer = -1;
  int wd_packages = 0, wd_limit_packages = 5;
  int sync_cnt = 0;
  logic [B-1:0] p_pkg = '0;          // partner's package
  int ptx_state = 0, ptx_delay = 0;  // partner sending
  int prx_state = 0, prx_delay = 0;  // partner receiving
  bit expect_key = 0, err_since_key = 0;
  int com_delay = -1, rel_delay = -1;
  logic [KEYW-1:0] key_seen;
  bit key_valid_seen = 0, wait_release = 0;
  int agree_pct = 20;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    req_key = 1'b1;
  end

  always @(negedge clk) if (rst_n) begin
    // ---------- drive ----------
    learn_done = 1'b0;
    if (tpm_timer == 0) begin
      pkg_valid = 1'b1;
      pkg = {$urandom()};
      p_pkg = ($urandom_range(0, 99) < agree_pct) ? pkg : pkg ^ (B'(1) << $urandom_range(0, B - 1));
      ptx_state = 1; ptx_delay = $urandom_range(0, 6);
      n_pkgs++;
    end
    if (tpm_timer >= 0) tpm_timer--;
    if (learn_timer == 0) begin
      learn_done = 1'b1;
      weights = {$urandom(), $urandom()};
    end
    if (learn_timer >= 0) learn_timer--;
    // partner sender
    case (ptx_state)
      1: if (ptx_delay == 0) begin bp_req_in = 1'b1; bp_in = p_pkg; ptx_state = 2; end
         else ptx_delay--;
      2: if (bp_ack_out) begin bp_req_in = 1'b0; ptx_state = 0; end
      default: ;
    endcase
    // partner receiver
    case (prx_state)
      0: if (bp_req_out) begin prx_state = 1; prx_delay = $urandom_range(0, 6); end
      1: if (prx_delay == 0) begin
           check(bp_out == pkg, "package sent is the TPM's");
           bp_ack_in = 1'b1; prx_state = 2;
         end else prx_delay--;
      2: if (!bp_req_out) begin bp_ack_in = 1'b0; prx_state = 0; end
      default: ;
    endcase
    wd_expired = (wd_packages >= wd_limit_packages);
    // encryption unit
    if (com_delay == 0) key_com = 1'b1;
    if (com_delay >= 0) com_delay--;
    if (rel_delay == 0) begin key_com = 1'b0; wait_release = 0; end
    if (rel_delay >= 0) rel_delay--;
    // ---------- sample ----------
    #1;
    if (bp_req_out && !bp_ack_in) n_tx_stalls++;
    if (bp_req_in && !bp_ack_out) n_rx_stalls++;
    if (tpm_init || tpm_next) begin
      check(!wait_release, "no new exchange before key_com falls");
      tpm_timer = $urandom_range(1, 20);
      pkg_valid = 1'b0;
    end
    if (wd_clear) begin wd_packages = 0; sync_cnt = 0; end
    if (wd_tick) wd_packages++;
    if (tpm_learn) begin
      logic [B-1:0] eq;
      int run;
      check(partner == p_pkg, "partner package handed to the TPM");
      eq = ~(pkg ^ p_pkg);
      if (&eq) sync_cnt = (sync_cnt >= int'(T_MIN)) ? sync_cnt : sync_cnt + int'(B);
      else begin
        run = 0;
        for (int i = int'(B) - 1; i >= 0 && eq[i]; i--) run++;
        sync_cnt = run;
      end
      learn_timer = $urandom_range(1, 30);
    end
    if (learn_done) begin
      if (sync_cnt >= int'(T_MIN)) begin expect_key = 1; key_seen = weights; end
      else if (wd_expired) begin
        check(tpm_init && !tpm_next, "restart issued with learn_done");
        sync_cnt = 0;
      end else begin
        check(tpm_next && !tpm_init, "next issued with learn_done");
      end
    end else if (expect_key) begin
      check(key_cha && key == key_seen, "key handed over after synchronisation");
      check(!sync_error, "sync_error cleared by a key");
      expect_key = 0;
      err_since_key = 0;
      n_keys++;
      com_delay = $urandom_range(0, 10);
      key_valid_seen = 1;
    end
    if (key_valid_seen && key_cha && key_com) begin
      key_valid_seen = 0; wait_release = 1; rel_delay = $urandom_range(1, 10);
    end
    if (key_cha) check(key == key_seen, "key stable while announced");
    // sync_error: high from the cycle after an expiry until a key is taken
    if (!learn_done) check(sync_error == err_since_key, "sync_error level");
    if (learn_done && sync_cnt < int'(T_MIN) && wd_expired) begin n_errors++; err_since_key = 1; end
    // phases: first mostly errors, then mostly synchronising packages
    if (n_errors >= 3) begin agree_pct = 95; wd_limit_packages = 40; end
    if (n_keys >= 4) begin
      check(n_errors >= 3, "watchdog expiry exercised");
      check(n_tx_stalls > 0 && n_rx_stalls > 0, "handshake stalls exercised");
      $display("keys=%0d errors=%0d packages=%0d tx_stalls=%0d rx_stalls=%0d",
               n_keys, n_errors, n_pkgs, n_tx_stalls, n_rx_stalls);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

endmodule
