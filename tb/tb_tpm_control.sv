// tb_tpm_control: self-checking test of the TPM control FSM.
// The parity computation and weight adjustment units are replaced by
// responders that pulse 'done' a fixed number of cycles after 'start', and
// the stored outputs by an array indexed by t. Checked: seed loading only on
// the first 'init'; weight loading on every 'init' but not on 'next'; B
// outputs stored at t = 0 .. B-1 in order; the package ready 2 + B*D cycles
// after the command (D = parity latency); one learning step exactly for each
// iteration whose own and partner outputs agree, in order; one 'learn_done'.
module tb_tpm_control;
  localparam int unsigned B = 32, PAR_LAT = 9, WA_LAT = 5;

  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0, next = 1'b0, learn = 1'b0;
  logic [B-1:0] partner = '0;
  logic crc_load, init_load, par_start, par_done, h_we, o_rd, wa_start, wa_done;
  logic pkg_valid, learn_done, busy;
  logic [4:0] t;
  logic [B-1:0] own;
  int checks = 0, failures = 0;
  int par_cnt = 0, wa_cnt = 0;

  tpm_control #(.B(B)) dut (.*);

  always #5 clk = ~clk;

  // responders
  int par_timer = 0, wa_timer = 0;
  assign par_done = (par_timer == 1);
  assign wa_done  = (wa_timer == 1);
  always @(posedge clk) begin
    if (par_start) par_timer <= PAR_LAT;
    else if (par_timer > 0) par_timer <= par_timer - 1;
    if (wa_start) wa_timer <= WA_LAT;
    else if (wa_timer > 0) wa_timer <= wa_timer - 1;
  end
  assign o_rd = own[t];

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One package: issue the command, follow the FSM, then learn.
  task automatic run_package(input bit is_init, input bit first);
    int cyc, n_h, n_crc, n_init, n_wa, n_done;
    int exp_t;
    logic [B-1:0] agree;
    own = {$urandom()};
    @(negedge clk);
    init = is_init; next = !is_init;
    #1;
    n_crc = crc_load; n_init = init_load;
    @(negedge clk);
    init = 1'b0; next = 1'b0;
    cyc = 1; n_h = 0; exp_t = 0;
    while (!pkg_valid && cyc < 2000) begin
      n_crc += crc_load; n_init += init_load;
      if (h_we) begin
        check(int'(t) == exp_t, $sformatf("store index %0d expected %0d", t, exp_t));
        exp_t++; n_h++;
      end
      @(negedge clk);
      cyc++;
    end
    check(cyc == 2 + int'(B * PAR_LAT), $sformatf("package ready after %0d cycles", cyc));
    check(n_h == int'(B), $sformatf("%0d outputs stored", n_h));
    check(n_crc == int'(is_init && first), "seed load only on the first init");
    check(n_init == int'(is_init), "weights loaded on init only");
    repeat ($urandom_range(0, 5)) begin
      @(negedge clk);
      check(pkg_valid, "package held");
    end
    partner = {$urandom()};
    agree = ~(own ^ partner);
    learn = 1'b1;
    @(negedge clk);
    learn = 1'b0;
    n_wa = 0; n_done = 0; exp_t = 0;
    cyc = 0;
    while (n_done == 0 && cyc < 2000) begin
      if (wa_start) begin
        while (exp_t < int'(B) && !agree[exp_t]) exp_t++;
        check(int'(t) == exp_t, $sformatf("learning step at t=%0d expected %0d", t, exp_t));
        exp_t++; n_wa++;
      end
      n_done += learn_done;
      @(negedge clk);
      cyc++;
    end
    check(n_wa == $countones(agree), $sformatf("%0d learning steps for %0d agreements", n_wa, $countones(agree)));
    check(n_done == 1, "learn_done pulsed");
  endtask

  initial begin
    own = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run_package(1'b1, 1'b1);
    for (int i = 0; i < 5; i++) run_package(1'b0, 1'b0);
    run_package(1'b1, 1'b0);
    run_package(1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
