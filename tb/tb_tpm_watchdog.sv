// tb_tpm_watchdog: self-checking test of the watchdog timer.
// For random limits the testbench ticks the watchdog and checks that
// 'expired' rises exactly after the tick that brings the count of
// iterations (B per tick) to the limit, that 'clear' restarts it, that a
// limit of 0 never expires and that the count saturates instead of wrapping.
module tb_tpm_watchdog;
  localparam int unsigned WD_W = 16, B = 32;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, tick = 1'b0, expired;
  logic [WD_W-1:0] limit = '0;
  int checks = 0, failures = 0;

  tpm_watchdog #(.WD_W(WD_W), .B(B)) dut (.*);

  always #5 clk = ~clk;

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

  initial begin
    int count;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 40; trial++) begin
      @(negedge clk);
      limit = (trial == 0) ? WD_W'(1) : (trial % 2 == 1) ? WD_W'(B * $urandom_range(1, 60)) : WD_W'($urandom_range(1, 2000));
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      count = 0;
      check(!expired, "cleared");
      while (count < int'(limit) + 3 * int'(B)) begin
        tick = $urandom_range(0, 1);
        @(negedge clk);
        if (tick) count += B;
        tick = 1'b0;
        check(expired == (count >= int'(limit)), $sformatf("limit %0d count %0d expired %b", limit, count, expired));
      end
    end
    // disabled watchdog and saturation: 3000 ticks of 32 exceed 2^16
    @(negedge clk);
    limit = '0; clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    tick = 1'b1;
    repeat (3000) @(negedge clk);
    tick = 1'b0;
    check(!expired, "limit 0 disables");
    limit = '1;
    #1;
    check(expired, "count saturates above the largest limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
