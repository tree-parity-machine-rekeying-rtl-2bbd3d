// tb_tpm_crc_gen: self-checking test of the CRC random generator.
// A bit-serial Galois LFSR written in the testbench is the reference: after a
// seed load, every cycle the generator's BPC output bits must equal the next
// BPC bits of the reference, whether or not 'advance' is asserted (the
// reference only steps when it is). Also checks the zero-seed rule and that
// two generators loaded with the same seed produce the same stream.
module tb_tpm_crc_gen;
  localparam int unsigned CRC_W = 32;
  localparam int unsigned BPC   = 6;
  localparam logic [31:0] POLY  = 32'h04C1_1DB7;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, advance = 1'b0;
  logic [CRC_W-1:0] seed = '0;
  logic [BPC-1:0] bits;
  int checks = 0, failures = 0;
  logic [CRC_W-1:0] ref_s;

  tpm_crc_gen #(.CRC_W(CRC_W), .POLY(POLY), .BPC(BPC)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [BPC-1:0] ref_bits(input logic [CRC_W-1:0] s0, output logic [CRC_W-1:0] s1);
    logic [CRC_W-1:0] s = s0;
    for (int i = 0; i < int'(BPC); i++) begin
      ref_bits[i] = s[CRC_W-1];
      s = s[CRC_W-1] ? ({s[CRC_W-2:0], 1'b0} ^ POLY) : {s[CRC_W-2:0], 1'b0};
    end
    s1 = s;
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CRC_W-1:0] nxt;
    logic [BPC-1:0] exp;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // zero seed is replaced by all ones
    @(negedge clk); load = 1'b1; seed = '0;
    @(negedge clk); load = 1'b0;
    exp = ref_bits('1, nxt);
    check(bits == exp, "zero seed");
    for (int run = 0; run < 4; run++) begin
      @(negedge clk);
      seed = {$urandom(), $urandom()} ;
      load = 1'b1;
      ref_s = (seed == '0) ? '1 : seed;
      @(negedge clk); load = 1'b0;
      for (int c = 0; c < 300; c++) begin
        exp = ref_bits(ref_s, nxt);
        check(bits == exp, $sformatf("run %0d cycle %0d bits %b exp %b", run, c, bits, exp));
        advance = ($urandom_range(0, 3) != 0);
        if (advance) ref_s = nxt;
        @(negedge clk);
        advance = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
