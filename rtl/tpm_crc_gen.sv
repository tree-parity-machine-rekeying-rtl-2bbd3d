// tpm_crc_gen: CRC random generator for the common TPM inputs.
//
// Both parties must present identical pseudo-random inputs x_kj to their
// TPMs, so each holds a CRC shift register loaded with the same initial vector
// (kept secret between the parties it also authenticates them). The register
// is a Galois LFSR of width CRC_W with feedback polynomial POLY, i.e. a CRC
// generator clocked with a zero data stream; the bit shifted out of the top is
// the next random bit. BPC bits are produced per clock: bits[0] is the bit that
// a one-bit-per-clock generator would emit first.
//
// Interface: 'load' copies 'seed' into the register (an all-zero seed, which
// would lock the LFSR, is replaced by all ones). 'advance' shifts BPC times.
// 'bits' is combinational from the current state and valid every cycle.
// The use of a CRC generator follows the paper; polynomial, width and the
// number of bits per clock are this design's choices.
module tpm_crc_gen #(
  parameter int unsigned    CRC_W = tpm_pkg::CRC_W_DEF,
  parameter logic [CRC_W-1:0] POLY = CRC_W'(tpm_pkg::CRC_POLY_DEF),
  parameter int unsigned    BPC   = tpm_pkg::ADDERS_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [CRC_W-1:0] seed,
  input  logic             advance,
  output logic [BPC-1:0]   bits
);

  logic [CRC_W-1:0] state_q;
  logic [CRC_W-1:0] state_next;

  // Unrolled BPC steps of the serial LFSR.
  always_comb begin
    logic [CRC_W-1:0] s;
    s = state_q;
    for (int i = 0; i < int'(BPC); i++) begin
      bits[i] = s[CRC_W-1];
      s = {s[CRC_W-2:0], 1'b0} ^ (s[CRC_W-1] ? POLY : '0);
    end
    state_next = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state_q <= '1;
    else if (load)    state_q <= (seed == '0) ? '1 : seed;
    else if (advance) state_q <= state_next;
  end

endmodule
