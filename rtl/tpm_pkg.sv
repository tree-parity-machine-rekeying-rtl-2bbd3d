// tpm_pkg: constants and types shared by the Tree Parity Machine Rekeying
// Architecture (TPMRA).
//
// A Tree Parity Machine (TPM) has K hidden units, each fed by N binary inputs
// x_kj in {-1,+1} through integer weights w_kj in [-L, L]. The defaults follow
// the 588-bit configuration of the design: K=3, N=49, L=4, each weight held in
// L=4 bits (key length K*N*L = 588), a 32-bit bit package and six adder lanes
// (the semi-parallel architecture; ADDERS=1 gives the serial one).
// Encodings chosen here: an input, hidden-unit sign or output bit of 1 means
// +1 and a bit of 0 means -1.
package tpm_pkg;

  localparam int unsigned K_DEF      = 3;   // hidden units
  localparam int unsigned N_DEF      = 49;  // inputs per hidden unit
  localparam int unsigned L_DEF      = 4;   // weight range [-L, L]
  localparam int unsigned WB_DEF     = 4;   // bits per stored weight
  localparam int unsigned B_DEF      = 32;  // bit package length
  localparam int unsigned ADDERS_DEF = 6;   // adder lanes (1 = serial)
  localparam int unsigned CRC_W_DEF  = 32;  // CRC generator register width
  localparam logic [31:0] CRC_POLY_DEF = 32'h04C1_1DB7;  // CRC-32 polynomial
  localparam int unsigned T_MIN_DEF  = 128; // equal outputs that mean "synchronised"
  localparam int unsigned WD_W_DEF   = 16;  // watchdog limit width

  // Sign of a hidden unit whose sum alpha_k is 0. With TIE_BY_PARTY_DEF = 0
  // both parties map 0 to +1, so parties with equal weights always give equal
  // outputs and stay synchronised. With 1, party A maps 0 to +1 and party B to
  // -1, the party-specific rule as printed for sigma; identical weights can
  // then still produce different outputs, which breaks synchrony again.
  localparam bit TIE_BY_PARTY_DEF = 1'b0;
  typedef enum logic {PARTY_A = 1'b0, PARTY_B = 1'b1} party_e;

  // Number of ADDERS-wide chunks needed to cover the N inputs of one hidden unit.
  function automatic int unsigned chunks(input int unsigned n, input int unsigned p);
    return (n + p - 1) / p;
  endfunction

  // Width of a signed accumulator that holds any sum of n terms of magnitude <= l.
  function automatic int unsigned sum_width(input int unsigned n, input int unsigned l);
    return $clog2(n * l + 1) + 1;
  endfunction

endpackage
