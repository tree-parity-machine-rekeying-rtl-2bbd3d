// tpmra: Tree Parity Machine Rekeying Architecture, one party's core.
//
// Two such cores, one per party, agree on a common secret key over a public
// channel: both run a Tree Parity Machine on the same pseudo-random inputs,
// exchange their outputs in bit packages and learn from each other until
// their weight vectors are equal; the weights are then the key. The core
// keeps exchanging new keys as long as an encryption unit asks for them.
//
// Structure (three functional blocks): the key handshake and bit package
// control (tpm_khbpc), the watchdog timer (tpm_watchdog) and the TPM unit
// (tpm_unit). External parts connect through ports: the encryption unit
// (req_key, key_cha, key_com, key), the other party's core through a
// point-to-point B-bit channel in each direction (bp_* signals; a core's
// bp_out/bp_req_out/bp_ack_out drive the other's bp_in/bp_req_in/bp_ack_in),
// the source of secret initial weights (w_init, sampled at the start of each
// exchange; weight i in bits [i*WB +: WB], two's complement, clipped to
// [-L, L]), the common CRC seed (crc_seed, sampled at the first exchange
// after reset) and the watchdog limit in iterations (wd_limit, 0 = off).
// Both parties must use the same parameters; their 'party' straps must
// differ (PARTY_A = 0 at one end, PARTY_B = 1 at the other).
// Timing: everything is synchronous to clk; the two cores may run on the same
// or on different clocks only if the bp_* signals are synchronised outside.
// The three-block structure and the signal names follow the paper's block
// diagram; bidirectional paper signals are split into in/out ports here, and
// the port protocols are this design's. The TPM unit's 'busy' output is left
// unconnected on purpose: the controller sequences the unit by its
// pkg_valid/learn_done outputs only ('busy' is there for testing).
module tpmra
  import tpm_pkg::*;
#(
  parameter int unsigned K      = K_DEF,
  parameter int unsigned N      = N_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned WB     = WB_DEF,
  parameter int unsigned ADDERS = ADDERS_DEF,
  parameter int unsigned B      = B_DEF,
  parameter int unsigned CRC_W  = CRC_W_DEF,
  parameter int unsigned T_MIN  = T_MIN_DEF,
  parameter int unsigned WD_W   = WD_W_DEF,
  parameter bit          TIE_BY_PARTY = TIE_BY_PARTY_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  party_e            party,
  input  logic              req_key,
  output logic              key_cha,
  input  logic              key_com,
  output logic [K*N*WB-1:0] key,
  output logic [B-1:0]      bp_out,
  output logic              bp_req_out,
  input  logic              bp_ack_in,
  input  logic [B-1:0]      bp_in,
  input  logic              bp_req_in,
  output logic              bp_ack_out,
  output logic              sync_error,
  input  logic [WD_W-1:0]   wd_limit,
  input  logic [CRC_W-1:0]  crc_seed,
  input  logic [K*N*WB-1:0] w_init
);

  logic              tpm_init, tpm_next, tpm_learn, pkg_valid, learn_done;
  logic [B-1:0]      partner, pkg;
  logic [K*N*WB-1:0] weights;
  logic              wd_clear, wd_tick, wd_expired;

  tpm_khbpc #(.B(B), .T_MIN(T_MIN), .KEYW(K*N*WB)) u_khbpc (
    .clk, .rst_n, .req_key, .key_cha, .key_com, .key,
    .bp_out, .bp_req_out, .bp_ack_in, .bp_in, .bp_req_in, .bp_ack_out, .sync_error,
    .tpm_init, .tpm_next, .tpm_learn, .partner, .pkg_valid, .pkg, .learn_done, .weights,
    .wd_clear, .wd_tick, .wd_expired
  );

  tpm_watchdog #(.WD_W(WD_W), .B(B)) u_wd (
    .clk, .rst_n, .clear(wd_clear), .tick(wd_tick), .limit(wd_limit), .expired(wd_expired)
  );

  tpm_unit #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS), .B(B), .CRC_W(CRC_W), .TIE_BY_PARTY(TIE_BY_PARTY)) u_tpm (
    .clk, .rst_n, .party, .init(tpm_init), .next(tpm_next), .learn(tpm_learn), .partner,
    .crc_seed, .w_init, .pkg_valid, .pkg, .learn_done, .busy(), .key(weights)
  );

endmodule
