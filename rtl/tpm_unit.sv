// tpm_unit: the Tree Parity Machine unit of one party.
//
// Connects the TPM control FSM, the CRC random generator, the parity
// computation unit, the weight adjustment unit and the register bank
// (weights, hidden units, stored inputs). The controller above it sees a
// simple command interface ('party' is a static strap, see tpm_parity):
//  - 'init' starts a key exchange with the weights on 'w_init' (the first
//    one after reset also loads 'crc_seed'); 'next' continues with the
//    current weights. Either computes a bit package of B outputs.
//  - 'pkg_valid' is high while the package 'pkg' (bit t = output of
//    iteration t, 1 = +1) waits for the partner's.
//  - 'learn' with 'partner' runs the learning; 'learn_done' pulses after it.
//  - 'key' is the packed weight vector (weight i in bits [i*WB +: WB]).
// The split into these five parts follows the paper's block diagram of the
// unit; the command interface is this design's.
module tpm_unit
  import tpm_pkg::*;
#(
  parameter int unsigned K      = K_DEF,
  parameter int unsigned N      = N_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned WB     = WB_DEF,
  parameter int unsigned ADDERS = ADDERS_DEF,
  parameter int unsigned B      = B_DEF,
  parameter int unsigned CRC_W  = CRC_W_DEF,
  parameter bit          TIE_BY_PARTY = TIE_BY_PARTY_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  party_e            party,
  input  logic              init,
  input  logic              next,
  input  logic              learn,
  input  logic [B-1:0]      partner,
  input  logic [CRC_W-1:0]  crc_seed,
  input  logic [K*N*WB-1:0] w_init,
  output logic              pkg_valid,
  output logic [B-1:0]      pkg,
  output logic              learn_done,
  output logic              busy,
  output logic [K*N*WB-1:0] key
);

  localparam int unsigned C  = chunks(N, ADDERS);
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned TW = (B > 1) ? $clog2(B) : 1;

  logic                 crc_load, init_load, par_start, par_done, h_we, wa_start, wa_done;
  logic [TW-1:0]        t;
  logic                 o_rd;
  logic [K-1:0]         y_rd;
  logic [K*N-1:0]       x_row;
  logic signed [WB-1:0] w [K*N];
  logic [ADDERS-1:0]    x_bits;
  logic                 x_adv, x_we;
  logic [KW-1:0]        par_k, wa_k;
  logic [CW-1:0]        par_c, wa_c;
  logic [K-1:0]         par_y;
  logic                 par_o, par_busy, wa_busy, w_we;
  logic signed [WB-1:0] w_new [ADDERS];

  tpm_control #(.B(B)) u_ctrl (
    .clk, .rst_n, .init, .next, .learn, .partner,
    .crc_load, .init_load, .par_start, .par_done, .h_we, .t, .o_rd,
    .wa_start, .wa_done, .pkg_valid, .learn_done, .busy
  );

  tpm_crc_gen #(.CRC_W(CRC_W), .BPC(ADDERS)) u_crc (
    .clk, .rst_n, .load(crc_load), .seed(crc_seed), .advance(x_adv), .bits(x_bits)
  );

  tpm_parity #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS), .TIE_BY_PARTY(TIE_BY_PARTY)) u_par (
    .clk, .rst_n, .party, .start(par_start), .w, .x_bits, .x_adv, .x_we,
    .k_idx(par_k), .c_idx(par_c), .busy(par_busy), .done(par_done), .y(par_y), .o(par_o)
  );

  tpm_weight_adj #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS)) u_wadj (
    .clk, .rst_n, .start(wa_start), .o(o_rd), .y(y_rd), .x_row, .w,
    .w_we, .k_idx(wa_k), .c_idx(wa_c), .w_new, .busy(wa_busy), .done(wa_done)
  );

  tpm_regbank #(.K(K), .N(N), .L(L), .WB(WB), .ADDERS(ADDERS), .B(B)) u_regs (
    .clk, .rst_n, .init_load, .w_init,
    .w_we, .w_k(wa_k), .w_c(wa_c), .w_new,
    .x_we, .x_t(t), .x_k(par_k), .x_c(par_c), .x_bits,
    .h_we, .h_t(t), .h_y(par_y), .h_o(par_o),
    .rd_t(t), .w, .key, .x_row, .y_rd, .o_rd, .pkg
  );

  // The two TDMA engines never run at the same time.
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(par_busy && wa_busy));

endmodule
