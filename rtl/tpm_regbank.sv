// tpm_regbank: register bank of the TPM unit.
//
// Holds the K*N weights (the key once synchronised) and, for each of the B
// iterations of a bit package, what the learning step needs afterwards: the
// K*N inputs x_kj(t), the K hidden-unit signs y_k(t) and the output O(t). The
// B stored outputs form the party's own bit package. Storing the inputs of a
// whole package is what makes the bit package variant large (B*K*N bits).
//
// Write ports (all synchronous, one cycle):
//  - init_load: all weights from w_init (weight i in bits [i*WB +: WB],
//    two's complement), each clipped into [-L, L];
//  - w_we: ADDERS weights of chunk w_c of hidden unit w_k (lane p is input
//    j = w_c*ADDERS + p; lanes with j >= N are ignored);
//  - x_we: ADDERS input bits of iteration x_t, same lane layout;
//  - h_we: hidden signs and output of iteration h_t.
// Read ports are combinational: all weights, the packed key, the inputs,
// signs and output of iteration rd_t, and the packed own bit package.
// The paper names the weight and hidden-unit registers; the input storage
// follows its remark on area; the layout is this design's.
module tpm_regbank
  import tpm_pkg::*;
#(
  parameter int unsigned K      = K_DEF,
  parameter int unsigned N      = N_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned WB     = WB_DEF,
  parameter int unsigned ADDERS = ADDERS_DEF,
  parameter int unsigned B      = B_DEF,
  localparam int unsigned C     = chunks(N, ADDERS),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CW    = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned TW    = (B > 1) ? $clog2(B) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init_load,
  input  logic [K*N*WB-1:0]    w_init,
  input  logic                 w_we,
  input  logic [KW-1:0]        w_k,
  input  logic [CW-1:0]        w_c,
  input  logic signed [WB-1:0] w_new [ADDERS],
  input  logic                 x_we,
  input  logic [TW-1:0]        x_t,
  input  logic [KW-1:0]        x_k,
  input  logic [CW-1:0]        x_c,
  input  logic [ADDERS-1:0]    x_bits,
  input  logic                 h_we,
  input  logic [TW-1:0]        h_t,
  input  logic [K-1:0]         h_y,
  input  logic                 h_o,
  input  logic [TW-1:0]        rd_t,
  output logic signed [WB-1:0] w [K*N],
  output logic [K*N*WB-1:0]    key,
  output logic [K*N-1:0]       x_row,
  output logic [K-1:0]         y_rd,
  output logic                 o_rd,
  output logic [B-1:0]         pkg
);

  localparam logic signed [WB-1:0] LMAX = WB'(L);
  localparam logic signed [WB-1:0] LMIN = -LMAX;

  logic signed [WB-1:0] w_q   [K*N];
  logic [K*N-1:0]       x_mem [B];
  logic [K-1:0]         y_mem [B];
  logic [B-1:0]         o_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(K*N); i++) w_q[i] <= '0;
    end else if (init_load) begin
      for (int i = 0; i < int'(K*N); i++) begin
        if (signed'(w_init[i*WB +: WB]) > LMAX)      w_q[i] <= LMAX;
        else if (signed'(w_init[i*WB +: WB]) < LMIN) w_q[i] <= LMIN;
        else                                         w_q[i] <= w_init[i*WB +: WB];
      end
    end else if (w_we) begin
      for (int p = 0; p < int'(ADDERS); p++)
        if (int'(w_c) * ADDERS + p < N) w_q[int'(w_k) * N + int'(w_c) * ADDERS + p] <= w_new[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < int'(B); t++) begin
        x_mem[t] <= '0;
        y_mem[t] <= '0;
      end
      o_q <= '0;
    end else begin
      if (x_we) begin
        for (int p = 0; p < int'(ADDERS); p++)
          if (int'(x_c) * ADDERS + p < N) x_mem[x_t][int'(x_k) * N + int'(x_c) * ADDERS + p] <= x_bits[p];
      end
      if (h_we) begin
        y_mem[h_t] <= h_y;
        o_q[h_t]   <= h_o;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(K*N); i++) key[i*WB +: WB] = w_q[i];
  end

  assign w     = w_q;
  assign x_row = x_mem[rd_t];
  assign y_rd  = y_mem[rd_t];
  assign o_rd  = o_q[rd_t];
  assign pkg   = o_q;

endmodule
