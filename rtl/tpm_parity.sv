// tpm_parity: Parity Computation unit of the TPM (Eq. 1 and Eq. 2).
//
// For one TPM output it forms alpha_k = sum_j w_kj * x_kj for each of the K
// hidden units, takes the party-specific sign y_k = sigma(alpha_k) and the
// parity O = prod_k y_k. Multiplication by x_kj = +-1 is only a conditional
// negation of the weight, so the datapath is ADDERS adder lanes shared in time
// (TDMA): hidden units are processed one after the other, and within a unit
// lane p adds input j = c*ADDERS + p in chunk c, c = 0 .. C-1 with
// C = ceil(N/ADDERS). Each lane keeps a partial sum; the last chunk of a unit
// adds the lanes' partial sums, takes the sign and clears the lanes.
// ADDERS=6 is the semi-parallel architecture, ADDERS=1 the serial one.
//
// Interface: 'party' is a static strap that selects the sign for alpha = 0
// when TIE_BY_PARTY is set (see tpm_pkg); otherwise alpha = 0 gives +1.
// A 'start' pulse begins an output. Every busy cycle the unit
// consumes ADDERS input bits from the CRC generator ('x_adv'), and reports
// with 'x_we', 'k_idx', 'c_idx' where the register bank must store them for
// the learning step; lanes whose j >= N ignore their bit.
// Timing: 'done' pulses K*C cycles after 'start', with 'y' and 'o' valid
// from then until the next 'start'.
// The sign rule for alpha = 0 is a parameter: by default both parties use
// +1, so that equal weights stay equal; TIE_BY_PARTY=1 gives the printed
// party-specific rule (+1 for party A, -1 for party B). The lane schedule
// and the partial-sum layout are this design's.
module tpm_parity
  import tpm_pkg::*;
#(
  parameter int unsigned K      = K_DEF,
  parameter int unsigned N      = N_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned WB     = WB_DEF,
  parameter int unsigned ADDERS = ADDERS_DEF,
  parameter bit          TIE_BY_PARTY = TIE_BY_PARTY_DEF,
  localparam int unsigned C     = chunks(N, ADDERS),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CW    = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned SW    = sum_width(N, L)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  party_e               party,
  input  logic                 start,
  input  logic signed [WB-1:0] w [K*N],
  input  logic [ADDERS-1:0]    x_bits,
  output logic                 x_adv,
  output logic                 x_we,
  output logic [KW-1:0]        k_idx,
  output logic [CW-1:0]        c_idx,
  output logic                 busy,
  output logic                 done,
  output logic [K-1:0]         y,
  output logic                 o
);

  logic                 busy_q;
  logic [KW-1:0]        k_q;
  logic [CW-1:0]        c_q;
  logic signed [SW-1:0] acc_q [ADDERS];
  logic signed [SW-1:0] lane_sum [ADDERS];
  logic signed [SW-1:0] alpha;
  logic                 last_chunk, last_unit, sigma;
  logic [K-1:0]         y_q;

  assign last_chunk = (c_q == CW'(C - 1));
  assign last_unit  = (k_q == KW'(K - 1));

  // Lane adders: partial sum plus +-w for the lane's input.
  always_comb begin
    for (int p = 0; p < int'(ADDERS); p++) begin
      int unsigned j;
      logic signed [SW-1:0] wv;
      j  = int'(c_q) * ADDERS + p;
      wv = '0;
      if (j < N) wv = SW'(w[int'(k_q) * N + j]);
      lane_sum[p] = acc_q[p] + (x_bits[p] ? wv : -wv);
    end
    alpha = '0;
    for (int p = 0; p < int'(ADDERS); p++) alpha += lane_sum[p];
    // Eq. 2: the party-specific sign.
    if (alpha > 0)      sigma = 1'b1;
    else if (alpha < 0) sigma = 1'b0;
    else                sigma = TIE_BY_PARTY ? (party == PARTY_A) : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      k_q    <= '0;
      c_q    <= '0;
      y_q    <= '0;
      done   <= 1'b0;
      for (int p = 0; p < int'(ADDERS); p++) acc_q[p] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy_q) begin
        busy_q <= 1'b1;
        k_q    <= '0;
        c_q    <= '0;
        for (int p = 0; p < int'(ADDERS); p++) acc_q[p] <= '0;
      end else if (busy_q) begin
        if (last_chunk) begin
          y_q[k_q] <= sigma;
          c_q      <= '0;
          for (int p = 0; p < int'(ADDERS); p++) acc_q[p] <= '0;
          if (last_unit) begin
            busy_q <= 1'b0;
            done   <= 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end else begin
          c_q <= c_q + 1'b1;
          for (int p = 0; p < int'(ADDERS); p++) acc_q[p] <= lane_sum[p];
        end
      end
    end
  end

  assign busy  = busy_q;
  assign x_adv = busy_q;
  assign x_we  = busy_q;
  assign k_idx = k_q;
  assign c_idx = c_q;
  assign y     = y_q;
  // O = prod_k y_k: +1 when the number of -1 signs is even.
  assign o     = ~(^(~y_q));

endmodule
