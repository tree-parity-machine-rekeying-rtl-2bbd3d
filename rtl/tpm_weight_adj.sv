// tpm_weight_adj: Weight Adjustment unit of the TPM (Eq. 3 and Eq. 4).
//
// Applies one learning step of the Hebbian rule for one stored iteration t of
// a bit package: the weights of every hidden unit k with y_k(t) = O(t) move by
// O(t)*x_kj(t) and are clipped back into [-L, L] (reflection onto the boundary
// value). The caller starts a step only if both parties' outputs O^A(t) and
// O^B(t) agreed. ADDERS weights are updated per clock, on the same chunk
// schedule as the parity computation (input j = c*ADDERS + p on lane p).
//
// Interface: 'start' pulses with o, y, x_row valid and held for the step.
// Each cycle the unit reads w and, for a unit that learns, drives 'w_we' with
// the lane results 'w_new' for chunk 'c_idx' of unit 'k_idx' (lanes with
// j >= N are to be ignored by the register bank).
// Timing: a learning unit takes C = ceil(N/ADDERS) cycles, a unit that does
// not learn one cycle; 'done' pulses the cycle after the last one.
// The rule follows the paper; the chunked update is this design's choice.
module tpm_weight_adj
  import tpm_pkg::*;
#(
  parameter int unsigned K      = K_DEF,
  parameter int unsigned N      = N_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned WB     = WB_DEF,
  parameter int unsigned ADDERS = ADDERS_DEF,
  localparam int unsigned C     = chunks(N, ADDERS),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CW    = (C > 1) ? $clog2(C) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 o,
  input  logic [K-1:0]         y,
  input  logic [K*N-1:0]       x_row,
  input  logic signed [WB-1:0] w [K*N],
  output logic                 w_we,
  output logic [KW-1:0]        k_idx,
  output logic [CW-1:0]        c_idx,
  output logic signed [WB-1:0] w_new [ADDERS],
  output logic                 busy,
  output logic                 done
);

  localparam logic signed [WB:0] LMAX = (WB+1)'(L);
  localparam logic signed [WB:0] LMIN = -LMAX;

  logic          busy_q;
  logic [KW-1:0] k_q;
  logic [CW-1:0] c_q;
  logic          unit_learns, unit_end;

  assign unit_learns = (y[k_q] == o);
  assign unit_end    = !unit_learns || (c_q == CW'(C - 1));

  always_comb begin
    for (int p = 0; p < int'(ADDERS); p++) begin
      int unsigned j;
      logic signed [WB:0] wv, sum;
      j  = int'(c_q) * ADDERS + p;
      wv = '0;
      if (j < N) wv = (WB+1)'(w[int'(k_q) * N + j]);
      // O*x is +1 when x and O have the same sign.
      if (x_row[int'(k_q) * N + ((j < N) ? j : 0)] == o) sum = wv + (WB+1)'(1);
      else                                              sum = wv - (WB+1)'(1);
      if (sum > LMAX)       w_new[p] = LMAX[WB-1:0];
      else if (sum < -LMAX) w_new[p] = LMIN[WB-1:0];
      else                  w_new[p] = sum[WB-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      k_q    <= '0;
      c_q    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy_q) begin
        busy_q <= 1'b1;
        k_q    <= '0;
        c_q    <= '0;
      end else if (busy_q) begin
        if (unit_end) begin
          c_q <= '0;
          if (k_q == KW'(K - 1)) begin
            busy_q <= 1'b0;
            done   <= 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end else begin
          c_q <= c_q + 1'b1;
        end
      end
    end
  end

  assign busy  = busy_q;
  assign w_we  = busy_q && unit_learns;
  assign k_idx = k_q;
  assign c_idx = c_q;

endmodule
