// tpm_control: TPM control finite state machine.
//
// Sequences one party's TPM through the bit package protocol:
//  1. 'init' (a new key exchange): load the secret initial weights into the
//     register bank, and on the first exchange after reset also load the
//     common seed into the CRC generator; then compute a package.
//     'next' computes a further package with the current weights.
//  2. Compute B outputs one after another with the parity computation unit,
//     storing the signs and output of iteration t at index t. The weights
//     stay fixed for the whole package.
//  3. Present the package ('pkg_valid', level) until 'learn' delivers the
//     partner's package 'partner' (bit t = partner output of iteration t).
//  4. For t = 0 .. B-1: if the own and partner outputs agree, run one
//     learning step in the weight adjustment unit; otherwise skip it.
//  5. Pulse 'learn_done' and wait for 'init' or 'next' (accepted already in
//     the cycle of the pulse).
// Timing: a package takes B*(K*C+1) cycles to compute (C = ceil(N/ADDERS));
// learning takes 1 cycle per disagreeing iteration and one weight
// adjustment step plus 1 cycle per agreeing one.
// The paper describes this unit only as a simple FSM for initialisation and
// learning; the states and the handshake with the controller are this
// design's choice.
module tpm_control
  import tpm_pkg::*;
#(
  parameter int unsigned B  = B_DEF,
  localparam int unsigned TW = (B > 1) ? $clog2(B) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          next,
  input  logic          learn,
  input  logic [B-1:0]  partner,
  output logic          crc_load,
  output logic          init_load,
  output logic          par_start,
  input  logic          par_done,
  output logic          h_we,
  output logic [TW-1:0] t,
  input  logic          o_rd,
  output logic          wa_start,
  input  logic          wa_done,
  output logic          pkg_valid,
  output logic          learn_done,
  output logic          busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_COMP_START, S_COMP_WAIT, S_PKG, S_LEARN_CHECK, S_LEARN_WAIT, S_DONE
  } state_e;

  state_e        state_q, state_d;
  logic [TW-1:0] t_q, t_d;
  logic [B-1:0]  partner_q;
  logic          seeded_q;
  logic          last_t;

  assign last_t = (t_q == TW'(B - 1));

  always_comb begin
    state_d    = state_q;
    t_d        = t_q;
    crc_load   = 1'b0;
    init_load  = 1'b0;
    par_start  = 1'b0;
    h_we       = 1'b0;
    wa_start   = 1'b0;
    learn_done = 1'b0;
    unique case (state_q)
      S_IDLE, S_DONE: begin
        // S_DONE announces the end of learning and already accepts the
        // next command, so the controller can answer 'learn_done' at once.
        learn_done = (state_q == S_DONE);
        state_d    = S_IDLE;
        if (init) begin
          init_load = 1'b1;
          crc_load  = !seeded_q;
          t_d       = '0;
          state_d   = S_COMP_START;
        end else if (next) begin
          t_d     = '0;
          state_d = S_COMP_START;
        end
      end
      S_COMP_START: begin
        par_start = 1'b1;
        state_d   = S_COMP_WAIT;
      end
      S_COMP_WAIT: begin
        if (par_done) begin
          h_we = 1'b1;
          if (last_t) begin
            t_d     = '0;
            state_d = S_PKG;
          end else begin
            t_d       = t_q + 1'b1;
            par_start = 1'b1;
          end
        end
      end
      S_PKG: begin
        if (learn) begin
          t_d     = '0;
          state_d = S_LEARN_CHECK;
        end
      end
      S_LEARN_CHECK: begin
        if (o_rd == partner_q[t_q]) begin
          wa_start = 1'b1;
          state_d  = S_LEARN_WAIT;
        end else if (last_t) begin
          state_d = S_DONE;
        end else begin
          t_d = t_q + 1'b1;
        end
      end
      S_LEARN_WAIT: begin
        if (wa_done) begin
          if (last_t) begin
            state_d = S_DONE;
          end else begin
            t_d     = t_q + 1'b1;
            state_d = S_LEARN_CHECK;
          end
        end
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      t_q       <= '0;
      partner_q <= '0;
      seeded_q  <= 1'b0;
    end else begin
      state_q <= state_d;
      t_q     <= t_d;
      if (state_q == S_PKG && learn) partner_q <= partner;
      if (crc_load) seeded_q <= 1'b1;
    end
  end

  assign t         = t_q;
  assign pkg_valid = (state_q == S_PKG);
  assign busy      = (state_q != S_IDLE);

endmodule
