// tpm_khbpc: Key Handshake and Bit Package Control.
//
// The controller of one party's key exchange service:
//  - Key handshake with an encryption unit. While 'req_key' is high the core
//    keeps producing keys. When an exchange has synchronised, the weights are
//    copied to the 'key' register and 'key_cha' (key changed) rises; it stays
//    high until 'key_com' (key committed) is seen. The core then waits for
//    'key_com' to fall and, if 'req_key' is still high, starts the next
//    exchange, so a new key is always under way while the last one is in use.
//    'key' holds the last key until the next one replaces it.
//  - Bit package exchange with the other party over a B-bit bus, with a
//    four-phase request/acknowledge handshake in each direction: the sender
//    holds 'bp_out' and raises 'bp_req_out' until 'bp_ack_in' rises, drops
//    its request and is done when the acknowledge falls; the receiver samples
//    'bp_in' when 'bp_req_in' is high, raises 'bp_ack_out' and drops it when
//    the request falls. Either side may be late; the partner just waits.
//  - Synchronisation criterion (Eq. 5): a counter of consecutive equal
//    outputs of the two parties. A package of all-equal bits adds B; a
//    package with a mismatch sets it to the number of equal bits after the
//    last mismatch (bit B-1 is the latest iteration). When it reaches T_MIN
//    after the learning step the key is taken.
//  - Watchdog: each exchanged package ticks the watchdog; if it has expired
//    without synchronisation, 'sync_error' rises and the exchange restarts
//    from new initial weights. 'sync_error' stays high until a key is
//    delivered.
// An exchange once started runs to its end even if 'req_key' falls, so that
// the partner is never left waiting for a package.
// The signal names and the roles of the handshakes follow the paper; their
// exact protocol, the counter and the restart policy are this design's.
module tpm_khbpc
  import tpm_pkg::*;
#(
  parameter int unsigned B     = B_DEF,
  parameter int unsigned T_MIN = T_MIN_DEF,
  parameter int unsigned KEYW  = K_DEF * N_DEF * WB_DEF,
  localparam int unsigned SCW  = $clog2(T_MIN + B + 1) + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // encryption unit side
  input  logic            req_key,
  output logic            key_cha,
  input  logic            key_com,
  output logic [KEYW-1:0] key,
  // other party
  output logic [B-1:0]    bp_out,
  output logic            bp_req_out,
  input  logic            bp_ack_in,
  input  logic [B-1:0]    bp_in,
  input  logic            bp_req_in,
  output logic            bp_ack_out,
  output logic            sync_error,
  // TPM unit
  output logic            tpm_init,
  output logic            tpm_next,
  output logic            tpm_learn,
  output logic [B-1:0]    partner,
  input  logic            pkg_valid,
  input  logic [B-1:0]    pkg,
  input  logic            learn_done,
  input  logic [KEYW-1:0] weights,
  // watchdog
  output logic            wd_clear,
  output logic            wd_tick,
  input  logic            wd_expired
);

  typedef enum logic [2:0] {K_IDLE, K_RUN, K_XCHG, K_LEARN, K_KEY, K_REL} state_e;
  typedef enum logic [1:0] {TX_IDLE, TX_REQ, TX_WAIT_LOW, TX_DONE} tx_e;

  state_e          state_q;
  tx_e             tx_q;
  logic            rx_en_q, rx_done_q, ack_q;
  logic [B-1:0]    own_q, partner_q;
  logic [SCW-1:0]  sync_cnt_q;
  logic [KEYW-1:0] key_q;
  logic            sync_err_q;
  logic [B-1:0]    eq;
  logic [SCW-1:0]  trailing_eq;
  logic            xchg_done;

  // Equal bits of the two packages, and how many equal bits end the package.
  always_comb begin
    logic run;
    eq          = ~(own_q ^ partner_q);
    trailing_eq = '0;
    run         = 1'b1;
    for (int i = int'(B) - 1; i >= 0; i--) begin
      run = run & eq[i];
      if (run) trailing_eq = trailing_eq + 1'b1;
    end
  end

  assign xchg_done = (tx_q == TX_DONE) && rx_done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= K_IDLE;
      tx_q       <= TX_IDLE;
      rx_en_q    <= 1'b0;
      rx_done_q  <= 1'b0;
      ack_q      <= 1'b0;
      own_q      <= '0;
      partner_q  <= '0;
      sync_cnt_q <= '0;
      key_q      <= '0;
      sync_err_q <= 1'b0;
    end else begin
      // ---- bit package receiver (four-phase, acknowledging side) ----
      if (rx_en_q && !ack_q && bp_req_in) begin
        partner_q <= bp_in;
        ack_q     <= 1'b1;
      end else if (ack_q && !bp_req_in) begin
        ack_q     <= 1'b0;
        rx_en_q   <= 1'b0;
        rx_done_q <= 1'b1;
      end
      // ---- bit package sender (four-phase, requesting side) ----
      unique case (tx_q)
        TX_REQ:      if (bp_ack_in)  tx_q <= TX_WAIT_LOW;
        TX_WAIT_LOW: if (!bp_ack_in) tx_q <= TX_DONE;
        default: ;
      endcase
      // ---- exchange control ----
      unique case (state_q)
        K_IDLE: begin
          if (req_key) begin
            sync_cnt_q <= '0;
            state_q    <= K_RUN;
          end
        end
        K_RUN: begin
          if (pkg_valid) begin
            own_q     <= pkg;
            tx_q      <= TX_REQ;
            rx_en_q   <= 1'b1;
            rx_done_q <= 1'b0;
            state_q   <= K_XCHG;
          end
        end
        K_XCHG: begin
          if (xchg_done) begin
            tx_q      <= TX_IDLE;
            rx_done_q <= 1'b0;
            if (&eq) sync_cnt_q <= (sync_cnt_q >= SCW'(T_MIN)) ? sync_cnt_q : sync_cnt_q + SCW'(B);
            else     sync_cnt_q <= trailing_eq;
            state_q <= K_LEARN;
          end
        end
        K_LEARN: begin
          if (learn_done) begin
            if (sync_cnt_q >= SCW'(T_MIN)) begin
              key_q      <= weights;
              sync_err_q <= 1'b0;
              state_q    <= K_KEY;
            end else begin
              if (wd_expired) begin
                sync_err_q <= 1'b1;
                sync_cnt_q <= '0;
              end
              state_q <= K_RUN;
            end
          end
        end
        K_KEY: if (key_com)  state_q <= K_REL;
        K_REL: if (!key_com) state_q <= K_IDLE;
        default: state_q <= K_IDLE;
      endcase
    end
  end

  // Commands to the TPM unit and the watchdog.
  assign tpm_init  = ((state_q == K_IDLE) && req_key) ||
                     ((state_q == K_LEARN) && learn_done && (sync_cnt_q < SCW'(T_MIN)) && wd_expired);
  assign tpm_next  = (state_q == K_LEARN) && learn_done && (sync_cnt_q < SCW'(T_MIN)) && !wd_expired;
  assign tpm_learn = (state_q == K_XCHG) && xchg_done;
  assign partner   = partner_q;
  assign wd_clear  = tpm_init;
  assign wd_tick   = tpm_learn;

  assign bp_out     = own_q;
  assign bp_req_out = (tx_q == TX_REQ);
  assign bp_ack_out = ack_q;
  assign key        = key_q;
  assign key_cha    = (state_q == K_KEY);
  assign sync_error = sync_err_q;

  // Handshake rules: a request is held, with stable data, until acknowledged;
  // a new key is announced until it is committed.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               bp_req_out && !bp_ack_in |=> bp_req_out && $stable(bp_out));
  a_key_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               key_cha && !key_com |=> key_cha && $stable(key));

endmodule
