// tpm_watchdog: watchdog timer of the key exchange.
//
// The number of iterations two TPMs need to synchronise is a random variable,
// so an exchange that has not synchronised after a programmable number of
// iterations is declared failed. The counter is cleared at the start of each
// exchange and advanced by B (one bit package) on each 'tick'; it saturates.
// 'expired' is high while the count has reached 'limit'; a limit of 0
// disables the watchdog.
// Timing: 'expired' reflects a tick or clear from the previous cycle.
// The supervision and the programmable limit follow the paper; counting in
// iterations and the disable value are this design's choices.
module tpm_watchdog
  import tpm_pkg::*;
#(
  parameter int unsigned WD_W = WD_W_DEF,
  parameter int unsigned B    = B_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            tick,
  input  logic [WD_W-1:0] limit,
  output logic            expired
);

  logic [WD_W:0] cnt_q, cnt_inc;

  assign cnt_inc = cnt_q + (WD_W+1)'(B);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cnt_q <= '0;
    else if (clear) cnt_q <= '0;
    else if (tick)  cnt_q <= cnt_inc[WD_W] ? {1'b1, {WD_W{1'b0}}} : cnt_inc;
  end

  assign expired = (limit != '0) && (cnt_q >= {1'b0, limit});

endmodule
