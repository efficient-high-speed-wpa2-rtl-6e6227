// sha1_round - one SHA1 compression round as one pipeline stage.
//
// Stage T of the round pipeline takes the working variables A..E of round T,
// the pre-added term pre = E + W[T] + K[T] and a 16-word window of the
// message schedule holding W[T+1]..W[T+16]. In one clock it registers
//   A' = rol(A,5) + f_T(B,C,D) + pre      (two additions)
//   B' = A, C' = rol(B,30), D' = C, E' = D
//   pre' = D + W[T+1] + K[T+1]            (two additions, for round T+1)
// and shifts the window by one word, appending
//   W[T+17] = rol(W[T+14] ^ W[T+9] ^ W[T+3] ^ W[T+1], 1).
// Splitting the four additions of a SHA1 round over two stages this way
// follows the paper's pipeline optimisation (the E + f + K pre-computation);
// exactly which two sums go in which stage is this design's choice, as is
// expanding one schedule word per stage (the paper packs several expansion
// steps into one stage to help shift-register inference).
//
// E of the incoming variables is not read here: it already entered `pre` in
// the previous stage, which is the point of the split (lint reports those
// 32 input bits as unused).
//
// Latency one cycle, one round per cycle, no stall. `valid` only travels
// along (cleared by a synchronous rst); the stage computes every cycle.
module sha1_round
  import wpa2_pkg::*;
#(
  parameter int unsigned T = 0  // round index 0..79
) (
  input  logic            clk,
  input  logic            rst,       // clears the valid tag only
  input  logic            in_valid,
  input  sha1_vars_t      in_vars,
  input  word_t           in_pre,
  input  word_t [15:0]    in_win,    // in_win[0] = W[T+1]
  output logic            out_valid,
  output sha1_vars_t      out_vars,
  output word_t           out_pre,
  output word_t [15:0]    out_win
);

  word_t w_next;
  assign w_next = rol(in_win[13] ^ in_win[8] ^ in_win[2] ^ in_win[0], 1);

  always_ff @(posedge clk) begin
    out_valid  <= rst ? 1'b0 : in_valid;
    out_vars.a <= rol(in_vars.a, 5) + sha1_f(T, in_vars.b, in_vars.c, in_vars.d) + in_pre;
    out_vars.b <= in_vars.a;
    out_vars.c <= rol(in_vars.b, 30);
    out_vars.d <= in_vars.c;
    out_vars.e <= in_vars.d;
    out_pre    <= in_vars.d + in_win[0] + sha1_k((T + 1) % SHA1_ROUNDS);
    out_win    <= {w_next, in_win[15:1]};
  end

endmodule
