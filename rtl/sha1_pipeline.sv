// sha1_pipeline - fully pipelined SHA1 compression function, one block per
// clock, 83 stages.
//
// Computes out_digest = in_state + SHA1-compress(in_state, in_block), i.e.
// one SHA1 iteration on a 512-bit block starting from a 160-bit chaining
// state (the SHA1 IV or a cached HMAC state), including the final addition.
// Stages, in the order of the paper's pipeline figure:
//   1      Buffer   - registers the inputs so that the caller's input
//                     multiplexers do not add to the first round's path
//   2      Initiate - loads A..E, pre-adds E + W0 + K0 and expands W16
//   3..82  80 rounds (sha1_round)
//   83     Add      - adds the chaining state to A..E
// The chaining state reaches the Add stage through a RAM delay line
// (delay_line) tapped after the Buffer stage, as in the figure.
//
// Timing: inputs presented in cycle c appear on out_digest/out_valid in
// cycle c+83 (SHA1_STAGES). No stall, no reset of the datapath; only out_valid
// is meaningful after reset.
module sha1_pipeline
  import wpa2_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  sha1_state_t in_state,
  input  sha1_block_t in_block,
  output logic        out_valid,
  output sha1_state_t out_digest
);

  // ---- Buffer stage ----
  logic        buf_valid;
  sha1_state_t buf_state;
  sha1_block_t buf_block;

  always_ff @(posedge clk) begin
    if (rst) buf_valid <= 1'b0;
    else     buf_valid <= in_valid;
    buf_state <= in_state;
    buf_block <= in_block;
  end

  // ---- Initiate stage ----
  word_t [15:0] m;   // m[0] = W0
  always_comb begin
    for (int i = 0; i < 16; i++) m[i] = buf_block[511 - 32*i -: 32];
  end

  logic         v   [SHA1_ROUNDS+1];
  sha1_vars_t   var_q [SHA1_ROUNDS+1];
  word_t        pre [SHA1_ROUNDS+1];
  word_t [15:0] win [SHA1_ROUNDS+1];

  always_ff @(posedge clk) begin
    if (rst) v[0] <= 1'b0;
    else     v[0] <= buf_valid;
    var_q[0] <= buf_state;
    pre[0]   <= buf_state[31:0] + m[0] + sha1_k(0);
    win[0]   <= {rol(m[13] ^ m[8] ^ m[2] ^ m[0], 1), m[15:1]};
  end

  // ---- 80 round stages ----
  for (genvar t = 0; t < SHA1_ROUNDS; t++) begin : g_round
    sha1_round #(.T(t)) u_round (
      .clk      (clk),
      .rst      (rst),
      .in_valid (v[t]),
      .in_vars  (var_q[t]),
      .in_pre   (pre[t]),
      .in_win   (win[t]),
      .out_valid(v[t+1]),
      .out_vars (var_q[t+1]),
      .out_pre  (pre[t+1]),
      .out_win  (win[t+1])
    );
  end

  // ---- chaining state delay line: Buffer output -> Add input ----
  sha1_state_t chain;
  delay_line #(.WIDTH(160), .DELAY(SHA1_ROUNDS + 1)) u_chain (
    .clk (clk),
    .rst (rst),
    .din (buf_state),
    .dout(chain)
  );

  // ---- Add stage ----
  sha1_vars_t fin;
  assign fin = var_q[SHA1_ROUNDS];

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= v[SHA1_ROUNDS];
    out_digest <= {fin.a + chain[159:128], fin.b + chain[127:96], fin.c + chain[95:64],
                   fin.d + chain[63:32],   fin.e + chain[31:0]};
  end

endmodule
