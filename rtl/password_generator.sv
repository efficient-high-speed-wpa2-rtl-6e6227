// password_generator - counter that enumerates password candidates, one per
// enabled clock cycle.
//
// Ports as in the paper's block diagram: a synchronous `reset` loads a
// working block (start_password and the number n of passwords to produce);
// while `enable` is high and `done` is low, every clock moves
// current_password to the next candidate and count to the next offset.
// current_password is the candidate with offset `count` (0 = start_password)
// and is valid while done is low; done rises once n candidates have been
// handed out, i.e. when count == n.
//
// The password is PW_CHARS characters of 8 bits, first character in the top
// byte. It counts like an odometer whose least significant digit is the last
// character, over the character range CHAR_FIRST..CHAR_LAST (default 'A'..'Z',
// the uppercase-only default passwords of the paper's case study). As the
// paper describes, the carry is kept out of the increment path: each
// position keeps a registered "at last character" flag, the carry into a
// position is the AND of the flags to its right, and the wrap-to-first
// multiplexer is steered by that registered flag, so a clock cycle holds
// only one 8-bit increment and a mux per character.
// The start password must consist of characters from the range; the paper
// does not say what happens otherwise and this design does not check it.
module password_generator #(
  parameter int unsigned PW_CHARS   = 8,
  parameter logic [7:0]  CHAR_FIRST = 8'h41,  // 'A'
  parameter logic [7:0]  CHAR_LAST  = 8'h5a   // 'Z'
) (
  input  logic                  clk,
  input  logic                  reset,
  input  logic                  enable,
  input  logic [8*PW_CHARS-1:0] start_password,
  input  logic [31:0]           n,
  output logic [31:0]           count,
  output logic                  done,
  output logic [8*PW_CHARS-1:0] current_password
);

  logic [7:0]          ch      [PW_CHARS];   // ch[0] = first (most significant) character
  logic [PW_CHARS-1:0] at_last;              // registered: ch[i] == CHAR_LAST
  logic [PW_CHARS-1:0] carry_in;             // static carry into each position
  logic                step;

  assign step = enable && !done;

  // Carry into position i: every position to its right is at its last value.
  always_comb begin
    carry_in[PW_CHARS-1] = 1'b1;
    for (int i = PW_CHARS - 2; i >= 0; i--) carry_in[i] = carry_in[i+1] & at_last[i+1];
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      for (int i = 0; i < PW_CHARS; i++) begin
        ch[i]      <= start_password[8*(PW_CHARS-1-i) +: 8];
        at_last[i] <= (start_password[8*(PW_CHARS-1-i) +: 8] == CHAR_LAST);
      end
      count <= '0;
      done  <= (n == 32'd0);
    end else if (step) begin
      for (int i = 0; i < PW_CHARS; i++) begin
        if (carry_in[i]) begin
          ch[i]      <= at_last[i] ? CHAR_FIRST : ch[i] + 8'd1;
          at_last[i] <= at_last[i] ? (CHAR_FIRST == CHAR_LAST) : (ch[i] + 8'd1 == CHAR_LAST);
        end
      end
      count <= count + 32'd1;
      done  <= (count + 32'd1 == n);
    end
  end

  always_comb begin
    for (int i = 0; i < PW_CHARS; i++) current_password[8*(PW_CHARS-1-i) +: 8] = ch[i];
  end

endmodule
