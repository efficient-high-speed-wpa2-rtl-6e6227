`timescale 1ns/1ps
// tb_sha1_round - checks one pipelined SHA1 round stage for a round of each
// of the four f/K groups (T = 5, 27, 44, 71) against the round equations
// worked out here from random inputs, and checks the one-cycle latency.
module tb_sha1_round;
  import wpa2_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NT = 4;
  localparam int TS [NT] = '{5, 27, 44, 71};

  logic         iv [NT];
  sha1_vars_t   ivars [NT];
  word_t        ipre [NT];
  word_t [15:0] iwin [NT];
  logic         ov [NT];
  sha1_vars_t   ovars [NT];
  word_t        opre [NT];
  word_t [15:0] owin [NT];

  for (genvar g = 0; g < NT; g++) begin : g_dut
    sha1_round #(.T(TS[g])) dut (
      .clk(clk), .rst(1'b0), .in_valid(iv[g]), .in_vars(ivars[g]), .in_pre(ipre[g]), .in_win(iwin[g]),
      .out_valid(ov[g]), .out_vars(ovars[g]), .out_pre(opre[g]), .out_win(owin[g]));
  end

  int checks = 0, failures = 0;

  function automatic logic [31:0] rl(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  initial begin
    for (int it = 0; it < 200; it++) begin
      logic [31:0] ef, ek, a_exp, w17, pre_exp;
      for (int g = 0; g < NT; g++) begin
        iv[g]    = it[0];
        ivars[g] = {$urandom, $urandom, $urandom, $urandom, $urandom};
        ipre[g]  = $urandom;
        for (int i = 0; i < 16; i++) iwin[g][i] = $urandom;
      end
      @(posedge clk);
      #1;
      for (int g = 0; g < NT; g++) begin
        automatic int t = TS[g];
        automatic logic [31:0] b = ivars[g].b, c = ivars[g].c, d = ivars[g].d;
        case (t / 20)
          0: ef = (b & c) | (~b & d);
          1: ef = b ^ c ^ d;
          2: ef = (b & c) | (b & d) | (c & d);
          default: ef = b ^ c ^ d;
        endcase
        ek      = (t + 1 < 20) ? 32'h5a827999 : (t + 1 < 40) ? 32'h6ed9eba1 :
                  (t + 1 < 60) ? 32'h8f1bbcdc : 32'hca62c1d6;
        a_exp   = rl(ivars[g].a, 5) + ef + ipre[g];
        pre_exp = d + iwin[g][0] + ek;
        w17     = rl(iwin[g][13] ^ iwin[g][8] ^ iwin[g][2] ^ iwin[g][0], 1);
        checks++;
        if (ovars[g] !== {a_exp, ivars[g].a, rl(ivars[g].b, 30), ivars[g].c, ivars[g].d} ||
            opre[g] !== pre_exp || owin[g] !== {w17, iwin[g][15:1]} || ov[g] !== iv[g]) begin
          failures++;
          if (failures < 5) $display("FAIL T=%0d it=%0d", t, it);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
