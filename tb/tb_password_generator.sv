`timescale 1ns/1ps
// tb_password_generator - loads working blocks into the password generator
// and checks, cycle by cycle under a random enable, the candidate sequence
// against an odometer model (wrap from 'Z' to 'A' with carry, several
// positions at once), the count and the done flag (after exactly n
// candidates, and at once for n = 0). One block uses a digits-only
// generator ('0'..'9') to check the character range parameters.
module tb_password_generator;
  import wpa2_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        reset = 1, enable = 0;
  logic [63:0] start_password = '0;
  logic [31:0] n = '0;
  logic [31:0] count, count_d;
  logic        done, done_d;
  logic [63:0] current_password, current_password_d;

  password_generator dut (.*);
  password_generator #(.CHAR_FIRST("0"), .CHAR_LAST("9")) dut_d (
    .clk, .reset, .enable, .start_password, .n, .count(count_d), .done(done_d),
    .current_password(current_password_d));

  int checks = 0, failures = 0;

  task automatic run(logic [63:0] spw, int unsigned cnt, bit digits);
    int unsigned k = 0;
    int guard = 0;
    start_password <= spw;
    n              <= cnt;
    reset          <= 1;
    enable         <= 0;
    @(posedge clk);
    reset <= 0;
    forever begin
      logic [63:0] pw;
      logic [31:0] c;
      logic        d;
      #1;
      pw = digits ? current_password_d : current_password;
      c  = digits ? count_d : count;
      d  = digits ? done_d : done;
      checks++;
      if (d !== (k == cnt) || c !== k ||
          (k < cnt && pw !== pw_add(spw, k, digits ? "0" : "A", digits ? "9" : "Z"))) begin
        failures++;
        if (failures < 6) $display("FAIL k=%0d pw=%s done=%0d count=%0d", k, pw, d, c);
      end
      if (d || ++guard > 5000) break;
      enable <= ($urandom % 3) != 0;
      @(posedge clk);
      if (enable) k++;
    end
    enable <= 0;
  endtask

  initial begin
    @(posedge clk);
    run("AAAAAAZX", 40, 0);     // single carries
    run("AAZZZZZY", 5, 0);      // carry through five positions
    run("QWERTYUI", 0, 0);      // empty block
    run("ZZZZZZZZ", 3, 0);      // wraps all positions
    run("00000988", 30, 1);     // digits
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
