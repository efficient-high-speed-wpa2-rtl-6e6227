`timescale 1ns/1ps
// tb_sha1_pipeline - streams one random (state, block) pair per cycle
// into the SHA1 pipeline, with gaps in in_valid, and checks that every
// result equals the reference compression function and arrives exactly 83
// cycles after its input. The first input is the padded block of "abc"
// from the SHA1 IV, whose digest is the published FIPS 180 value.
module tb_sha1_pipeline;
  import wpa2_pkg::*;
  import wpa2_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        in_valid = 0, out_valid;
  sha1_state_t in_state = '0, out_digest;
  sha1_block_t in_block = '0;

  sha1_pipeline dut (.*);

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  typedef struct { longint unsigned t; logic [159:0] exp; } exp_t;
  exp_t q [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && in_valid) q.push_back('{cyc + SHA1_STAGES, ref_compress(in_state, in_block)});
    if (!rst && out_valid) begin
      checks++;
      if (q.size() == 0 || q[0].t != cyc || q[0].exp !== out_digest) begin
        failures++;
        if (failures < 5) $display("FAIL at cycle %0d: got %h", cyc, out_digest);
      end
      if (q.size() != 0) void'(q.pop_front());
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    in_valid <= 1;
    in_state <= SHA1_IV;
    in_block <= {"abc", 8'h80, 416'd0, 64'd24};
    @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      in_valid <= ($urandom % 4) != 0;
      in_state <= {$urandom, $urandom, $urandom, $urandom, $urandom};
      for (int j = 0; j < 16; j++) in_block[32*j +: 32] <= $urandom;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (SHA1_STAGES + 2) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the digest of "abc"
  initial begin
    wait (out_valid);
    #1;
    checks++;
    if (out_digest !== 160'ha9993e364706816aba3e25717850c26c9cd0d89d) begin
      failures++;
      $display("FAIL sha1(abc) = %h", out_digest);
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
