`timescale 1ns/1ps
// tb_wpa2_bf_top_full - one complete working block through the design at
// its default parameters: 2 cores, the full 4096 PBKDF2 iterations,
// passwords over 'A'..'Z'.
//
// The handshake is made up at random and its MIC computed with the
// reference model for the password 120 places after the start password.
// The block holds 166 candidates, exactly one fill of both cores, so the
// hit is found by core 1 (slot 37). The testbench checks the result, the
// offset and the run time: the last core starts 1 + 83 cycles after start
// and needs (4*4096 + 13) * 83 cycles, 16,396 SHA1 iterations per candidate
// plus the compare pass. About 1.36 million cycles.
module tb_wpa2_bf_top_full;
  import wpa2_pkg::*;
  import wpa2_ref_pkg::*;

  localparam longint unsigned CORE_CYCLES = (4 * WPA2_PBKDF2_ITER + 13) * SHA1_STAGES;

  logic clk = 0, rst = 1;
  always #2.5 clk = ~clk;

  logic               start = 0;
  logic [63:0]        start_password = '0;
  logic [31:0]        n = '0;
  logic [255:0]       ssid = '0;
  logic [5:0]         ssid_len = '0;
  logic               hs_shift = 0;
  logic [HS_WORD-1:0] hs_word = '0;
  logic               idle, done, found;
  logic [31:0]        found_offset;

  wpa2_bf_top dut (.*);

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    hs_data_t        hs;
    bytes_t          ssid_b, eapol_b;
    logic [63:0]     spw = "KZBQWNYS";
    logic [255:0]    pmk;
    logic [127:0]    kck;
    longint unsigned t0, took;
    string           s = "UPC2046813";

    ssid_b = str_bytes(s);
    for (int i = 0; i < s.len(); i++) ssid[255 - 8*i -: 8] = s[i];
    ssid_len = 6'(s.len());

    hs = '0;
    hs.aa  = {$urandom, $urandom};
    hs.spa = {$urandom, $urandom};
    for (int i = 0; i < 8; i++) begin
      hs.anonce[32*i +: 32] = $urandom;
      hs.snonce[32*i +: 32] = $urandom;
    end
    hs.eapol_len = 16'd119;   // the longest frame that fits two SHA1 blocks
    for (int i = 0; i < 119; i++) begin
      automatic byte unsigned b = 8'($urandom);
      eapol_b.push_back(b);
      hs.eapol[8*EAPOL_BYTES - 1 - 8*i -: 8] = b;
    end
    pmk    = ref_pmk(pw64_bytes(pw_add(spw, 120, "A", "Z")), ssid_b, WPA2_PBKDF2_ITER);
    kck    = ref_kck(pmk, hs.aa, hs.spa, hs.anonce, hs.snonce);
    hs.mic = ref_mic(kck, eapol_b);

    repeat (3) @(posedge clk);
    rst <= 0;
    for (int w = HS_WORDS - 1; w >= 0; w--) begin
      hs_shift <= 1'b1;
      hs_word  <= hs[HS_WORD*w +: HS_WORD];
      @(posedge clk);
    end
    hs_shift <= 1'b0;
    @(posedge clk);
    start_password <= spw;
    n              <= 166;
    start          <= 1'b1;
    t0 = cyc;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    took = cyc - t0;
    $display("block done after %0d cycles: found=%0d offset=%0d", took, found, found_offset);
    check("found", 64'(found), 1);
    check("found_offset", 64'(found_offset), 120);
    checks++;
    if (took < 1 + SHA1_STAGES + CORE_CYCLES || took > 1 + SHA1_STAGES + CORE_CYCLES + 8) begin
      failures++;
      $display("FAIL run time %0d cycles, expected %0d..%0d", took,
               1 + SHA1_STAGES + CORE_CYCLES, 1 + SHA1_STAGES + CORE_CYCLES + 8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
