// tb_wpa2_bf_top - end-to-end test of the brute force design at a reduced
// PBKDF2 iteration count (ITER = 2) and otherwise default parameters.
//
// A random handshake is made up, the MIC for a chosen password is worked
// out with the behavioural reference model, and three working blocks are
// run: (A) a hit in the second fill round, reached after the password
// generator has carried through several characters, with a partly filled
// core; (B) a block that contains no hit and ends when the generator is
// exhausted; (C) a hit in the second core of the first round, whose
// completion time is checked against the core's step count. The testbench
// counts each of these mechanisms and fails if one never occurred.
`timescale 1ns/1ps
module tb_wpa2_bf_top;
  import wpa2_pkg::*;
  import wpa2_ref_pkg::*;

  localparam int unsigned ITER = 2;
  localparam int unsigned NC   = 2;
  localparam longint unsigned CORE_CYCLES = (4 * ITER + 13) * SHA1_STAGES;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic               start = 0;
  logic [63:0]        start_password = '0;
  logic [31:0]        n = '0;
  logic [255:0]       ssid = '0;
  logic [5:0]         ssid_len = '0;
  logic               hs_shift = 0;
  logic [HS_WORD-1:0] hs_word = '0;
  logic               idle, done, found;
  logic [31:0]        found_offset;

  wpa2_bf_top #(.ITER(ITER)) dut (.*);

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_fill [NC];
  int n_refill = 0, n_partial = 0, n_exhausted = 0, n_found = 0, n_carry = 0;
  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < NC; i++)
      if (dut.core_fill[i] && !dut.core_busy[i]) n_fill[i]++;
    if (dut.u_ctl.state == 3'd4 && !dut.u_ctl.any_found && !dut.gen_done) n_refill++;
    if (dut.core_fill != '0 && dut.gen_done) n_partial++;
    if (dut.gen_enable && !dut.gen_done && dut.u_pwgen.carry_in[5] && dut.u_pwgen.at_last[6])
      n_carry++;
    if (done && !found) n_exhausted++;
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  hs_data_t hs;
  bytes_t   ssid_b, eapol_b;

  task automatic load_handshake(logic [63:0] pw);
    logic [255:0] pmk;
    logic [127:0] kck;
    hs = '0;
    hs.aa  = {$urandom, $urandom};
    hs.spa = {$urandom, $urandom};
    for (int i = 0; i < 8; i++) begin
      hs.anonce[32*i +: 32] = $urandom;
      hs.snonce[32*i +: 32] = $urandom;
    end
    hs.eapol_len = 16'd99;
    eapol_b = {};
    for (int i = 0; i < 99; i++) begin
      byte unsigned b = 8'($urandom);
      eapol_b.push_back(b);
      hs.eapol[8*EAPOL_BYTES - 1 - 8*i -: 8] = b;
    end
    pmk    = ref_pmk(pw64_bytes(pw), ssid_b, ITER);
    kck    = ref_kck(pmk, hs.aa, hs.spa, hs.anonce, hs.snonce);
    hs.mic = ref_mic(kck, eapol_b);
    for (int w = HS_WORDS - 1; w >= 0; w--) begin
      hs_shift <= 1'b1;
      hs_word  <= hs[HS_WORD*w +: HS_WORD];
      @(posedge clk);
    end
    hs_shift <= 1'b0;
  endtask

  task automatic run_block(logic [63:0] spw, int unsigned cnt, int unsigned hit,
                           bit exp_found, output longint unsigned took);
    longint unsigned t0;
    load_handshake(pw_add(spw, hit, "A", "Z"));
    wait (idle);
    @(posedge clk);
    start_password <= spw;
    n              <= cnt;
    start          <= 1'b1;
    t0 = cyc;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    took = cyc - t0;
    $display("block done after %0d cycles: found=%0d offset=%0d", took, found, found_offset);
    if (found) n_found++;
    check("found", 64'(found), 64'(exp_found));
    if (exp_found) check("found_offset", 64'(found_offset), 64'(hit));
  endtask

  initial begin
    longint unsigned took;
    string s = "UPC1234567";
    for (int i = 0; i < NC; i++) n_fill[i] = 0;
    ssid_b = str_bytes(s);
    for (int i = 0; i < s.len(); i++) ssid[255 - 8*i -: 8] = s[i];
    ssid_len = 6'(s.len());
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);

    // (A) hit at offset 180 of 200: second fill round, core 0, slot 14
    run_block("AAAAAZZX", 200, 180, 1, took);
    // (B) no hit among 20 candidates (the MIC belongs to offset 25)
    run_block("QWERTYUI", 20, 25, 0, took);
    // (C) hit at offset 100 of 166: first round, core 1, slot 17
    run_block("ZZZZZZZA", 166, 100, 1, took);
    // core 1 starts 1 + 83 cycles after start and is busy CORE_CYCLES
    checks++;
    if (took < 1 + 2 * SHA1_STAGES + CORE_CYCLES - SHA1_STAGES ||
        took > 1 + 2 * SHA1_STAGES + CORE_CYCLES + 8) begin
      failures++;
      $display("FAIL block C took %0d cycles, expected about %0d", took,
               1 + SHA1_STAGES + CORE_CYCLES);
    end

    $display("mechanisms: fill core0=%0d core1=%0d refill=%0d partial-fill cycles=%0d carry=%0d found=%0d exhausted=%0d",
             n_fill[0], n_fill[1], n_refill, n_partial, n_carry, n_found, n_exhausted);
    checks++; if (n_fill[0] == 0 || n_fill[1] == 0) failures++;
    checks++; if (n_refill == 0)    failures++;
    checks++; if (n_partial == 0)   failures++;
    checks++; if (n_carry == 0)     failures++;
    checks++; if (n_found == 0)     failures++;
    checks++; if (n_exhausted == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
