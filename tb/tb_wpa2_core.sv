`timescale 1ns/1ps
// tb_wpa2_core - one brute force core at a reduced PBKDF2 iteration count
// (ITER = 3). The core is filled with 83 candidates, some marked invalid,
// and must find the one whose MIC matches (worked out with the reference
// model), report its offset, stay busy for exactly (4*ITER+13)*83 - 1
// cycles after the first fill cycle, and ignore a matching candidate in an
// invalid slot. A second run holds no match; a third checks a hit in the
// last slot with a different SSID length.
module tb_wpa2_core;
  import wpa2_pkg::*;
  import wpa2_ref_pkg::*;

  localparam int unsigned ITER = 3;
  localparam int unsigned N    = SHA1_STAGES;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic               fill = 0, pw_valid = 0;
  logic [63:0]        pw = '0;
  logic [31:0]        pw_count = '0;
  logic [255:0]       ssid = '0;
  logic [5:0]         ssid_len = '0;
  logic               hs_shift = 0;
  logic [HS_WORD-1:0] hs_word = '0;
  logic               busy, found;
  logic [31:0]        found_offset;

  wpa2_core #(.ITER(ITER)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Runs one batch. Slot i gets password pw_add(base_pw, i); the MIC is made
  // for slot `hit`; slots in `invalid` are marked invalid.
  task automatic run(string ssid_s, logic [63:0] base_pw, int hit, int bad_lo, int bad_hi,
                     bit exp_found, int exp_slot);
    hs_data_t hs;
    bytes_t   eapol_b;
    logic [255:0] pmk;
    logic [127:0] kck;
    int busy_cycles = 0;
    ssid = '0;
    for (int i = 0; i < ssid_s.len(); i++) ssid[255 - 8*i -: 8] = ssid_s[i];
    ssid_len = 6'(ssid_s.len());
    hs = '0;
    hs.aa = {$urandom, $urandom}; hs.spa = {$urandom, $urandom};
    for (int i = 0; i < 8; i++) begin hs.anonce[32*i +: 32] = $urandom; hs.snonce[32*i +: 32] = $urandom; end
    hs.eapol_len = 16'd64 + 16'($urandom % 56);
    for (int i = 0; i < int'(hs.eapol_len); i++) begin
      byte unsigned b = 8'($urandom);
      eapol_b.push_back(b);
      hs.eapol[8*EAPOL_BYTES - 1 - 8*i -: 8] = b;
    end
    pmk    = ref_pmk(pw64_bytes(pw_add(base_pw, hit, "A", "Z")), str_bytes(ssid_s), ITER);
    kck    = ref_kck(pmk, hs.aa, hs.spa, hs.anonce, hs.snonce);
    hs.mic = ref_mic(kck, eapol_b);
    for (int w = HS_WORDS - 1; w >= 0; w--) begin
      hs_shift <= 1; hs_word <= hs[HS_WORD*w +: HS_WORD]; @(posedge clk);
    end
    hs_shift <= 0;
    repeat (2) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      fill     <= 1;
      pw_valid <= !(i >= bad_lo && i <= bad_hi);
      pw       <= pw_add(base_pw, i, "A", "Z");
      pw_count <= 32'd5000 + 32'(i);
      @(posedge clk);
      #1;
      if (busy) busy_cycles++;
    end
    fill <= 0; pw_valid <= 0;
    while (busy) begin @(posedge clk); #1; if (busy) busy_cycles++; end
    // busy is sampled just after each edge
    check("busy cycles", busy_cycles, (4 * ITER + 13) * N - 1);
    check("found", found, exp_found);
    if (exp_found) check("found_offset", found_offset, 5000 + exp_slot);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    run("UPC1234567", "HELLOAAA", 40, 10, 20, 1, 40);              // hit in slot 40
    run("linksys", "HELLOAAA", 15, 10, 20, 0, 0);                  // match only in an invalid slot
    run("a-very-long-network-name-32-byte", "ABCDEFGH", 82, 0, -1, 1, 82);  // last slot, SSID of 32
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
