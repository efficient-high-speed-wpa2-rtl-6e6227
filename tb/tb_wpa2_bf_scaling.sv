`timescale 1ns/1ps
// tb_wpa2_bf_scaling - the design with the core counts of the larger
// published builds, 8 cores (Artix-7 XC7A200T) and 16 cores (Kintex-7
// XC7K410T), at ITER = 1 to keep the run short. Each instance gets one
// working block of exactly NUM_CORES*83 candidates whose hit is the very
// last candidate, so every core is filled and the hit comes from the last
// slot of the last core. Checks the result and the completion time
// (1 + NUM_CORES*83 fill cycles, then (4*ITER+13)*83 for the last core).
module tb_wpa2_bf_scaling;
  import wpa2_pkg::*;
  import wpa2_ref_pkg::*;

  localparam int unsigned ITER = 1;
  localparam int NCFG = 2;
  localparam int NCORES [NCFG] = '{8, 16};

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic               hs_shift = 0;
  logic [HS_WORD-1:0] hs_word = '0;
  logic               start [NCFG];
  logic [31:0]        n [NCFG];
  logic               idle [NCFG], done [NCFG], found [NCFG];
  logic [31:0]        found_offset [NCFG];
  logic [255:0]       ssid = '0;
  logic [5:0]         ssid_len = '0;
  logic [63:0]        spw = "MNBVCXZA";

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    wpa2_bf_top #(.NUM_CORES(NCORES[g]), .ITER(ITER)) dut (
      .clk, .rst, .start(start[g]), .start_password(spw), .n(n[g]), .ssid, .ssid_len,
      .hs_shift, .hs_word, .idle(idle[g]), .done(done[g]), .found(found[g]),
      .found_offset(found_offset[g]));
  end

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    hs_data_t hs;
    bytes_t eapol_b;
    string s = "UPC7654321";
    longint unsigned t0;
    longint unsigned took [NCFG];
    bit seen [NCFG];
    for (int g = 0; g < NCFG; g++) begin start[g] = 0; n[g] = NCORES[g] * SHA1_STAGES; seen[g] = 0; end
    for (int i = 0; i < s.len(); i++) ssid[255 - 8*i -: 8] = s[i];
    ssid_len = 6'(s.len());
    // One handshake for both: its MIC belongs to offset 8*83-1; the 16-core
    // instance looks for the same password, which is not its last slot, so
    // it must report offset 663.
    hs = '0;
    hs.aa = {$urandom, $urandom}; hs.spa = {$urandom, $urandom};
    for (int i = 0; i < 8; i++) begin hs.anonce[32*i +: 32] = $urandom; hs.snonce[32*i +: 32] = $urandom; end
    hs.eapol_len = 16'd95;
    for (int i = 0; i < 95; i++) begin
      automatic byte unsigned b = 8'($urandom);
      eapol_b.push_back(b);
      hs.eapol[8*EAPOL_BYTES - 1 - 8*i -: 8] = b;
    end
    hs.mic = ref_mic(ref_kck(ref_pmk(pw64_bytes(pw_add(spw, 8 * SHA1_STAGES - 1, "A", "Z")),
                                     str_bytes(s), ITER),
                             hs.aa, hs.spa, hs.anonce, hs.snonce), eapol_b);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int w = HS_WORDS - 1; w >= 0; w--) begin
      hs_shift <= 1; hs_word <= hs[HS_WORD*w +: HS_WORD]; @(posedge clk);
    end
    hs_shift <= 0;
    @(posedge clk);
    for (int g = 0; g < NCFG; g++) start[g] <= 1;
    t0 = cyc;
    @(posedge clk);
    for (int g = 0; g < NCFG; g++) start[g] <= 0;
    while (!(seen[0] && seen[1])) begin
      @(posedge clk);
      for (int g = 0; g < NCFG; g++)
        if (done[g] && !seen[g]) begin
          seen[g] = 1; took[g] = cyc - t0;
          check($sformatf("%0d cores: found", NCORES[g]), found[g], 1);
          check($sformatf("%0d cores: offset", NCORES[g]), found_offset[g], 8 * SHA1_STAGES - 1);
        end
    end
    for (int g = 0; g < NCFG; g++) begin
      automatic longint unsigned exp = 1 + NCORES[g] * SHA1_STAGES + (4 * ITER + 13) * SHA1_STAGES - SHA1_STAGES;
      checks++;
      if (took[g] < exp || took[g] > exp + 8) begin
        failures++;
        $display("FAIL %0d cores took %0d cycles, expected %0d..%0d", NCORES[g], took[g], exp, exp + 8);
      end
    end
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
