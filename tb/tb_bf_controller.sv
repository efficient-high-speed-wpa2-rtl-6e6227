`timescale 1ns/1ps
// tb_bf_controller - the global state machine against small models of the
// password generator (counts enabled cycles up to n) and of two cores
// (busy for a fixed, core-specific time after their first fill cycle; they
// report a hit if the target offset was among their valid candidates).
// Checks: fills are one-hot, 83 cycles long, core 0 before core 1, the
// generator is enabled exactly while a core is filled, no core is filled
// while a started core is still busy, and each working block ends with the
// right found/offset (a hit in the third fill round; a block exhausted in
// the first round with core 1 partly filled; a block that fits in core 0
// only, leaving core 1 unused).
module tb_bf_controller;
  localparam int NC = 2, S = 83;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          start = 0, idle, done, found;
  logic [31:0]   found_offset;
  logic          gen_load, gen_enable, gen_done;
  logic [NC-1:0] core_fill, core_busy, core_found;
  logic [31:0]   core_offset [NC];

  bf_controller #(.NUM_CORES(NC), .CORE_SLOTS(S)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned n_blk, hit;

  // generator model
  int unsigned gcount;
  assign gen_done = (gcount >= n_blk);
  always @(posedge clk) begin
    if (gen_load) gcount <= 0;
    else if (gen_enable && !gen_done) gcount <= gcount + 1;
  end

  // core models
  int unsigned busy_left [NC], base [NC], slot [NC], nfill_cycles [NC];
  int          fills [NC];
  for (genvar i = 0; i < NC; i++) begin : g_core
    assign core_busy[i] = busy_left[i] != 0;
    always @(posedge clk) begin
      if (rst) begin
        busy_left[i] <= 0; core_found[i] <= 0; slot[i] <= 0;
      end else begin
        if (core_fill[i] && !core_busy[i]) begin
          busy_left[i]  <= 400 + 37 * i;
          base[i]       <= gcount;
          core_found[i] <= !gen_done && gcount == hit;
          core_offset[i] <= gcount;
          slot[i]       <= 1;
          fills[i]++;
        end else begin
          if (busy_left[i] != 0) busy_left[i] <= busy_left[i] - 1;
          if (core_fill[i]) begin
            if (!gen_done && gcount == hit) begin core_found[i] <= 1; core_offset[i] <= gcount; end
            slot[i] <= slot[i] + 1;
          end
        end
      end
    end
  end

  // protocol checks
  int run_len [NC];
  always @(posedge clk) if (!rst) begin
    checks++;
    if (!$onehot0(core_fill) || gen_enable !== (core_fill != 0)) begin
      failures++; $display("FAIL fill/enable mismatch");
    end
    for (int i = 0; i < NC; i++) begin
      if (core_fill[i]) begin
        run_len[i]++;
        if (core_busy[i] && run_len[i] == 1) begin failures++; $display("FAIL fill of busy core %0d", i); end
        if (i == 1 && run_len[0] != 0) begin failures++; $display("FAIL core 1 filled during core 0"); end
      end else if (run_len[i] != 0) begin
        checks++;
        if (run_len[i] != S) begin failures++; $display("FAIL core %0d fill lasted %0d", i, run_len[i]); end
        run_len[i] = 0;
      end
    end
  end

  task automatic block(int unsigned nn, int unsigned h, bit exp_found, int exp_fills0, int exp_fills1);
    int f0 = fills[0], f1 = fills[1];
    wait (idle);
    @(posedge clk);
    n_blk = nn; hit = h;
    start <= 1;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    #1;
    checks++;
    if (found !== exp_found || (exp_found && found_offset !== h)) begin
      failures++; $display("FAIL result found=%0d offset=%0d", found, found_offset);
    end
    checks++;
    if (fills[0] - f0 != exp_fills0 || fills[1] - f1 != exp_fills1) begin
      failures++; $display("FAIL fills %0d %0d", fills[0] - f0, fills[1] - f1);
    end
  endtask

  initial begin
    fills = '{0, 0}; run_len = '{0, 0}; n_blk = 0; hit = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    block(500, 400, 1, 3, 3);        // third round, core 0
    block(100, 1000, 0, 1, 1);       // exhausted, core 1 partly filled
    block(50, 7, 1, 1, 0);           // fits in core 0
    block(166, 165, 1, 1, 1);        // last slot of core 1
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
