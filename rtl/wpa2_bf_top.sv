// wpa2_bf_top - WPA2-Personal brute force FPGA design: one shared password
// generator and global state machine driving NUM_CORES brute force cores.
//
// A working block is handed over while `idle` is high by pulsing `start`
// with start_password, n (number of candidates), the SSID and its length on
// the inputs; they are registered at that edge. The remaining handshake
// data (MAC addresses, nonces, EAPOL frame, observed MIC; see hs_data_t)
// is shifted into every core over the narrow hs_word bus before `start`,
// 16 bits per hs_shift cycle, most significant word first, 111 words in
// all. When the block is finished `done` pulses for one cycle; `found`
// then tells whether a candidate's MIC matched and `found_offset` is that
// candidate's offset from start_password (the design reports an offset, not
// the password, as in the paper).
//
// Defaults follow the paper's Spartan-6 XC6SLX150T build, the device of its
// 36-FPGA cluster: 2 cores of 83 pipeline stages, 8-character passwords
// over 'A'..'Z'. One core evaluates 83 candidates per 16,397 pipeline
// passes, about 1.36 million cycles.
//
// Left out, as parts the paper does not design or describe closely enough:
// the host/microcontroller byte bus, the slow communication clock with its
// clock domain crossing, and the clock multiplier / temperature-driven clock
// scaling. The whole design runs in the single clock `clk`.
module wpa2_bf_top
  import wpa2_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 2,
  parameter int unsigned ITER       = WPA2_PBKDF2_ITER,
  parameter logic [7:0]  CHAR_FIRST = 8'h41,   // 'A'
  parameter logic [7:0]  CHAR_LAST  = 8'h5a    // 'Z'
) (
  input  logic               clk,
  input  logic               rst,
  // working block
  input  logic               start,
  input  logic [63:0]        start_password,
  input  logic [31:0]        n,
  input  logic [255:0]       ssid,
  input  logic [5:0]         ssid_len,
  // narrow handshake data bus
  input  logic               hs_shift,
  input  logic [HS_WORD-1:0] hs_word,
  // status and result
  output logic               idle,
  output logic               done,
  output logic               found,
  output logic [31:0]        found_offset
);

  // Working block registers
  logic [63:0]  wb_start_pw;
  logic [31:0]  wb_n;
  logic [255:0] wb_ssid;
  logic [5:0]   wb_ssid_len;

  always_ff @(posedge clk) begin
    if (rst) begin
      wb_start_pw <= '0;
      wb_n        <= '0;
      wb_ssid     <= '0;
      wb_ssid_len <= '0;
    end else if (start && idle) begin
      wb_start_pw <= start_password;
      wb_n        <= n;
      wb_ssid     <= ssid;
      wb_ssid_len <= ssid_len;
    end
  end

  // Password generator
  logic        gen_load, gen_enable, gen_done;
  logic [31:0] gen_count;
  logic [63:0] gen_pw;

  password_generator #(
    .PW_CHARS  (8),
    .CHAR_FIRST(CHAR_FIRST),
    .CHAR_LAST (CHAR_LAST)
  ) u_pwgen (
    .clk             (clk),
    .reset           (rst || gen_load),
    .enable          (gen_enable),
    .start_password  (wb_start_pw),
    .n               (wb_n),
    .count           (gen_count),
    .done            (gen_done),
    .current_password(gen_pw)
  );

  // Global brute force state machine
  logic [NUM_CORES-1:0] core_fill, core_busy, core_found;
  logic [31:0]          core_offset [NUM_CORES];

  bf_controller #(
    .NUM_CORES (NUM_CORES),
    .CORE_SLOTS(SHA1_STAGES)
  ) u_ctl (
    .clk         (clk),
    .rst         (rst),
    .start       (start),
    .idle        (idle),
    .done        (done),
    .found       (found),
    .found_offset(found_offset),
    .gen_load    (gen_load),
    .gen_enable  (gen_enable),
    .gen_done    (gen_done),
    .core_fill   (core_fill),
    .core_busy   (core_busy),
    .core_found  (core_found),
    .core_offset (core_offset)
  );

  // Brute force cores
  for (genvar i = 0; i < NUM_CORES; i++) begin : g_core
    wpa2_core #(.ITER(ITER)) u_core (
      .clk         (clk),
      .rst         (rst),
      .fill        (core_fill[i]),
      .pw_valid    (!gen_done),
      .pw          (gen_pw),
      .pw_count    (gen_count),
      .ssid        (wb_ssid),
      .ssid_len    (wb_ssid_len),
      .hs_shift    (hs_shift),
      .hs_word     (hs_word),
      .busy        (core_busy[i]),
      .found       (core_found[i]),
      .found_offset(core_offset[i])
    );
  end

endmodule
