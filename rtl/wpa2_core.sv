// wpa2_core - one brute force core: the WPA2-Personal state machine with its
// password verifier around one SHA1 pipeline.
//
// The core holds SHA1_STAGES (83) password candidates, one per pipeline
// stage. They move in lock step: a "step" is 83 consecutive cycles in which
// slot 0..82 each feed one SHA1 block into the pipeline; because the
// pipeline latency is also 83 cycles, the result for slot s leaves the
// pipeline exactly when slot s is due to feed its next block, so each result
// is consumed and the next block issued in the same cycle.
//
// Steps (the states of the paper's state diagram), for each candidate P:
//   PMK  OSTATE  SHA1(IV, P^opad)             password taken from the generator
//        ISTATE  SHA1(IV, P^ipad)             password read back from memory
//        SALT    SHA1(istate, SSID||INT(c))   c = 1, later 2
//        FINAL   SHA1(ostate, digest)         gives U_i, T ^= U_i
//        ITER    SHA1(istate, U_i)            i = 2..4096, back to FINAL
//        after 4096 U's of c=1 -> SALT with c=2, after c=2 -> PTK
//        PMK = T1 || T2[159:64]
//   PTK  OSTATE, ISTATE with key PMK, SALT twice (the 100-byte PRF message
//        "Pairwise key expansion"||0||min/max(AA,SPA)||min/max(nonces)||0),
//        FINAL; KCK = first 128 bits of the result
//   MIC  OSTATE, ISTATE with key KCK, SALT twice (the EAPOL frame), FINAL
//   CHECK compare the first 128 bits with the observed MIC
// That is 2 + 2*(2*ITER) + 5 + 5 SHA1 iterations per candidate (16,396 for
// ITER = 4096) plus the CHECK pass. SHA1 padding of the salt, PRF and EAPOL
// blocks is formed here; the padded blocks are registered once per working
// block because their inputs do not change during it.
//
// Per-slot values live in slot_ram memories addressed by the slot number:
// passwords, istate, ostate, the PBKDF2 accumulator T, T1, and the key of the
// PTK/MIC phases (PMK, later KCK). As in the paper the password is only
// used twice and afterwards the candidate is known by its slot number; the
// core reports a hit as base_count + slot.
//
// Interface: `fill` is high for 83 consecutive cycles while the global state
// machine streams passwords in (pw, pw_valid, pw_count); the first fill
// cycle seen while idle is slot 0 and starts the computation. Slots whose
// pw_valid was low never report a hit. `busy` is high from the cycle after
// the first fill cycle until the core is done; `found`/`found_offset` hold
// the result of the last run until the next one starts. The handshake data
// (hs_data_t) is shifted in 16 bits per hs_shift cycle; ssid/ssid_len must be
// stable while the core is busy. The step sequence follows the paper; the
// memory organisation, the port protocol and the exact per-step
// bookkeeping are this design's own.
module wpa2_core
  import wpa2_pkg::*;
#(
  parameter int unsigned ITER = WPA2_PBKDF2_ITER  // PBKDF2 iterations (>= 1)
) (
  input  logic               clk,
  input  logic               rst,
  // password stream from the global state machine
  input  logic               fill,
  input  logic               pw_valid,
  input  logic [63:0]        pw,
  input  logic [31:0]        pw_count,
  // network data
  input  logic [255:0]       ssid,       // first byte in the top bits
  input  logic [5:0]         ssid_len,   // 0..32 bytes
  input  logic               hs_shift,
  input  logic [HS_WORD-1:0] hs_word,
  // result
  output logic               busy,
  output logic               found,
  output logic [31:0]        found_offset
);

  localparam int unsigned N  = SHA1_STAGES;
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned IW = $clog2(ITER + 1);

  // ---------------------------------------------------------------------
  // Handshake shift register and the padded message blocks
  // ---------------------------------------------------------------------
  hs_data_t hs;
  always_ff @(posedge clk) begin
    if (hs_shift) hs <= {hs[HS_BITS-HS_WORD-1:0], hs_word};
  end

  sha1_block_t salt_blk [2];   // SSID || INT(1) resp. INT(2), padded
  sha1_block_t prf_blk  [2];
  sha1_block_t eap_blk  [2];

  always_ff @(posedge clk) begin
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 56; i++) begin
        logic [7:0] b;
        if (i < int'(ssid_len))             b = ssid[255 - 8*i -: 8];
        else if (i == int'(ssid_len) + 3)   b = 8'(c + 1);
        else if (i == int'(ssid_len) + 4)   b = 8'h80;
        else                                b = 8'h00;
        salt_blk[c][511 - 8*i -: 8] <= b;
      end
      salt_blk[c][63:0] <= {55'd0, ssid_len + 6'd4, 3'd0} + 64'd512;  // (64+L+4)*8
    end
  end

  logic [47:0]  mac_lo, mac_hi;
  logic [255:0] non_lo, non_hi;
  logic [799:0] prf_msg;
  assign mac_lo  = (hs.aa < hs.spa) ? hs.aa : hs.spa;
  assign mac_hi  = (hs.aa < hs.spa) ? hs.spa : hs.aa;
  assign non_lo  = (hs.anonce < hs.snonce) ? hs.anonce : hs.snonce;
  assign non_hi  = (hs.anonce < hs.snonce) ? hs.snonce : hs.anonce;
  assign prf_msg = {PRF_LABEL, 8'h00, mac_lo, mac_hi, non_lo, non_hi, 8'h00};

  always_ff @(posedge clk) begin
    prf_blk[0] <= prf_msg[799:288];
    prf_blk[1] <= {prf_msg[287:0], 8'h80, 152'd0, 64'd1312};  // (64+100)*8
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 2 * 64; i++) begin
      logic [7:0] b;
      if (i < int'(hs.eapol_len))       b = hs.eapol[8*EAPOL_BYTES - 1 - 8*i -: 8];
      else if (i == int'(hs.eapol_len)) b = 8'h80;
      else                              b = 8'h00;
      if (i < 64) eap_blk[0][511 - 8*i -: 8]        <= b;
      else        eap_blk[1][511 - 8*(i - 64) -: 8] <= b;
    end
    eap_blk[1][63:0] <= {45'd0, hs.eapol_len, 3'd0} + 64'd512;  // (64+len)*8
  end

  // ---------------------------------------------------------------------
  // Sequencer
  // ---------------------------------------------------------------------
  core_step_t       step;
  logic [AW-1:0]    slot, slot_nx;
  logic [IW-1:0]    iter;        // index i of the U_i being computed
  logic             round2;      // PBKDF2 block 2 (INT(2))
  logic             blk1;        // second message block of PTK/MIC SALT
  logic             u_first;     // ... and it is U_1
  logic             last_slot;
  logic             start;
  logic [31:0]      base_count;

  assign last_slot = (slot == AW'(N - 1));
  assign slot_nx   = last_slot ? '0 : slot + 1'b1;
  assign start     = (step == ST_IDLE) && fill;

  always_ff @(posedge clk) begin
    if (rst) begin
      step    <= ST_IDLE;
      slot    <= '0;
      iter    <= '0;
      round2  <= 1'b0;
      blk1    <= 1'b0;
      u_first <= 1'b0;
    end else if (start) begin
      step    <= ST_PMK_OSTATE;
      slot    <= AW'(1);
      round2  <= 1'b0;
      blk1    <= 1'b0;
      iter    <= IW'(1);
    end else if (step != ST_IDLE) begin
      slot <= slot_nx;
      if (last_slot) begin
        u_first <= (iter == IW'(1));
        unique case (step)
          ST_PMK_OSTATE: step <= ST_PMK_ISTATE;
          ST_PMK_ISTATE: step <= ST_PMK_SALT;
          ST_PMK_SALT:   begin step <= ST_PMK_FINAL; end
          ST_PMK_FINAL: begin
            if (iter != IW'(ITER)) begin
              step <= ST_PMK_ITER;
              iter <= iter + 1'b1;
            end else if (!round2) begin
              step   <= ST_PMK_SALT;
              round2 <= 1'b1;
              iter   <= IW'(1);
            end else begin
              step <= ST_PTK_OSTATE;
            end
          end
          ST_PMK_ITER:   step <= ST_PMK_FINAL;
          ST_PTK_OSTATE: step <= ST_PTK_ISTATE;
          ST_PTK_ISTATE: step <= ST_PTK_SALT;
          ST_PTK_SALT: begin
            blk1 <= !blk1;
            if (blk1) step <= ST_PTK_FINAL;
          end
          ST_PTK_FINAL:  step <= ST_MIC_OSTATE;
          ST_MIC_OSTATE: step <= ST_MIC_ISTATE;
          ST_MIC_ISTATE: step <= ST_MIC_SALT;
          ST_MIC_SALT: begin
            blk1 <= !blk1;
            if (blk1) step <= ST_MIC_FINAL;
          end
          ST_MIC_FINAL:  step <= ST_CHECK;
          ST_CHECK:      step <= ST_IDLE;
          default:       step <= ST_IDLE;
        endcase
      end
    end
  end

  assign busy = (step != ST_IDLE);

  always_ff @(posedge clk) begin
    if (start) base_count <= pw_count;
  end

  // ---------------------------------------------------------------------
  // SHA1 pipeline and per-slot memories
  // ---------------------------------------------------------------------
  sha1_state_t po;         // pipeline output, belongs to `slot`
  logic        po_valid;
  logic        pi_valid;
  sha1_state_t pi_state;
  sha1_block_t pi_block;

  sha1_pipeline u_sha1 (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (pi_valid),
    .in_state  (pi_state),
    .in_block  (pi_block),
    .out_valid (po_valid),
    .out_digest(po)
  );

  logic [63:0]  pw_rd;
  logic         pwv_rd;
  sha1_state_t  ost_rd, ist_rd, t_rd, t1_rd;
  logic [255:0] key_rd;

  logic         pw_we, ost_we, ist_we, t_we, t1_we, key_we;
  sha1_state_t  t_new;
  logic [255:0] key_wd;

  slot_ram #(.WIDTH(65),  .DEPTH(N)) u_pw_ram  (.clk, .we(pw_we),  .waddr(slot),
    .wdata({pw_valid, pw}), .raddr(slot_nx), .rdata({pwv_rd, pw_rd}));
  slot_ram #(.WIDTH(160), .DEPTH(N)) u_ost_ram (.clk, .we(ost_we), .waddr(slot),
    .wdata(po), .raddr(slot_nx), .rdata(ost_rd));
  slot_ram #(.WIDTH(160), .DEPTH(N)) u_ist_ram (.clk, .we(ist_we), .waddr(slot),
    .wdata(po), .raddr(slot_nx), .rdata(ist_rd));
  slot_ram #(.WIDTH(160), .DEPTH(N)) u_t_ram   (.clk, .we(t_we),   .waddr(slot),
    .wdata(t_new), .raddr(slot_nx), .rdata(t_rd));
  slot_ram #(.WIDTH(160), .DEPTH(N)) u_t1_ram  (.clk, .we(t1_we),  .waddr(slot),
    .wdata(t_new), .raddr(slot_nx), .rdata(t1_rd));
  slot_ram #(.WIDTH(256), .DEPTH(N)) u_key_ram (.clk, .we(key_we), .waddr(slot),
    .wdata(key_wd), .raddr(slot_nx), .rdata(key_rd));

  // PBKDF2 accumulator: T = U_1 ^ U_2 ^ ... ^ U_i
  assign t_new = u_first ? po : (t_rd ^ po);

  // Input multiplexer and memory writes, one branch per step.
  always_comb begin
    pi_valid = 1'b1;
    pi_state = SHA1_IV;
    pi_block = '0;
    pw_we    = 1'b0;
    ost_we   = 1'b0;
    ist_we   = 1'b0;
    t_we     = 1'b0;
    t1_we    = 1'b0;
    key_we   = 1'b0;
    key_wd   = '0;
    unique case (step)
      ST_IDLE, ST_PMK_OSTATE: begin
        pi_valid = (step != ST_IDLE) || fill;
        pi_block = {pw, 448'd0} ^ HMAC_OPAD;
        pw_we    = (step != ST_IDLE) || fill;
      end
      ST_PMK_ISTATE: begin
        ost_we   = 1'b1;
        pi_block = {pw_rd, 448'd0} ^ HMAC_IPAD;
      end
      ST_PMK_SALT: begin
        // round 1: the istate arrives now; round 2: U_ITER of round 1
        ist_we   = !round2;
        t1_we    = round2;
        pi_state = round2 ? ist_rd : po;
        pi_block = salt_blk[round2];
      end
      ST_PMK_FINAL: begin
        pi_state = ost_rd;
        pi_block = pad_digest(po);
      end
      ST_PMK_ITER: begin
        t_we     = 1'b1;
        pi_state = ist_rd;
        pi_block = pad_digest(po);
      end
      ST_PTK_OSTATE: begin
        key_we   = 1'b1;
        key_wd   = {t1_rd, t_new[159:64]};           // the PMK
        pi_block = {t1_rd, t_new[159:64], 256'd0} ^ HMAC_OPAD;
      end
      ST_PTK_ISTATE: begin
        ost_we   = 1'b1;
        pi_block = {key_rd, 256'd0} ^ HMAC_IPAD;
      end
      ST_PTK_SALT: begin
        pi_state = po;    // istate, then the state after the first block
        pi_block = prf_blk[blk1];
      end
      ST_PTK_FINAL: begin
        pi_state = ost_rd;
        pi_block = pad_digest(po);
      end
      ST_MIC_OSTATE: begin
        key_we   = 1'b1;
        key_wd   = {po[159:32], 128'd0};              // the KCK
        pi_block = {po[159:32], 384'd0} ^ HMAC_OPAD;
      end
      ST_MIC_ISTATE: begin
        ost_we   = 1'b1;
        pi_block = {key_rd[255:128], 384'd0} ^ HMAC_IPAD;
      end
      ST_MIC_SALT: begin
        pi_state = po;
        pi_block = eap_blk[blk1];
      end
      ST_MIC_FINAL: begin
        pi_state = ost_rd;
        pi_block = pad_digest(po);
      end
      ST_CHECK: begin
        pi_valid = 1'b0;
      end
      default: pi_valid = 1'b0;
    endcase
  end

  // ---------------------------------------------------------------------
  // Password verifier
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      found        <= 1'b0;
      found_offset <= '0;
    end else if (start) begin
      found        <= 1'b0;
    end else if (step == ST_CHECK && pwv_rd && !found && po[159:32] == hs.mic) begin
      found        <= 1'b1;
      found_offset <= base_count + 32'(slot);
    end
  end

  // The EAPOL frame and its padding must fit the two message blocks.
  a_eapol_len : assert property (@(posedge clk) disable iff (rst)
    start |-> (int'(hs.eapol_len) <= EAPOL_MAX_LEN));

  // The pipeline result must be valid whenever it is consumed.
  a_po_valid : assert property (@(posedge clk) disable iff (rst)
    (step != ST_IDLE && step != ST_PMK_OSTATE) |-> po_valid);

endmodule
