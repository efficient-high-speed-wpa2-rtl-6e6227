// bf_controller - the global brute force state machine.
//
// Keeps all brute force cores supplied with password candidates and watches
// for a hit, in the iterative way the paper describes: on `start` (accepted
// only while idle) it loads the password generator with the working block,
// then fills the cores one after the other, each for CORE_SLOTS cycles with
// the generator enabled, pauses the generator and waits until every started
// core has finished. If a core found the password, or the generator has
// produced all n passwords, it reports and returns to idle; otherwise it
// refills the cores. Cores are not started once the generator is done, so a
// short working block occupies only the cores it needs.
//
// Outputs: gen_load (one cycle, loads the generator), gen_enable, one fill
// strobe per core; `idle`; and a one-cycle `done` with `found` and
// `found_offset` (offset of the hit from the start password, lowest core
// index first if several cores hit). found/found_offset hold until the
// next start. Filling core by core and waiting for all follows the paper;
// the start/done handshake and the lowest-index priority are this design's
// choices.
module bf_controller #(
  parameter int unsigned NUM_CORES  = 2,
  parameter int unsigned CORE_SLOTS = 83
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  output logic                 idle,
  output logic                 done,
  output logic                 found,
  output logic [31:0]          found_offset,
  // password generator
  output logic                 gen_load,
  output logic                 gen_enable,
  input  logic                 gen_done,
  // cores
  output logic [NUM_CORES-1:0] core_fill,
  input  logic [NUM_CORES-1:0] core_busy,
  input  logic [NUM_CORES-1:0] core_found,
  input  logic [31:0]          core_offset [NUM_CORES]
);

  localparam int unsigned CW = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;
  localparam int unsigned SW = $clog2(CORE_SLOTS);

  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_FILL, C_WAIT, C_CHECK} ctl_state_t;

  ctl_state_t           state;
  logic [CW-1:0]        core;
  logic [SW-1:0]        cnt;
  logic [NUM_CORES-1:0] started;

  logic                 any_found;
  logic [31:0]          hit_offset;

  always_comb begin
    any_found  = 1'b0;
    hit_offset = '0;
    for (int i = NUM_CORES - 1; i >= 0; i--) begin
      if (started[i] && core_found[i]) begin
        any_found  = 1'b1;
        hit_offset = core_offset[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state        <= C_IDLE;
      core         <= '0;
      cnt          <= '0;
      started      <= '0;
      found        <= 1'b0;
      found_offset <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (start) begin
          state <= C_LOAD;
          found <= 1'b0;
        end
        C_LOAD: begin
          state   <= C_FILL;
          core    <= '0;
          cnt     <= '0;
          started <= '0;
        end
        C_FILL: begin
          if (cnt == '0 && gen_done) begin
            state <= C_WAIT;           // nothing left for this core
          end else begin
            if (cnt == '0) started[core] <= 1'b1;
            if (cnt == SW'(CORE_SLOTS - 1)) begin
              cnt <= '0;
              if (core == CW'(NUM_CORES - 1)) state <= C_WAIT;
              else                            core  <= core + 1'b1;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
        end
        C_WAIT: if ((core_busy & started) == '0) state <= C_CHECK;
        C_CHECK: begin
          if (any_found || gen_done) begin
            state        <= C_IDLE;
            done         <= 1'b1;
            found        <= any_found;
            found_offset <= hit_offset;
          end else begin
            state   <= C_FILL;
            core    <= '0;
            cnt     <= '0;
            started <= '0;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  logic filling;
  assign filling    = (state == C_FILL) && !(cnt == '0 && gen_done);
  assign gen_load   = (state == C_LOAD);
  assign gen_enable = filling;
  assign idle       = (state == C_IDLE);

  always_comb begin
    core_fill = '0;
    if (filling) core_fill[core] = 1'b1;
  end

  a_one_fill : assert property (@(posedge clk) disable iff (rst) $onehot0(core_fill));

endmodule
