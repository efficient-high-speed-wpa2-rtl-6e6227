// slot_ram - simple dual-port memory with one write port and one registered
// read port, DEPTH words of WIDTH bits.
//
// Used by the brute force core to keep per-password values (password, HMAC
// inner and outer states, PBKDF2 accumulators, derived keys) in memory rather
// than in wide register buses, as the paper does with Block-RAMs. rdata shows
// mem[raddr] one cycle after raddr is presented; a read of the address being
// written returns the old word. No reset: the core writes every word before
// it reads it.
module slot_ram #(
  parameter int unsigned WIDTH = 160,
  parameter int unsigned DEPTH = 83,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
