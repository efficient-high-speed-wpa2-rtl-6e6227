// delay_line - RAM based fixed delay: dout shows din as it was DELAY cycles
// earlier.
//
// A circular buffer of DELAY-1 words is written and read at the same address
// every cycle (read before write), and the read word is registered, which
// adds the last cycle. The memory has one write and one synchronous read port
// at a common address, the shape of an FPGA block RAM in read-first mode.
// The SHA1 pipeline uses it to carry the chaining state from its Buffer
// stage to its Add stage instead of dragging 160 bits through every round
// register, as the paper describes ("FIFO-based delay line utilizing the
// FPGAs Block-RAM resources"); the circular-buffer construction is this
// design's own. No reset: the contents are data only, and dout is
// meaningful DELAY cycles after the first write.
module delay_line #(
  parameter int unsigned WIDTH = 160,
  parameter int unsigned DELAY = 81   // >= 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  localparam int unsigned DEPTH = DELAY - 1;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    ptr;

  always_ff @(posedge clk) begin
    if (rst) ptr <= '0;
    else     ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    dout     <= mem[ptr];
    mem[ptr] <= din;
  end

  initial assert (DELAY >= 2) else $error("delay_line: DELAY must be at least 2");

endmodule
