`timescale 1ns/1ps
// tb_delay_line - feeds random words into the delay line at its default
// size (160 bits, 81 cycles) and checks that every word comes out exactly
// DELAY cycles after it went in: a word presented in cycle c is on dout in
// cycle c + DELAY, i.e. DELAY-1 clock edges after the edge that took it.
module tb_delay_line;
  localparam int W = 160, D = 81;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [W-1:0] din, dout;
  logic [W-1:0] hist [$];

  delay_line #(.WIDTH(W), .DELAY(D)) dut (.clk, .rst, .din, .dout);

  int checks = 0, failures = 0;

  initial begin
    din = '0;
    @(posedge clk); rst <= 0;
    for (int c = 0; c < 600; c++) begin
      din <= {$urandom, $urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      hist.push_back(din);   // value sampled at this edge
      #1;
      if (hist.size() >= D) begin
        checks++;
        if (dout !== hist[hist.size() - D]) begin
          failures++;
          if (failures < 5) $display("FAIL cycle %0d", c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
