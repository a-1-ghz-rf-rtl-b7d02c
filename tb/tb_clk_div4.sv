// Self-checking testbench for clk_div4.
//
// Checks, over several resets released at different times, that the output
// is the input divided by 4 with a 50 % duty cycle (two input cycles high, two
// low) and that after every reset it first rises on the second rising input
// edge, so its phase against the input is the same after each reset.
`timescale 1ns/1ps
module tb_clk_div4;
  logic clk_in = 1'b0;
  logic rst, clk_out;

  clk_div4 dut (.clk_in, .rst, .clk_out);

  always #1 clk_in = ~clk_in;

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 8; r++) begin
      rst = 1;
      repeat ($urandom_range(2, 9)) @(posedge clk_in);
      #0.1 rst = 0;
      checks++;
      if (clk_out !== 1'b0) begin failures++; $display("output high in reset"); end
      // expected: rising edges 1..8 after release give 0,1,1,0,0,1,1,0
      for (int k = 1; k <= 40; k++) begin
        logic expv;
        @(posedge clk_in); #0.1;
        expv = ((k % 4) == 2) || ((k % 4) == 3);
        checks++;
        if (clk_out !== expv) begin
          failures++;
          if (failures < 10) $display("reset %0d edge %0d: got %b exp %b", r, k, clk_out, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
