// Self-checking testbench for the oserdes_ddr_8to1 serializer model.
//
// Random 8-bit words are offered on every word-clock cycle (clk_div4 output)
// after a reset released just after a rising edge of the 500 MHz clock. The
// word taken at word-clock rising edge j (j = 0 at the first one after release)
// must come out on q bit 0 first, one bit per clock edge, starting in the high
// phase after the (5 + 4j)-th rising edge counted from release: a fixed
// latency of three clock cycles from capture to first bit.
`timescale 1ns/1ps
module tb_oserdes_ddr_8to1;
  logic clk = 1'b0;
  logic clkdiv, rst, q;
  logic [7:0] d;

  clk_div4 u_div (.clk_in(clk), .rst, .clk_out(clkdiv));
  oserdes_ddr_8to1 dut (.clk, .clkdiv, .rst, .d, .q);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] words [0:1023];
  int nw = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a new word right after every word-clock rising edge; record what each edge takes
  always @(posedge clkdiv) begin
    if (!rst) begin
      words[nw] = d;
      nw++;
      #0.2 d = 8'($urandom);
    end
  end

  initial begin
    rst = 1; d = 8'($urandom);
    repeat (6) @(posedge clk);
    #0.1 rst = 0;
    repeat (5) @(posedge clk);   // rising edges 1..5 after release
    for (int b = 0; b < 8 * 400; b++) begin
      #0.5;
      checks++;
      if (q !== words[b / 8][b % 8]) begin
        failures++;
        if (failures < 10) $display("bit %0d: got %b exp %b w0=%b w1=%b", b, q, words[b / 8][b % 8], words[0], words[1]);
      end
      @(clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
