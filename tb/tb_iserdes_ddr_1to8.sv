// Self-checking testbench for the iserdes_ddr_1to8 deserializer model.
//
// A random bit is presented for every edge of the 500 MHz clock (one per RF
// period at 1 GHz) and recorded. The reset is released just after a rising
// edge, as the design's reset scheme does, with the word clock made by
// clk_div4. Word j must then equal recorded bits 8j .. 8j+7 (bit 0 first) and
// must appear on the second word-clock rising edge after release plus j word
// periods, two clock cycles after its last bit was sampled.
`timescale 1ns/1ps
module tb_iserdes_ddr_1to8;
  logic clk = 1'b0;
  logic clkdiv, rst, d;
  logic [7:0] q;

  clk_div4 u_div (.clk_in(clk), .rst, .clk_out(clkdiv));
  iserdes_ddr_1to8 dut (.clk, .clkdiv, .rst, .d, .q);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  logic sent [0:8191];
  int edge_n = -1;   // index of the next edge to sample d

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // new data half an RF period after every edge once reset is gone
  always @(clk) begin
    if (edge_n >= 0) begin
      #0.5;
      d = 1'($urandom);
      sent[edge_n] = d;
      edge_n++;
    end
  end

  initial begin
    int j;
    rst = 1; d = 0;
    repeat (6) @(posedge clk);
    #0.1 rst = 0;
    #0.4 d = 1'($urandom); sent[0] = d; edge_n = 1;  // sampled by the next falling edge
    // word 0 appears at the second clkdiv rising edge
    @(posedge clkdiv);
    @(posedge clkdiv);
    for (j = 0; j < 500; j++) begin
      logic [7:0] expw;
      #0.1;
      for (int i = 0; i < 8; i++) expw[i] = sent[8 * j + i];
      checks++;
      if (q !== expw) begin
        failures++;
        if (failures < 10) $display("word %0d: got %b exp %b", j, q, expw);
      end
      @(posedge clkdiv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
