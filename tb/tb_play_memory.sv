// Self-checking testbench for play_memory.
//
// The whole 8 kB memory is filled with random bytes through the host port.
// Then, for many random pattern lengths (8 bits up to the full 65536 bits,
// including the 40-bit length of the paper's example and lengths that are not
// multiples of 8 or 16), the memory is rewound, left idle for a random number
// of cycles (at least one), and popped every cycle. Each 8-bit output must equal
// pattern bits (8k .. 8k+7) mod len, bit 0 of byte 0 first, as computed
// from the testbench's own copy of the memory; underflow must never rise. It
// also checks the rate: one new 8-bit word on every cycle.
`timescale 1ns/1ps
module tb_play_memory;
  localparam int MEM_BYTES = 8192;
  localparam int AW = $clog2(MEM_BYTES);
  localparam int LW = $clog2(MEM_BYTES * 8) + 1;

  logic clk = 1'b0, wclk = 1'b0;
  logic rst, we, restart, pop, underflow;
  logic [AW-1:0] waddr;
  logic [7:0] wdata, dout;
  logic [LW-1:0] len;

  play_memory #(.MEM_BYTES(MEM_BYTES)) dut (.*);

  always #5 clk = ~clk;
  always #3 wclk = ~wclk;

  int checks = 0, failures = 0;
  logic [7:0] model [MEM_BYTES];

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit pbit(longint n);
    return model[n / 8][n % 8];
  endfunction

  initial begin
    int lens [$];
    rst = 1; we = 0; restart = 0; pop = 0; waddr = '0; wdata = '0; len = LW'(40);
    for (int a = 0; a < MEM_BYTES; a++) begin
      @(negedge wclk);
      we = 1; waddr = AW'(a); wdata = 8'($urandom); model[a] = wdata;
    end
    @(negedge wclk); we = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    lens = '{8, 9, 15, 16, 17, 23, 24, 31, 33, 40, 41, 47, 63, 64, 65, 100, 127, 129,
             1000, 4097, 65535, 65536};
    for (int k = 0; k < 40; k++) lens.push_back($urandom_range(8, 300));
    foreach (lens[j]) begin
      longint pos;
      int ncyc;
      len = LW'(lens[j]);
      @(negedge clk); restart = 1;
      @(negedge clk); restart = 0;
      repeat ($urandom_range(1, 6)) @(negedge clk);
      pos = 0;
      ncyc = (lens[j] > 2000) ? 600 : 3 * lens[j] / 8 + 30;
      pop = 1;
      for (int c = 0; c < ncyc; c++) begin
        logic [7:0] expw;
        #1;
        for (int i = 0; i < 8; i++) expw[i] = pbit((pos + i) % lens[j]);
        checks++;
        if (dout !== expw || underflow) begin
          failures++;
          if (failures < 10)
            $display("len %0d cycle %0d: got %h exp %h underflow %b", lens[j], c, dout, expw, underflow);
        end
        pos += 8;
        @(negedge clk);
      end
      pop = 0;
    end
    // a wrapped pattern of the longest length comes back to bit 0 after 8192 words
    len = LW'(65536);
    @(negedge clk); restart = 1;
    @(negedge clk); restart = 0;
    @(negedge clk); pop = 1;
    for (int c = 0; c < 8193; c++) begin
      #1;
      if (c == 0 || c == 8192) begin
        checks++;
        if (dout !== model[0]) begin failures++; $display("wrap at %0d: %h vs %h", c, dout, model[0]); end
      end
      @(negedge clk);
    end
    pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
