// Self-checking testbench for reset_sequencer.
//
// After each release of rst, div_reset must stay high for exactly
// DIV_RST_CYCLES clock cycles, io_reset for exactly IO_RST_CYCLES cycles, done
// must be the inverse of io_reset, and all three must stay settled afterwards.
// A second reset in the middle of a sequence must restart it from the
// beginning. Run with the default cycle counts.
`timescale 1ns/1ps
module tb_reset_sequencer;
  localparam int DIV_N = 16;
  localparam int IO_N  = 64;

  logic clk = 1'b0;
  logic rst, div_reset, io_reset, done;

  reset_sequencer dut (.clk, .rst, .div_reset, .io_reset, .done);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_sequence(int abort_at);
    rst = 1;
    @(posedge clk); @(posedge clk); #1;
    checks++;
    if (!div_reset || !io_reset || done) begin failures++; $display("outputs not in reset"); end
    rst = 0;
    for (int k = 0; k < IO_N + 20; k++) begin
      // k = clock edges since release
      checks++;
      if (div_reset !== (k < DIV_N) || io_reset !== (k < IO_N) || done !== (k >= IO_N)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: div %b io %b done %b", k, div_reset, io_reset, done);
      end
      if (k == abort_at) return;
      @(posedge clk); #1;
    end
  endtask

  initial begin
    rst = 1;
    run_sequence(-1);
    run_sequence(30);   // reset again half way
    run_sequence(-1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
