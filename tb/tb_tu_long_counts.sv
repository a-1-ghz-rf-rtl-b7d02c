// Long-count testbench for tu_sequencer: counts far beyond one word, as used
// for real machines where HT is the harmonic number times the number of
// turns.
//
// Three runs, each checked through the rising and falling edges of the Out
// bit stream (absolute RF-period times computed from the Start/Sync times):
//  1. SyncLess train with HT = 35640 (a revolution-frequency train for a
//     machine of harmonic number 35640), pw = 4, B = 17: twelve pulses exactly
//     HT apart, each 4 RF periods wide.
//  2. Windowed, B = 100003, HT = 2*35640 + 5, W = 3: exactly three pulses.
//  3. Low frequency, B = 12345, HT = 1000, unbalanced: rising edges every
//     2001 RF periods, falling edges 1000 RF periods after each rising edge.
`timescale 1ns/1ps
module tb_tu_long_counts;
  import tu_pkg::*;

  logic clk = 1'b0;
  logic rst;
  tu_cfg_t cfg;
  logic start_p, stop_p, sync_found;
  logic [2:0] sync_pos;
  logic [7:0] dout;
  tu_state_e state;
  logic event_o, play_restart, play_launch, play_run;
  logic [2:0] play_off;

  tu_sequencer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic last_bit = 1'b0;
  longint rises [$];
  longint falls [$];

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(posedge clk); #1;
    cyc++;
    for (int i = 0; i < 8; i++) begin
      if (dout[i] && !last_bit) rises.push_back(8 * longint'(cyc) + i);
      if (!dout[i] && last_bit) falls.push_back(8 * longint'(cyc) + i);
      last_bit = dout[i];
    end
  endtask

  task automatic expect_eq(longint got, longint expv, string what);
    checks++;
    if (got != expv) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, expv);
    end
  endtask

  initial begin
    longint t0;
    rst = 1; start_p = 0; stop_p = 0; sync_found = 0; sync_pos = 0; cfg = '0;
    repeat (3) tick();
    rst = 0;
    tick();

    // 1. SyncLess revolution train
    cfg.mode = MODE_SYNCLESS; cfg.b = 17; cfg.ht = 35640; cfg.pw = 4;
    rises.delete(); falls.delete();
    start_p = 1; t0 = 8 * longint'(cyc + 2) + 17;
    tick(); start_p = 0;
    while (rises.size() < 12) tick();
    stop_p = 1; tick(); stop_p = 0;
    repeat (4) tick();
    for (int k = 0; k < 12; k++) begin
      expect_eq(rises[k], t0 + k * 35640, $sformatf("SyncLess pulse %0d start", k));
      expect_eq(falls[k] - rises[k], 4, $sformatf("SyncLess pulse %0d width", k));
    end

    // 2. Windowed with long B and two-turn HT
    cfg.mode = MODE_WINDOWED; cfg.b = 100003; cfg.ht = 2 * 35640 + 5; cfg.w = 3; cfg.pw = 7;
    rises.delete(); falls.delete();
    start_p = 1; tick(); start_p = 0;
    repeat (2) tick();
    sync_found = 1; sync_pos = 3'd5; t0 = 8 * longint'(cyc + 2) + 5 + 100003;
    tick(); sync_found = 0;
    repeat (int'((100003 + 4 * (2 * 35640 + 5)) / 8)) tick();
    expect_eq(rises.size(), 3, "Windowed pulse count");
    for (int k = 0; k < 3 && k < rises.size(); k++)
      expect_eq(rises[k], t0 + k * (2 * 35640 + 5), $sformatf("Windowed pulse %0d start", k));
    checks++;
    if (state != ST_IDLE) begin failures++; $display("Windowed run not idle"); end

    // 3. Low-frequency wave, unbalanced
    cfg.mode = MODE_LOWFREQ; cfg.b = 12345; cfg.ht = 1000; cfg.unbalanced = 1;
    rises.delete(); falls.delete();
    start_p = 1; tick(); start_p = 0;
    sync_found = 1; sync_pos = 3'd2; t0 = 8 * longint'(cyc + 2) + 2 + 12345;
    tick(); sync_found = 0;
    while (rises.size() < 10) tick();
    stop_p = 1; tick(); stop_p = 0;
    repeat (4) tick();
    for (int k = 0; k < 10; k++) begin
      expect_eq(rises[k], t0 + k * 2001, $sformatf("square wave rise %0d", k));
      if (k < 9) expect_eq(falls[k] - rises[k], 1000, $sformatf("square wave high %0d", k));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
