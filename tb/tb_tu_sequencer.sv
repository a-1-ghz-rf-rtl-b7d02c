// Self-checking testbench for tu_sequencer (operating modes 1-6 launch).
//
// Random configurations of every mode are run: Start, then (except SyncLess)
// a Sync edge at a random word and bit, then a random number of cycles and
// sometimes Stop. Every output bit is compared with a reference worked out
// from absolute RF-period times: first event B+8 RF periods after the Sync
// edge (B+8 after bit 0 of the word following Start in SyncLess), further
// events every HT, pulses pw wide, W pulses in Windowed mode, one in Single,
// square wave HT high / HT(+unbalanced) low in Low-frequency mode, and output
// forced low from the word in which Stop is taken. In Play mode the launch
// word and bit offset are checked. The final state is checked too.
`timescale 1ns/1ps
module tb_tu_sequencer;
  import tu_pkg::*;
  import tu_ref_pkg::*;

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
  logic [7:0] stream [0:1023];
  int launch_word, launch_off, restarts;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    #1;
    if (play_launch) begin launch_word = cyc + 1; launch_off = int'(play_off); end
    if (play_restart) restarts++;
    @(posedge clk); #1;
    cyc++;
    stream[cyc % 1024] = dout;
  endtask


  initial begin
    int first_word, wait_cycles, run_cycles, stop_word, s;
    longint t0;
    bit do_stop;
    rst = 1'b1; start_p = 0; stop_p = 0; sync_found = 0; sync_pos = 0;
    cfg = '0;
    repeat (3) tick();
    rst = 1'b0;
    tick();
    for (int trial = 0; trial < 240; trial++) begin
      cfg.mode       = tu_mode_e'(trial % 6);
      cfg.b          = $urandom_range(0, 40);
      cfg.ht         = $urandom_range(8, 40);
      cfg.pw         = $urandom_range(1, int'(cfg.ht) - 1);
      cfg.w          = $urandom_range(1, 6);
      cfg.unbalanced = $urandom_range(0, 1);
      cfg.play_len   = 40;
      if (trial == 2) begin cfg.b = 8; cfg.ht = 10; cfg.w = 4; cfg.pw = 4; end  // chronogram example
      do_stop        = (trial % 3 == 0) || cfg.mode inside {MODE_INFINITE, MODE_SYNCLESS, MODE_LOWFREQ, MODE_PLAY};
      launch_word    = -1;
      restarts       = 0;
      // Start
      start_p = 1; first_word = cyc + 1;
      tick();
      start_p = 0;
      if (cfg.mode == MODE_SYNCLESS) begin
        t0 = 8 * longint'(first_word + 1) + longint'(cfg.b);
      end else begin
        if (state != ST_WAIT_SYNC) begin failures++; $display("not waiting for sync, trial %0d", trial); end
        checks++;
        wait_cycles = $urandom_range(0, 4);
        repeat (wait_cycles) tick();
        s = $urandom_range(0, 7);
        sync_found = 1; sync_pos = 3'(s);
        t0 = 8 * longint'(cyc + 2) + s + longint'(cfg.b);
        tick();
        sync_found = 0;
        // a second Sync while counting must be ignored
        repeat (2) tick();
        sync_found = 1; sync_pos = 3'($urandom_range(0, 7));
        tick();
        sync_found = 0;
      end
      run_cycles = $urandom_range(10, 60);
      if (!do_stop) run_cycles += int'((cfg.b + cfg.w * cfg.ht) / 8);  // let the run finish
      repeat (run_cycles) tick();
      stop_word = 1 << 30;
      if (do_stop) begin
        stop_p = 1; stop_word = cyc + 1;
        tick();
        stop_p = 0;
      end
      repeat (12) tick();
      // compare every word from the Start word on
      for (int m = first_word; m <= cyc; m++) begin
        logic [7:0] expw;
        for (int i = 0; i < 8; i++)
          expw[i] = (m >= stop_word) ? 1'b0 : ref_bit(8 * longint'(m) + i, t0, cfg);
        checks++;
        if (stream[m % 1024] !== expw) begin
          failures++;
          if (failures < 20)
            $display("trial %0d mode %s word %0d: got %b exp %b (b=%0d ht=%0d pw=%0d w=%0d t0=%0d)",
                     trial, cfg.mode.name(), m, stream[m % 1024], expw, cfg.b, cfg.ht, cfg.pw, cfg.w, t0);
        end
      end
      // final state
      checks++;
      if (do_stop || cfg.mode inside {MODE_SINGLE, MODE_WINDOWED}) begin
        if (state != ST_IDLE) begin failures++; $display("trial %0d: not idle at end", trial); end
      end
      if (cfg.mode == MODE_PLAY) begin
        checks++;
        if (launch_word != int'(t0 / 8) || launch_off != int'(t0 % 8) || restarts != 1) begin
          failures++;
          $display("trial %0d play launch word %0d off %0d restarts %0d, exp %0d/%0d",
                   trial, launch_word, launch_off, restarts, t0 / 8, t0 % 8);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
