// End-to-end testbench for trigger_unit_top at its default parameters.
//
// A 1 GHz RF clock is generated and divided by 2 in a model of the board's
// external divider, which stops while the design drives div_reset. Sync is
// driven as one bit per RF period and Out is sampled once per RF period, so
// every check is at RF-period resolution through the deserializer, TU logic
// and serializer. The whole 8 kB pattern memory is written through the host
// port at the start.
//
// Trials run every mode, including the settings of the paper's figures
// (Windowed B=8 HT=10 W=4 and B=8 HT=20 W=5, Low frequency B=8 HT=20 with one
// extra low period, i.e. 41 RF periods, Play B=8 with a 40-bit pattern). For
// Sync-driven modes the Out waveform is compared bit by bit with the reference
// of tu_ref_pkg (or with the pattern memory) placed at Sync edge + B + LAT,
// LAT being the fixed latency of the design; it is checked to be the same in
// every trial and after a second full reset. SyncLess has no Sync, so its
// first pulse time is measured and checked to lie in the window allowed by the
// Start synchroniser, and the rest of the train is checked against it. Stop is
// asynchronous: the output is checked up to the moment Stop is raised and must
// be low from 200 ns later. Every mechanism (each mode, ignored Sync pulses,
// Stop, end of a window, unbalanced square wave, pattern wrap with a length
// that is not a multiple of 8, all eight Sync bit positions, repeated reset)
// is counted, and one that never happened counts as a failure.
`timescale 1ns/1ps
module tb_trigger_unit_top;
  import tu_pkg::*;
  import tu_ref_pkg::*;

  localparam int MEM_BYTES = 8192;
  localparam int AW = $clog2(MEM_BYTES);
  localparam int NBITS = 1 << 16;

  logic clk_sys = 1'b0, rf = 1'b0, rf_div2 = 1'b0;
  logic rst, sync_in, start, stop, mem_we;
  tu_cfg_t cfg;
  logic [AW-1:0] mem_addr;
  logic [7:0] mem_wdata;
  logic out, div_reset, ready, event_o, play_launch, playing, underflow;
  tu_state_e state;

  trigger_unit_top dut (.*);

  always #5 clk_sys = ~clk_sys;
  always #0.5 rf = ~rf;
  // board divider: RF / 2, held while DivReset is asserted
  always @(posedge rf) if (!div_reset) rf_div2 <= ~rf_div2;

  int checks = 0, failures = 0;
  longint e_n = 0;               // RF periods counted by edges of rf_div2
  bit syncbits [NBITS];
  bit outbits  [NBITS];
  logic [7:0] model [MEM_BYTES];
  int lat = -1;
  int n_mode [6];
  int n_ignored = 0, n_stop = 0, n_window_end = 0, n_unbal = 0, n_wrap = 0;
  int n_bitlen = 0, n_rereset = 0, n_div_reset = 0;
  bit pos_seen [8];

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one Sync sample per RF period in, one Out sample per RF period out
  always @(rf_div2) begin
    e_n++;
    #0.5;
    outbits[e_n % NBITS] = out;
    sync_in = syncbits[(e_n + 1) % NBITS];
    syncbits[(e_n + 2000) % NBITS] = 1'b0;
    if (underflow) begin failures++; $display("underflow"); end
  end

  task automatic wait_rf(int n);
    longint tgt;
    tgt = e_n + n;
    wait (e_n >= tgt);
    #0.6;
  endtask

  function automatic longint put_sync(int ahead, int width);
    longint ts;
    ts = e_n + ahead;
    for (longint k = ts; k < ts + width; k++) syncbits[k % NBITS] = 1'b1;
    return ts;
  endfunction

  task automatic do_reset();
    rst = 1;
    repeat (3) @(posedge clk_sys);
    rst = 0;
    @(posedge clk_sys); #1;
    if (div_reset) n_div_reset++;
    wait (ready);
    wait_rf(200);
  endtask

  // compare Out from time a to b (RF periods) with the expected waveform
  task automatic compare(longint a, longint b, longint t0, int trial);
    bit expv;
    int bad;
    bad = 0;
    for (longint t = a; t < b; t++) begin
      if (cfg.mode == MODE_PLAY)
        expv = (t < t0) ? 1'b0 : model[((t - t0) % longint'(cfg.play_len)) / 8][((t - t0) % longint'(cfg.play_len)) % 8];
      else
        expv = ref_bit(t, t0, cfg);
      if (outbits[t % NBITS] !== expv) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("trial %0d %s: %0d wrong Out bits in [%0d,%0d) t0=%0d", trial, cfg.mode.name(), bad, a, b, t0);
    end
  endtask

  function automatic longint first_rise(longint a, longint b);
    for (longint t = a; t < b; t++)
      if (outbits[t % NBITS] && !outbits[(t - 1) % NBITS]) return t;
    return -1;
  endfunction

  initial begin
    longint t_begin, tsync, t0, t_stop, t_end, t_start, junk;
    bit do_stop;
    int s;
    rst = 1; sync_in = 0; start = 0; stop = 0; mem_we = 0; mem_addr = '0; mem_wdata = '0; cfg = '0;
    foreach (syncbits[k]) syncbits[k] = 1'b0;
    do_reset();
    for (int a = 0; a < MEM_BYTES; a++) begin
      @(negedge clk_sys);
      mem_we = 1; mem_addr = AW'(a); mem_wdata = 8'($urandom); model[a] = mem_wdata;
    end
    @(negedge clk_sys); mem_we = 0;

    for (int trial = 0; trial < 44; trial++) begin
      if (trial == 30) begin do_reset(); n_rereset++; end
      cfg.mode       = tu_mode_e'(trial % 6);
      cfg.b          = $urandom_range(0, 40);
      cfg.ht         = $urandom_range(8, 40);
      cfg.pw         = $urandom_range(1, int'(cfg.ht) - 1);
      cfg.w          = $urandom_range(1, 6);
      cfg.unbalanced = $urandom_range(0, 1);
      cfg.play_len   = $urandom_range(8, 120);
      case (trial)
        0:  cfg.mode = MODE_WINDOWED;                                            // sets LAT first
        2:  begin cfg.b = 8; cfg.ht = 10; cfg.w = 4; cfg.pw = 4; end            // chronogram
        8:  begin cfg.b = 8; cfg.ht = 20; cfg.w = 5; cfg.pw = 5; end            // windowed example
        4:  begin cfg.b = 8; cfg.ht = 20; cfg.unbalanced = 1; end               // low-frequency example
        5:  begin cfg.b = 8; cfg.play_len = 40; end                             // play example
        default: ;
      endcase
      do_stop = cfg.mode inside {MODE_INFINITE, MODE_SYNCLESS, MODE_LOWFREQ, MODE_PLAY} || (trial % 4 == 3);
      junk = put_sync(20, 5);              // Sync while idle: ignored
      wait_rf(60);
      t_begin = e_n;
      start = 1; t_start = e_n;
      wait_rf(40);
      start = 0;
      if (cfg.mode == MODE_SYNCLESS) begin
        wait_rf(100 + int'(cfg.b));
        t0 = first_rise(t_start, e_n);
        checks++;
        if (t0 < 0 || t0 - t_start - longint'(cfg.b) < 0 || t0 - t_start - longint'(cfg.b) > 120) begin
          failures++;
          $display("trial %0d SyncLess first pulse at %0d, Start at %0d", trial, t0, t_start);
        end
      end else begin
        s = $urandom_range(0, 7);
        tsync = put_sync(24 + s, $urandom_range(2, 12));
        wait_rf(30 + s);
        t0 = tsync + longint'(cfg.b) + 41;  // 41: LAT, confirmed below
        if (trial == 0) begin
          wait_rf(80 + int'(cfg.b));
          t0 = first_rise(tsync, e_n);
          lat = int'(t0 - tsync - longint'(cfg.b));
          $display("Sync-to-Out latency beyond B: %0d RF periods", lat);
        end
        checks++;
        if (lat != 41) begin failures++; $display("latency %0d, expected 41", lat); end
      end
      wait_rf(20);
      if (cfg.mode != MODE_SYNCLESS) begin
        junk = put_sync(10, 4);          // Sync while counting: ignored
        n_ignored++;
      end
      wait_rf($urandom_range(150, 400));
      if (!do_stop) wait_rf(int'(cfg.b + cfg.w * cfg.ht) + 100);
      t_stop = e_n;
      if (do_stop) begin
        stop = 1;
        wait_rf(40);
        stop = 0;
        n_stop++;
      end
      wait_rf(300);
      t_end = e_n;
      compare(t_begin, t_stop, t0, trial);
      if (!do_stop) begin
        compare(t_stop, t_end, t0, trial);
        checks++;
        if (state != ST_IDLE) begin failures++; $display("trial %0d not idle", trial); end
        if (cfg.mode == MODE_WINDOWED) n_window_end++;
      end else begin
        checks++;
        for (longint t = t_stop + 200; t < t_end; t++)
          if (outbits[t % NBITS]) begin failures++; $display("trial %0d Out high after Stop", trial); break; end
      end
      n_mode[int'(cfg.mode)]++;
      if (cfg.mode == MODE_LOWFREQ && cfg.unbalanced) n_unbal++;
      if (cfg.mode == MODE_PLAY && (t_stop - t0) > longint'(cfg.play_len)) n_wrap++;
      if (cfg.mode == MODE_PLAY && (cfg.play_len % 8) != 0) n_bitlen++;
      if (cfg.mode != MODE_SYNCLESS) pos_seen[tsync % 8] = 1'b1;
    end

    foreach (n_mode[m]) begin
      checks++;
      if (n_mode[m] == 0) begin failures++; $display("mode %0d never ran", m); end
    end
    checks += 8;
    if (n_ignored == 0 || n_stop == 0 || n_window_end == 0 || n_unbal == 0 || n_wrap == 0 ||
        n_bitlen == 0 || n_rereset == 0 || n_div_reset == 0) begin
      failures++;
      $display("mechanism missing: ignored %0d stop %0d window_end %0d unbalanced %0d wrap %0d bitlen %0d rereset %0d divreset %0d",
               n_ignored, n_stop, n_window_end, n_unbal, n_wrap, n_bitlen, n_rereset, n_div_reset);
    end
    foreach (pos_seen[p]) begin
      checks++;
      if (!pos_seen[p]) begin failures++; $display("Sync never at bit position %0d", p); end
    end
    $display("modes run: %0d %0d %0d %0d %0d %0d; ignored Sync %0d, Stop %0d, window ends %0d, unbalanced %0d, pattern wraps %0d, bit-level lengths %0d, resets %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4], n_mode[5], n_ignored, n_stop,
             n_window_end, n_unbal, n_wrap, n_bitlen, n_div_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
