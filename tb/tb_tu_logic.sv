// Self-checking testbench for tu_logic, the word-level Trigger Unit.
//
// The Sync input is modelled as a bit stream, one bit per RF period, cut into
// 8-bit words (bit 0 earliest) for din. Start and Stop are slow levels. Trials
// cover all six modes with random B, HT, W, pulse width, unbalanced flag and
// pattern length, plus the paper's figure settings (Windowed B=8 HT=10 W=4 and
// B=8 HT=20 W=5, Low frequency B=8 HT=20 unbalanced, Play B=8 length 40).
// Sync pulses arriving before Start or while counting must be ignored. Each
// output word is compared with the reference of tu_ref_pkg (modes 1-5) or with
// the testbench's copy of the pattern memory (Play mode), taking the first
// event at B + 8 RF periods after the Sync edge (B after bit 0 of the word
// following the synchronised Start in SyncLess mode), and the output low from
// the word in which the synchronised Stop is taken. The synchroniser latency
// is checked through these positions: Start or Stop raised before clock edge
// c acts at edge c+2.
`timescale 1ns/1ps
module tb_tu_logic;
  import tu_pkg::*;
  import tu_ref_pkg::*;

  localparam int MEM_BYTES = 8192;
  localparam int AW = $clog2(MEM_BYTES);

  logic clk = 1'b0, wclk = 1'b0;
  logic rst;
  tu_cfg_t cfg;
  logic [7:0] din, dout;
  logic start, stop, we;
  logic [AW-1:0] waddr;
  logic [7:0] wdata;
  tu_state_e state;
  logic event_o, launch_o, run_o, underflow_o;

  tu_logic #(.MEM_BYTES(MEM_BYTES)) dut (.*);

  always #4 clk = ~clk;
  always #5 wclk = ~wclk;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [7:0] stream [0:4095];
  bit syncbits [0:32767];
  logic [7:0] model [MEM_BYTES];

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    for (int i = 0; i < 8; i++) din[i] = syncbits[(8 * (cyc + 1) + i) % 32768];
    @(posedge clk); #1;
    cyc++;
    stream[cyc % 4096] = dout;
    if (underflow_o) begin failures++; $display("underflow at %0d", cyc); end
    for (int i = 0; i < 8; i++) syncbits[(8 * (cyc + 40) + i) % 32768] = 1'b0;  // clear ahead
  endtask

  // a Sync pulse starting `ahead` words from now at bit s; returns its edge time
  function automatic longint put_sync(int ahead, int s);
    longint ts;
    ts = 8 * longint'(cyc + ahead) + s;
    for (longint k = ts; k < ts + $urandom_range(2, 12); k++) syncbits[k % 32768] = 1'b1;
    return ts;
  endfunction

  initial begin
    int first_word, stop_word, c_start;
    longint t0, tsync, junk;
    bit do_stop;
    rst = 1; start = 0; stop = 0; we = 0; waddr = '0; wdata = '0; din = '0; cfg = '0;
    foreach (syncbits[k]) syncbits[k] = 1'b0;
    for (int a = 0; a < MEM_BYTES; a++) begin
      @(negedge wclk);
      we = 1; waddr = AW'(a); wdata = 8'($urandom); model[a] = wdata;
    end
    @(negedge wclk); we = 0;
    repeat (4) tick();
    rst = 0;
    repeat (4) tick();
    for (int trial = 0; trial < 90; trial++) begin
      cfg.mode       = tu_mode_e'(trial % 6);
      cfg.b          = $urandom_range(0, 40);
      cfg.ht         = $urandom_range(8, 40);
      cfg.pw         = $urandom_range(1, int'(cfg.ht) - 1);
      cfg.w          = $urandom_range(1, 6);
      cfg.unbalanced = $urandom_range(0, 1);
      cfg.play_len   = $urandom_range(8, 300);
      case (trial)
        2:  begin cfg.b = 8; cfg.ht = 10; cfg.w = 4; cfg.pw = 4; end            // chronogram
        8:  begin cfg.b = 8; cfg.ht = 20; cfg.w = 5; cfg.pw = 5; end            // windowed example
        4:  begin cfg.b = 8; cfg.ht = 20; cfg.unbalanced = 1; end               // low-frequency example
        5:  begin cfg.b = 8; cfg.play_len = 40; end                             // play example
        11: cfg.play_len = 65536;                                               // whole memory
        default: ;
      endcase
      do_stop = (trial % 3 == 0) || cfg.mode inside {MODE_INFINITE, MODE_SYNCLESS, MODE_LOWFREQ, MODE_PLAY};
      // a Sync while idle is ignored
      junk = put_sync(3, $urandom_range(0, 7));
      repeat (5) tick();
      first_word = cyc + 1;
      start = 1; c_start = cyc;
      tick();
      repeat (3) tick();
      start = 0;
      if (cfg.mode == MODE_SYNCLESS) begin
        t0 = 8 * longint'(c_start + 4) + longint'(cfg.b);
      end else begin
        repeat ($urandom_range(0, 3)) tick();
        tsync = put_sync(2, $urandom_range(0, 7));
        t0 = tsync + 8 + longint'(cfg.b);
        repeat (6) tick();
        junk = put_sync(2, $urandom_range(0, 7));  // ignored while counting
      end
      repeat ($urandom_range(10, 50)) tick();
      if (!do_stop) repeat (int'((cfg.b + cfg.w * cfg.ht) / 8)) tick();
      stop_word = 1 << 30;
      if (do_stop) begin
        stop = 1; stop_word = cyc + 3;
        repeat (4) tick();
        stop = 0;
      end
      repeat (12) tick();
      for (int m = first_word; m <= cyc; m++) begin
        logic [7:0] expw;
        for (int i = 0; i < 8; i++) begin
          longint t;
          t = 8 * longint'(m) + i;
          if (m >= stop_word) expw[i] = 1'b0;
          else if (cfg.mode == MODE_PLAY)
            expw[i] = (t < t0) ? 1'b0 : model[((t - t0) % longint'(cfg.play_len)) / 8][((t - t0) % longint'(cfg.play_len)) % 8];
          else expw[i] = ref_bit(t, t0, cfg);
        end
        checks++;
        if (stream[m % 4096] !== expw) begin
          failures++;
          if (failures < 20)
            $display("trial %0d %s word %0d: got %b exp %b (b=%0d ht=%0d pw=%0d w=%0d len=%0d t0=%0d)",
                     trial, cfg.mode.name(), m, stream[m % 4096], expw, cfg.b, cfg.ht, cfg.pw,
                     cfg.w, cfg.play_len, t0);
        end
      end
      checks++;
      if (state != ST_IDLE) begin failures++; $display("trial %0d: not idle at end", trial); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
