// Trigger Unit sequencer: the state machine and counters behind operating modes
// 1 to 5, and the launch of mode 6 (play memory).
//
// How it works. The unit runs on the word clock, one cycle per eight RF
// periods, so a counter cannot simply count RF periods one per clock. Instead
// `cnt` holds the number of RF periods from bit 0 of the word being formed in
// this cycle to the next event. When cnt < 8 the event falls in this word, at
// bit position cnt; the counter is then reloaded with cnt + period - 8, which
// keeps the event times exact to one RF period while every operation is a
// word-rate add or subtract. Otherwise cnt is decremented by 8.
//
// States, as in the paper's chronogram: Idle, Waiting for Sync (after Start),
// B count (first event B RF periods after the Sync edge), HT count (further
// events every HT RF periods). Single pulse returns to Idle after its pulse,
// Windowed after W pulses, the others run until Stop. SyncLess skips Waiting
// for Sync and starts B count from Start. Low frequency turns each event into a
// level change (HT periods high, HT or HT+1 low). In Play mode the B-count
// event launches the pattern memory (play_launch with bit offset play_off) and
// the state stays in ST_PLAY until Stop. Stop returns to Idle from any state and
// forces the output low at once.
//
// Interface: start_p/stop_p are one-cycle pulses already synchronised to clk.
// sync_found/sync_pos give the first rising Sync edge of this cycle's input
// word (bit position 0..7). dout is the output word for modes 1-5, registered.
//
// Timing: an event decided in cycle n appears in dout in cycle n+1. A Sync edge
// at bit s of the input word of cycle n gives its first event at bit s+B of
// the word formed in cycle n+1, that is B+8 RF periods later on the word
// time-line, a fixed latency for every configuration.
//
// Own choices (the paper gives the modes' behaviour, not the logic): HT below 8
// is treated as 8 (at most one event per word), a pulse is `pw` RF periods wide,
// W of 0 or 1 gives one pulse, SyncLess counts B from the word after Start.
module tu_sequencer
  import tu_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  tu_cfg_t             cfg,
  input  logic                start_p,
  input  logic                stop_p,
  input  logic                sync_found,
  input  logic [2:0]          sync_pos,
  output logic [WORD_W-1:0]   dout,
  output tu_state_e           state,
  output logic                event_o,       // an event falls in this cycle's word
  output logic                play_restart,  // rewind the pattern memory
  output logic                play_launch,   // pattern starts in this cycle's word
  output logic [2:0]          play_off,      // ... at this bit position
  output logic                play_run       // pattern streaming (after launch)
);

  logic [CNT_W-1:0] cnt;        // RF periods to the next event
  logic [CNT_W-1:0] npulse;     // events produced so far
  logic [CNT_W-1:0] tail;       // high bits of a pulse still to emit
  logic             lvl;        // square-wave level at bit 0 of this word
  logic             ev;
  logic [2:0]       e;
  logic [CNT_W-1:0] ht_eff;
  logic [CNT_W-1:0] period;     // RF periods from this event to the next
  logic [CNT_W:0]   pend;       // bit just after the end of a new pulse
  logic [WORD_W-1:0] word;
  logic             last_event;

  assign ht_eff = (cfg.ht < CNT_W'(8)) ? CNT_W'(8) : cfg.ht;
  assign ev     = (state == ST_B_COUNT || state == ST_HT_COUNT) && (cnt < CNT_W'(8));
  assign e      = cnt[2:0];
  assign pend   = {1'b0, CNT_W'(e)} + {1'b0, cfg.pw};

  // Period to the following event. In low-frequency mode the level after this
  // event is ~lvl: HT periods when it goes high, HT (+1) when it goes low.
  always_comb begin
    period = ht_eff;
    if (cfg.mode == MODE_LOWFREQ && lvl && cfg.unbalanced)
      period = ht_eff + CNT_W'(1);
  end

  // Whether this event ends the run.
  always_comb begin
    unique case (cfg.mode)
      MODE_SINGLE:   last_event = 1'b1;
      MODE_WINDOWED: last_event = (npulse + CNT_W'(1) >= cfg.w);
      default:       last_event = 1'b0;
    endcase
  end

  // Output word of this cycle.
  always_comb begin
    for (int i = 0; i < WORD_W; i++) begin
      if (cfg.mode == MODE_LOWFREQ)
        word[i] = lvl ^ (ev && (3'(i) >= e));
      else
        word[i] = (CNT_W'(i) < tail) ||
                  (ev && cfg.mode != MODE_PLAY && (3'(i) >= e) &&
                   (CNT_W'(3'(i) - e) < cfg.pw));
    end
  end

  assign event_o      = ev;
  assign play_launch  = ev && state == ST_B_COUNT && cfg.mode == MODE_PLAY && !stop_p;
  assign play_off     = e;
  assign play_run     = state == ST_PLAY;
  assign play_restart = state == ST_IDLE && start_p && cfg.mode == MODE_PLAY;

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= ST_IDLE;
      cnt    <= '0;
      npulse <= '0;
      tail   <= '0;
      lvl    <= 1'b0;
      dout   <= '0;
    end else if (stop_p) begin
      state  <= ST_IDLE;
      tail   <= '0;
      lvl    <= 1'b0;
      dout   <= '0;
    end else begin
      dout <= word;
      // pulse tail carried into the next word
      if (ev && cfg.mode != MODE_LOWFREQ && cfg.mode != MODE_PLAY)
        tail <= (pend > (CNT_W+1)'(8)) ? CNT_W'(pend - (CNT_W+1)'(8)) : '0;
      else
        tail <= (tail > CNT_W'(8)) ? tail - CNT_W'(8) : '0;
      if (ev && cfg.mode == MODE_LOWFREQ)
        lvl <= ~lvl;

      unique case (state)
        ST_IDLE: begin
          if (start_p) begin
            npulse <= '0;
            lvl    <= 1'b0;
            if (cfg.mode == MODE_SYNCLESS) begin
              state <= ST_B_COUNT;
              cnt   <= cfg.b;
            end else begin
              state <= ST_WAIT_SYNC;
            end
          end
        end
        ST_WAIT_SYNC: begin
          if (sync_found) begin
            state <= ST_B_COUNT;
            cnt   <= CNT_W'(sync_pos) + cfg.b;
          end
        end
        ST_B_COUNT, ST_HT_COUNT: begin
          if (ev) begin
            npulse <= npulse + CNT_W'(1);
            if (cfg.mode == MODE_PLAY) begin
              state <= ST_PLAY;
            end else if (last_event) begin
              state <= ST_IDLE;
            end else begin
              state <= ST_HT_COUNT;
              cnt   <= cnt + period - CNT_W'(8);
            end
          end else begin
            cnt <= cnt - CNT_W'(8);
          end
        end
        ST_PLAY: ;
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
