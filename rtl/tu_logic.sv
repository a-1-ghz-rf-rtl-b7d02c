// Trigger Unit logic: turns the 8-bit Sync word stream from the deserializer
// into the 8-bit Out word stream for the serializer, one word per word-clock
// cycle (eight RF periods).
//
// How it works. Start and Stop are synchronised and edge-triggered
// (slow_trigger_sync). The sync_edge_finder reports the first rising Sync
// edge in each word with its bit position. The tu_sequencer runs the state
// machine and the B/HT/W counters and forms the output word for modes 1-5.
// In mode 6 the sequencer rewinds the play_memory on Start and launches it at
// the B-count event; the pattern stream, eight bits a cycle, is then shifted
// by the event's bit position e so that pattern bit 0 lands exactly B RF
// periods after Sync: output bit i takes stream bit i-e of this cycle's eight
// bits for i >= e, and bit 8-e+i of the previous cycle's eight bits for i < e.
//
// Interface: cfg is static while the unit runs. din/dout bit 0 is the
// earliest RF period. The pattern memory is written through wclk/we/waddr/wdata.
// state, event_o, launch_o, run_o and underflow_o are status for the host.
//
// Timing: number the din words by the clock edge that samples them and the
// dout words by the clock edge after which they appear, and lay both on one
// time line of eight RF periods per edge. The first event then lies exactly
// B + 8 RF periods after the Sync edge, in every mode. Start and Stop act two
// clock edges after the edge that first samples them high.
//
// The structure (TU logic between deserializer and serializer, the modes, the
// 8 kB memory) follows the paper; the split into these sub-blocks and the bit
// alignment scheme are this design's.
module tu_logic
  import tu_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 8192,
  localparam int unsigned AW = $clog2(MEM_BYTES)
) (
  input  logic              clk,
  input  logic              rst,
  input  tu_cfg_t           cfg,
  input  logic [WORD_W-1:0] din,
  input  logic              start,
  input  logic              stop,
  input  logic              wclk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [7:0]        wdata,
  output logic [WORD_W-1:0] dout,
  output tu_state_e         state,
  output logic              event_o,
  output logic              launch_o,
  output logic              run_o,
  output logic              underflow_o
);

  localparam int unsigned LW = $clog2(MEM_BYTES * 8) + 1;

  logic start_p, stop_p;
  logic sync_found;
  logic [2:0] sync_pos;
  logic [WORD_W-1:0] seq_dout;
  logic play_restart, play_launch, play_run;
  logic [2:0] play_off;

  slow_trigger_sync u_start (.clk, .rst, .din(start), .pulse(start_p));
  slow_trigger_sync u_stop  (.clk, .rst, .din(stop),  .pulse(stop_p));

  sync_edge_finder u_edge (.clk, .rst, .din, .found(sync_found), .pos(sync_pos));

  tu_sequencer u_seq (
    .clk, .rst, .cfg, .start_p, .stop_p, .sync_found, .sync_pos,
    .dout(seq_dout), .state, .event_o, .play_restart, .play_launch,
    .play_off, .play_run
  );

  // ---------------- pattern path ----------------
  logic       pop;
  logic [7:0] g;          // this cycle's eight pattern bits
  logic [7:0] g_prev;     // previous cycle's eight pattern bits
  logic [2:0] off_q;      // bit position of pattern bit 0, held while playing
  logic [2:0] off;
  logic [15:0] pair;
  logic [7:0] play_word;
  logic [7:0] play_q;

  assign pop = (play_launch || play_run) && !stop_p;

  play_memory #(.MEM_BYTES(MEM_BYTES)) u_mem (
    .wclk, .we, .waddr, .wdata,
    .clk, .rst, .len(LW'(cfg.play_len)), .restart(play_restart), .pop,
    .dout(g), .underflow(underflow_o)
  );

  assign off  = play_launch ? play_off : off_q;
  assign pair = {g, play_launch ? 8'h00 : g_prev};
  assign play_word = 8'(pair >> (4'd8 - 4'(off)));

  always_ff @(posedge clk) begin
    if (rst) begin
      g_prev <= '0;
      off_q  <= '0;
      play_q <= '0;
    end else begin
      if (play_launch) off_q <= play_off;
      if (pop) g_prev <= g;
      play_q <= pop ? play_word : '0;
    end
  end

  assign dout     = (cfg.mode == MODE_PLAY) ? play_q : seq_dout;
  assign launch_o = play_launch;
  assign run_o    = play_run;

endmodule
