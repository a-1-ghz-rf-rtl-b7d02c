// Trigger Unit, FPGA top level.
//
// The unit produces Out pulses locked to an RF clock of up to 1 GHz, a
// programmable number of RF periods after a Sync pulse, without running any
// logic at the RF rate. The RF clock arrives already divided by 2 (rf_div2,
// up to 500 MHz). A DDR deserializer samples Sync on both edges of rf_div2,
// one sample per RF period, and hands the TU logic one 8-bit word per cycle
// of the word clock (rf_div2 / 4, up to 125 MHz). The TU logic works out the
// Out level for each of the eight RF periods of a word and a DDR serializer
// sends that word out again at one bit per RF period. All counting is done at
// the word rate, exact to one RF period.
//
// Clocks and resets: clk_sys is a free-running host clock for the reset
// sequencer and the pattern-memory write port. reset_sequencer drives
// div_reset (pin DivReset to the board's RF divider) and then releases the
// internal divider and the SERDES together, synchronously to a rising edge of
// rf_div2; the TU logic leaves reset two word-clock cycles later. With this
// order the Sync-to-Out delay is the same after every reset.
//
// Interface: sync_in is the Sync input as it reaches the deserializer (the
// FPGA's programmable input delay sits outside this module) and out feeds the
// programmable output delay. start/stop are the slow triggers. cfg is the
// operating mode and its counts (tu_pkg::tu_cfg_t), held while running.
// mem_we/mem_addr/mem_wdata write the play-memory pattern on clk_sys.
//
// Timing: a rising Sync edge produces its first Out event B + FIXED_LAT RF
// periods later, where FIXED_LAT is a constant of this implementation (the
// serializer/deserializer pipeline plus two words of TU logic; measured
// as 41 RF periods in the testbench).
//
// The block structure (deserializer, divide-by-4, TU logic, serializer,
// DivReset) follows the paper; the reset sequencing details are this design's.
module trigger_unit_top
  import tu_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 8192,
  localparam int unsigned AW = $clog2(MEM_BYTES)
) (
  input  logic          clk_sys,
  input  logic          rst,
  input  logic          rf_div2,
  input  logic          sync_in,
  input  logic          start,
  input  logic          stop,
  input  tu_cfg_t       cfg,
  input  logic          mem_we,
  input  logic [AW-1:0] mem_addr,
  input  logic [7:0]    mem_wdata,
  output logic          out,
  output logic          div_reset,
  output logic          ready,
  output tu_state_e     state,
  output logic          event_o,
  output logic          play_launch,
  output logic          playing,
  output logic          underflow
);

  logic io_reset;
  logic [1:0] io_rst_sync;   // io_reset synchronised to rf_div2
  logic rst_rf;
  logic clk_word;
  logic [7:0] word_rst_sr;   // TU logic reset, stretched
  logic rst_word;
  logic [WORD_W-1:0] din_w, dout_w;

  reset_sequencer u_rstseq (
    .clk(clk_sys), .rst, .div_reset, .io_reset, .done(ready)
  );

  always_ff @(posedge rf_div2) io_rst_sync <= {io_rst_sync[0], io_reset};
  assign rst_rf = io_rst_sync[1];

  clk_div4 u_div (.clk_in(rf_div2), .rst(rst_rf), .clk_out(clk_word));

  // The word clock stands still while rst_rf is high, so the TU logic reset is
  // stretched in the rf_div2 domain: it ends eight rf_div2 cycles (two word
  // cycles) after the SERDES reset.
  always_ff @(posedge rf_div2) begin
    if (rst_rf) word_rst_sr <= '1;
    else        word_rst_sr <= {word_rst_sr[6:0], 1'b0};
  end
  assign rst_word = word_rst_sr[7];

  iserdes_ddr_1to8 u_des (
    .clk(rf_div2), .clkdiv(clk_word), .rst(rst_rf), .d(sync_in), .q(din_w)
  );

  tu_logic #(.MEM_BYTES(MEM_BYTES)) u_tu (
    .clk(clk_word), .rst(rst_word), .cfg, .din(din_w), .start, .stop,
    .wclk(clk_sys), .we(mem_we), .waddr(mem_addr), .wdata(mem_wdata),
    .dout(dout_w), .state, .event_o, .launch_o(play_launch), .run_o(playing),
    .underflow_o(underflow)
  );

  oserdes_ddr_8to1 u_ser (
    .clk(rf_div2), .clkdiv(clk_word), .rst(rst_rf), .d(dout_w), .q(out)
  );

endmodule
