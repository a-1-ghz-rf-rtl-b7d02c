// Behavioural model of an 8:1 DDR output serializer, standing for the FPGA's
// dedicated output SERDES (a process-specific hard block). It is written with
// rising- and falling-edge processes and a clock-driven output multiplexer.
//
// What it does: takes an 8-bit word `d` on each rising edge of `clkdiv` and
// sends its bits out on `q`, one per edge of `clk` (rising and falling), that is
// one per RF period, d[0] first.
//
// How it works: d is captured into a holding register in the clkdiv domain.
// On each rising edge of clk a counter selects the next pair of bits of the
// current word: the first is driven while clk is high, the second (passed
// through a falling-edge register) while clk is low. After the fourth pair
// the word is reloaded from the holding register.
//
// Timing: as for iserdes_ddr_1to8, `rst` must be released synchronously to a
// rising edge of clk together with the clkdiv divider; the reload then happens
// two clk cycles after each clkdiv rising edge and the word-to-pin latency is
// fixed. The paper gives the 8-bit bus and the 1 Gbit/s DDR output; the port
// list and bit order are simplified choices of this model.
module oserdes_ddr_8to1 (
  input  logic       clk,
  input  logic       clkdiv,
  input  logic       rst,
  input  logic [7:0] d,
  output logic       q
);

  logic [1:0] pc;    // rising-edge count within a word
  logic [7:0] hold;
  logic [7:0] sh;
  logic       rp;    // bit driven while clk is high
  logic       rn_pre;
  logic       rn;    // bit driven while clk is low

  always_ff @(posedge clkdiv) begin
    if (rst) hold <= '0;
    else     hold <= d;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc     <= '0;
      sh     <= '0;
      rp     <= 1'b0;
      rn_pre <= 1'b0;
    end else begin
      rp     <= sh[2*pc];
      rn_pre <= sh[2*pc+1];
      pc     <= pc + 2'd1;
      if (pc == 2'd3) sh <= hold;
    end
  end

  always_ff @(negedge clk) begin
    if (rst) rn <= 1'b0;
    else     rn <= rn_pre;
  end

  // DDR output multiplexer: one bit per clock phase.
  assign q = clk ? rp : rn;

endmodule
