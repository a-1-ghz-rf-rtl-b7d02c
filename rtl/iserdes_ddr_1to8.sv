// Behavioural model of a 1:8 DDR input deserializer, standing for the FPGA's
// dedicated input SERDES (a process-specific hard block). It is written with
// one rising-edge and one falling-edge process so that it also synthesizes.
//
// What it does: samples `d` on every rising and every falling edge of `clk`
// (the RF clock divided by 2, so one sample per RF period) and presents each
// group of eight samples as a parallel word `q` on the rising edge of `clkdiv`
// (clk divided by 4). q[0] is the earliest sample of the word.
//
// How it works: one shift register samples d on rising edges, another on
// falling edges. A rising-edge counter marks every fourth rising edge, where the
// eight samples are interleaved in time order into a holding register; q
// re-times that register into the clkdiv domain.
//
// Timing: `rst` must be released synchronously to a rising edge of clk, as is
// the reset of the clkdiv divider (clk_div4); word boundaries then always fall
// at the same clk edge relative to clkdiv, two clk cycles away from the clkdiv
// rising edge, and the latency from pin to q is fixed. The paper gives the
// 1 Gbit/s DDR sampling, the 8-bit bus and the divided clock; the port list and
// bit order here are simplified choices of this model.
module iserdes_ddr_1to8 (
  input  logic       clk,
  input  logic       clkdiv,
  input  logic       rst,
  input  logic       d,
  output logic [7:0] q
);

  logic [1:0] pc;    // rising-edge count within a word
  logic [3:1] sp;    // samples taken on rising edges, newest in [3]
  logic [3:0] sn;    // samples taken on falling edges, newest in [3]
  logic [7:0] hold;

  always_ff @(negedge clk) begin
    if (rst) sn <= '0;
    else     sn <= {d, sn[3:1]};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc   <= '0;
      sp   <= '0;
      hold <= '0;
    end else begin
      sp <= {d, sp[3:2]};
      pc <= pc + 2'd1;
      // earliest sample in bit 0: falling, rising, ..., this rising edge in bit 7
      if (pc == 2'd3) hold <= {d, sn[3], sp[3], sn[2], sp[2], sn[1], sp[1], sn[0]};
    end
  end

  always_ff @(posedge clkdiv) begin
    if (rst) q <= '0;
    else     q <= hold;
  end

endmodule
