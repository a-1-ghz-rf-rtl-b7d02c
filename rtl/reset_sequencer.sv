// Reset sequencer for the clock dividers and the serializer/deserializer.
//
// The Sync-to-Out delay is only the same after every power-up if the external
// divide-by-2 of the RF clock, the internal divide-by-4 and the SERDES blocks
// start from a known phase relation. This block, running on a free-running
// system clock, releases them in order after `rst`: `div_reset` (to the
// external RF divider, pin DivReset) is held for DIV_RST_CYCLES cycles, then
// `io_reset` (to the internal divider and the SERDES) is held until
// IO_RST_CYCLES cycles, so the internal blocks leave reset only once the
// divided RF clock is running again. `done` rises when the sequence ends.
// Downstream, io_reset is synchronised to the RF clock before use.
//
// The paper states only that this reset scheme was carefully designed; the
// ordering and the cycle counts here are this design's own.
module reset_sequencer #(
  parameter int unsigned DIV_RST_CYCLES = 16,
  parameter int unsigned IO_RST_CYCLES  = 64
) (
  input  logic clk,
  input  logic rst,
  output logic div_reset,
  output logic io_reset,
  output logic done
);

  localparam int unsigned CW = $clog2(IO_RST_CYCLES + 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst)                         cnt <= '0;
    else if (cnt != CW'(IO_RST_CYCLES)) cnt <= cnt + CW'(1);
  end

  assign div_reset = rst || (cnt < CW'(DIV_RST_CYCLES));
  assign io_reset  = rst || (cnt < CW'(IO_RST_CYCLES));
  assign done      = !io_reset;

  initial begin
    assert (DIV_RST_CYCLES < IO_RST_CYCLES)
      else $error("reset_sequencer: DivReset must end before the SERDES reset");
  end

endmodule
