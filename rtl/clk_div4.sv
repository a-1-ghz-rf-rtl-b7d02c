// Word-clock divider: divides its input clock (the RF clock already divided by
// 2 outside the FPGA, at most 500 MHz) by 4, giving the word clock of at most
// 125 MHz on which the TU logic and the parallel sides of the serializer and
// deserializer run.
//
// How it works: a 2-bit counter advances on every rising edge of clk_in and
// its upper bit is the divided clock, a 50 % duty-cycle square wave. The
// synchronous reset clears the counter, so after reset the divided clock rises
// on the second rising edge of clk_in and its phase against clk_in is the same
// after every reset; this is what keeps the Sync-to-Out delay constant.
//
// The paper gives the divide-by-4 ("ClkIn/4") and the need for a deterministic
// reset of the clock dividers; the counter implementation is this design's.
module clk_div4 (
  input  logic clk_in,
  input  logic rst,
  output logic clk_out
);

  logic [1:0] c;

  always_ff @(posedge clk_in) begin
    if (rst) c <= 2'd0;
    else     c <= c + 2'd1;
  end

  assign clk_out = c[1];

endmodule
