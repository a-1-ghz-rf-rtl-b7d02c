// Slow trigger synchroniser for the Start and Stop inputs.
//
// Start and Stop are slow control signals with no fixed phase to the word
// clock. Each is passed through a two-flip-flop synchroniser and its rising
// edge is turned into a pulse one word-clock cycle long (`pulse`), which the
// sequencer acts on. Latency from the input edge to the pulse is two to three
// clock cycles. The paper calls these "slow Start and Stop triggers"; the
// synchroniser and the edge trigger are this design's own choice.
module slow_trigger_sync (
  input  logic clk,
  input  logic rst,
  input  logic din,
  output logic pulse
);

  logic [2:0] sr;  // [0],[1] synchroniser, [2] previous synchronised value

  always_ff @(posedge clk) begin
    if (rst) sr <= 3'b111;  // a level already high at reset is no trigger
    else     sr <= {sr[1:0], din};
  end

  assign pulse = sr[1] && !sr[2];

endmodule
