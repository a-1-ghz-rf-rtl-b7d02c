// Sync edge finder: locates the first rising edge of the Sync input inside a
// deserialised 8-bit word, to the RF period.
//
// A rising edge lies at bit i when bit i is 1 and the bit before it is 0; for
// bit 0 the bit before is the last bit of the previous word, kept in a
// register. The lowest such i (the earliest in time) is reported as `pos`
// together with `found`. Outputs are combinational from `din` and the stored
// bit; the stored bit updates on every clock edge. Bit 0 is the earliest RF
// period of the word.
//
// The paper states that Sync is sampled at the RF rate and turned into 8-bit
// words; detecting the edge position inside the word is this design's way of
// keeping the Sync-to-Out delay exact to one RF period.
module sync_edge_finder
  import tu_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [WORD_W-1:0] din,
  output logic              found,
  output logic [2:0]        pos
);

  logic              prev_bit;
  logic [WORD_W-1:0] rise;

  assign rise = din & ~{din[WORD_W-2:0], prev_bit};

  always_comb begin
    found = 1'b0;
    pos   = '0;
    for (int i = WORD_W - 1; i >= 0; i--) begin
      if (rise[i]) begin
        found = 1'b1;
        pos   = 3'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) prev_bit <= 1'b1;  // no edge reported for Sync already high at reset
    else     prev_bit <= din[WORD_W-1];
  end

endmodule
