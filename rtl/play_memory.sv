// Play-memory pattern source (operating mode 6).
//
// What it does: holds a pattern of up to MEM_BYTES*8 bits written by the host
// and delivers it as a continuous bit stream, eight bits per word-clock cycle,
// repeating every `len` bits. The length is set to the bit, so the pattern end
// does not in general fall on a word boundary.
//
// How it works: the memory is MEM_BYTES/2 words of 16 bits (an 8 kB memory at
// the default size), written a byte at a time on the host clock and read one
// 16-bit word per word-clock cycle with one cycle of latency. Word q holds
// pattern bits 16q .. 16q+15, bit 0 of byte 0 being played first. Only the
// first len-16q bits of the last word are used. The read words feed a 40-bit
// bit buffer (gearbox): each fetched word is appended above the bits already
// held, and every cycle with `pop` set the eight oldest bits leave as `dout`.
// A word is fetched whenever fewer than 24 bits would remain after this
// cycle's pop; with len >= 8 every fetch brings at least as many bits on
// average as are popped, so the buffer never runs dry (asserted below) and
// never holds more than 39 bits.
//
// Interface and timing: `restart` (one cycle) empties the buffer and rewinds
// to bit 0; the buffer is full enough for popping from the second cycle after
// restart. While `pop` is high, dout (combinational) carries the next eight
// pattern bits, bit 0 first. The write port (wclk, we, waddr, wdata) is
// independent of the read side; the host should write only while not playing.
//
// The paper gives the 8 kB size, the bit-level length and the repetition; the
// 16-bit organisation and the gearbox are this design's own. len below 8 is
// not supported (treated as 8).
module play_memory #(
  parameter int unsigned MEM_BYTES = 8192,
  localparam int unsigned AW  = $clog2(MEM_BYTES),      // byte address width
  localparam int unsigned QW  = $clog2(MEM_BYTES / 2),  // 16-bit word address width
  localparam int unsigned LW  = $clog2(MEM_BYTES * 8) + 1
) (
  // host write port
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [7:0]    wdata,
  // playback side
  input  logic          clk,
  input  logic          rst,
  input  logic [LW-1:0] len,       // pattern length in bits, 8 .. MEM_BYTES*8
  input  logic          restart,
  input  logic          pop,
  output logic [7:0]    dout,
  output logic          underflow  // pop without eight bits available
);

  localparam int unsigned BUF_W = 40;
  localparam int unsigned NW    = MEM_BYTES / 2;

  logic [15:0] mem [NW];

  // ---------------- host write port ----------------
  always_ff @(posedge wclk) begin
    if (we) mem[waddr[AW-1:1]][8*waddr[0] +: 8] <= wdata;
  end

  // ---------------- fetch ----------------
  logic [LW-1:0] len_eff;
  logic [QW-1:0] last_q;      // index of the last (possibly partial) word
  logic [4:0]    last_v;      // valid bits in the last word, 1..16
  logic [QW-1:0] q;           // next word to fetch
  logic          fetch;
  logic [15:0]   rdata;
  logic          rd_valid;    // rdata holds the word fetched last cycle
  logic [4:0]    rd_v;        // ... and its number of valid bits

  always_comb begin
    len_eff = len;
    if (len < LW'(8)) len_eff = LW'(8);
    if (len > LW'(MEM_BYTES * 8)) len_eff = LW'(MEM_BYTES * 8);
  end
  assign last_q = QW'((len_eff - LW'(1)) >> 4);
  assign last_v = 5'(len_eff - {last_q, 4'b0000});

  always_ff @(posedge clk) rdata <= mem[q];

  // ---------------- bit buffer ----------------
  logic [BUF_W-1:0] buf_q;
  logic [5:0]       lvl;        // bits held in buf_q
  logic [BUF_W-1:0] buf_in;
  logic [5:0]       lvl_in;
  logic [15:0]      rmask;
  logic [5:0]       lvl_next;

  always_comb begin
    rmask  = (rd_v >= 5'd16) ? 16'hFFFF : 16'((17'd1 << rd_v) - 17'd1);
    buf_in = buf_q;
    lvl_in = lvl;
    if (rd_valid) begin
      buf_in = buf_q | (BUF_W'(rdata & rmask) << lvl);
      lvl_in = lvl + 6'(rd_v);
    end
    lvl_next = pop ? lvl_in - 6'd8 : lvl_in;
    fetch    = lvl_next < 6'd24;
  end

  assign dout      = buf_in[7:0];
  assign underflow = pop && (lvl_in < 6'd8);

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      buf_q    <= '0;
      lvl      <= '0;
      q        <= '0;
      rd_valid <= 1'b0;
      rd_v     <= '0;
    end else begin
      buf_q    <= pop ? (buf_in >> 8) : buf_in;
      lvl      <= lvl_next;
      rd_valid <= fetch;
      if (fetch) begin
        rd_v <= (q == last_q) ? last_v : 5'd16;
        q    <= (q == last_q) ? '0 : q + QW'(1);
      end
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !underflow)
    else $error("play_memory: bit buffer ran dry");

endmodule
