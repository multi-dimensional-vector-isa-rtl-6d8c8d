// xb: crossbar between 64-byte cache lines and element words.
//
// Read direction: picks the element of 1, 2, 4 or 8 bytes (rd_size_l2 = log2
// of the byte count) at byte offset rd_off of a returned line and zero-extends it
// to a 64-bit word for the transpose unit (or, for pointer fetches, the
// address generator). Write direction: places a word at byte offset wr_off of
// an otherwise empty line (element size wr_size_l2) and sets the byte enables of the bytes it covers.
// Purely combinational.
//
// The paper names the crossbar and its job (route words to their lanes in the
// TMU); line size, alignment rule (an element never crosses a line, offsets are
// taken modulo the element size) and zero extension are this design's choices.
module xb
  import mve_pkg::*;
(
  // line -> word
  input  logic [1:0]            rd_size_l2,
  input  logic [LINE_BITS-1:0]  rd_line,
  input  logic [OFF_W-1:0]      rd_off,
  output logic [MAX_W-1:0]      rd_word,
  // word -> line
  input  logic [1:0]            wr_size_l2,
  input  logic [MAX_W-1:0]      wr_word,
  input  logic [OFF_W-1:0]      wr_off,
  output logic [LINE_BITS-1:0]  wr_line,
  output logic [LINE_BYTES-1:0] wr_be
);
  logic [OFF_W-1:0] ra, wa;
  logic [MAX_W-1:0] raw, rkeep, wkeep;
  logic [7:0]       nbytes;
  logic [LINE_BITS+MAX_W-1:0] rext, wext;   // padded so a slice never runs off the line

  always_comb begin
    // align the offsets to the element size
    ra     = rd_off & ~OFF_W'((1 << rd_size_l2) - 1);
    wa     = wr_off & ~OFF_W'((1 << wr_size_l2) - 1);
    nbytes = 8'(1 << wr_size_l2);
    rkeep  = (rd_size_l2 == 2'd3) ? '1 : ((MAX_W'(1) << (8 << rd_size_l2)) - 1'b1);
    wkeep  = (wr_size_l2 == 2'd3) ? '1 : ((MAX_W'(1) << (8 << wr_size_l2)) - 1'b1);
    rext    = {MAX_W'(0), rd_line};
    raw     = rext[8*ra +: MAX_W];
    rd_word = raw & rkeep;
    wext    = '0;
    wext[8*wa +: MAX_W] = wr_word & wkeep;
    wr_line = wext[LINE_BITS-1:0];
    wr_be   = LINE_BYTES'(((LINE_BYTES+1)'(1) << nbytes) - 1'b1) << wa;
  end

endmodule
