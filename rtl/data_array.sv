// data_array: one compute-capable SRAM array (256 word-lines x 256 bit-lines)
// with two row decoders and a bit-serial peripheral under every bit-line.
//
// Elements are stored transposed: each bit-line is one SIMD lane and an n-bit
// register occupies n consecutive word-lines, least significant bit first.
// Each cycle the array can activate up to two word-lines (ra through row
// decoder 0, rb through row decoder 1). With both active the bit-line reads as
// the AND of the two cells and the complement bit-line as their NOR; with one
// active they read the cell and its complement. The peripherals compute one
// bit-slice of the result, which is written into word-line rw at the clock
// edge, lane by lane as each peripheral's write enable allows. A micro-op
// that reads and writes the same word-line reads the old value.
//
// Interface: uop (shared micro-op), din/wps (per-lane external data and write
// select), dout (per-lane sensed A&B, used to read a bit-slice out), t_q
// (per-lane tag latches). One micro-op per cycle, no stalls.
//
// The 256x256 size, dual row decoders and vertical layout follow the paper;
// the array is a plain register array here (no analog sensing) and its
// contents are not reset, like an SRAM.
module data_array
  import mve_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  uop_t             uop,
  input  logic [NCOLS-1:0] din,
  input  logic [NCOLS-1:0] wps,
  output logic [NCOLS-1:0] dout,
  output logic [NCOLS-1:0] t_q
);
  localparam int unsigned RW = $clog2(NROWS);

  logic [NCOLS-1:0] mem [NROWS];
  logic [NCOLS-1:0] row_a, row_b, bl_and, bl_nor, wbit, wen;

  always_comb begin
    row_a  = mem[uop.ra[RW-1:0]];
    row_b  = mem[uop.rb[RW-1:0]];
    // an inactive word-line leaves both bit-lines precharged high
    bl_and = (uop.rd0 ? row_a : '1) & (uop.rd1 ? row_b : '1);
    bl_nor = ~((uop.rd0 ? row_a : '0) | (uop.rd1 ? row_b : '0));
  end

  for (genvar c = 0; c < NCOLS; c++) begin : g_bl
    bitline_peripheral u_pe (
      .clk    (clk),
      .rst_n  (rst_n),
      .sa_and (bl_and[c]),
      .sa_nor (bl_nor[c]),
      .din    (din[c]),
      .wps    (wps[c]),
      .uop    (uop),
      .wbit   (wbit[c]),
      .wen    (wen[c]),
      .dout   (dout[c]),
      .t_q    (t_q[c])
    );
  end

  always_ff @(posedge clk) begin
    if (uop.wr)
      mem[uop.rw[RW-1:0]] <= (mem[uop.rw[RW-1:0]] & ~wen) | (wbit & wen);
  end

endmodule
