// tmu: transpose memory unit. Holds one physical register of one control
// block (1024 elements of up to 64 bits) in cells readable and writable both
// as words (one element, by lane) and as bit-slices (bit b of all 1024 lanes).
//
// Loads: the crossbar writes returning words into their lanes (wr_*), each
// write marking the lane valid; `clear` drops all valid bits before a block
// is filled. The control block then reads bit-slice 0..n-1 (slice_idx ->
// slice_out) and writes them into its arrays on the valid lanes only.
// Stores: the control block writes its register slice by slice (slice_wr),
// then words are read out by lane (rd_lane -> rd_data, combinational).
// Word and slice ports are used in different phases, so they never collide.
//
// The paper gives the function (8T transpose cells sized for one CB's
// register, 1024 elements) and names the cell type; storage here is a flop
// array organised as 64 bit-planes. The per-lane valid bits are this design's
// way of leaving lanes without a fetched element untouched.
module tmu
  import mve_pkg::*;
#(
  parameter int unsigned LANES = CB_LANES,
  parameter int unsigned W     = MAX_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  // word side
  input  logic                     wr_en,
  input  logic [$clog2(LANES)-1:0] wr_lane,
  input  logic [W-1:0]             wr_data,
  input  logic [$clog2(LANES)-1:0] rd_lane,
  output logic [W-1:0]             rd_data,
  // bit-slice side
  input  logic [$clog2(W)-1:0]     slice_idx,
  output logic [LANES-1:0]         slice_out,
  input  logic                     slice_wr,
  input  logic [LANES-1:0]         slice_in,
  output logic [LANES-1:0]         valid
);
  logic [LANES-1:0] plane [W];

  always_ff @(posedge clk) begin
    if (slice_wr) plane[slice_idx] <= slice_in;
    else if (wr_en)
      for (int b = 0; b < W; b++) plane[b][wr_lane] <= wr_data[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          valid <= '0;
    else if (clear)      valid <= '0;
    else if (wr_en)      valid[wr_lane] <= 1'b1;
  end

  always_comb begin
    slice_out = plane[slice_idx];
    for (int b = 0; b < W; b++) rd_data[b] = plane[b][rd_lane];
  end

endmodule
