// control_block: one control block (CB) of the in-cache vector engine: a
// micro-op sequencer (cb_fsm) driving four 256x256 compute SRAM arrays, 1024
// SIMD lanes in all.
//
// The controller hands the CB one command at a time (cmd_valid/cmd_ready) and
// the CB pulses ack when the command's last micro-op has executed. Every
// micro-op goes to the four arrays together. For transfers with the transpose
// memory unit (TMU), the CB exchanges one 1024-bit slice per cycle: on a load
// it writes slice slice_idx of the TMU into a word-line, on lanes the TMU
// marks valid only; on a store it reads a word-line and presents it on
// slice_out with slice_wr set. Lane l of the CB is bit-line l%256 of array
// l/256.
//
// One FSM per four arrays and the ops/ACK/data connections follow the paper;
// the lane numbering across the four arrays is this design's choice.
module control_block
  import mve_pkg::*;
#(
  parameter int unsigned NARR  = ARRAYS_PER_CB,
  parameter int unsigned NCOLS = COLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  cb_cmd_t                 cmd,
  output logic                    ack,
  output logic                    busy,
  // transpose memory unit side
  input  logic [NARR*NCOLS-1:0]   slice_in,
  input  logic [NARR*NCOLS-1:0]   lane_valid,
  output logic [NARR*NCOLS-1:0]   slice_out,
  output logic [5:0]              slice_idx,
  output logic                    slice_rd,
  output logic                    slice_wr,
  output logic [NARR*NCOLS-1:0]   tag       // per-lane tag latches
);
  uop_t uop;
  logic ext_wps;
  logic [NARR*NCOLS-1:0] wps;

  cb_fsm u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .cmd_valid (cmd_valid),
    .cmd_ready (cmd_ready),
    .cmd       (cmd),
    .uop       (uop),
    .ext_wps   (ext_wps),
    .slice_rd  (slice_rd),
    .slice_wr  (slice_wr),
    .slice_idx (slice_idx),
    .busy      (busy),
    .ack       (ack)
  );

  assign wps = ext_wps ? lane_valid : '1;

  for (genvar a = 0; a < NARR; a++) begin : g_arr
    data_array #(.NCOLS(NCOLS)) u_arr (
      .clk   (clk),
      .rst_n (rst_n),
      .uop   (uop),
      .din   (slice_in[a*NCOLS +: NCOLS]),
      .wps   (wps[a*NCOLS +: NCOLS]),
      .dout  (slice_out[a*NCOLS +: NCOLS]),
      .t_q   (tag[a*NCOLS +: NCOLS])
    );
  end

endmodule
