// mve_top: the multi-dimensional vector engine built into half of a private
// L2 cache, together with the address decoder it adds to the core's
// load/store queue.
//
// Blocks and their connections:
//   core --instr--> mve_controller --commands--> 8 x control_block
//                                                 (FSM + 4 x 256x256 arrays)
//   mve_controller --memory op--> agu --lane addresses--> mshr --> L2 port
//   L2 port --lines--> mshr --targets--> xb --words--> tmu --bit-slices--> CB
//   CB --bit-slices--> tmu --words--> xb --lines--> mshr --> L2 port
//   core --config / committed stores / scalar load addresses--> address_decoder
// The TMU is shared by the eight CBs; the controller selects which CB's slice
// port is connected to it for the memory op in progress.
//
// Core side: core_valid/core_ready/core_instr (an instruction is taken when
// both are high; a vector store is also entered into the address decoder's
// write buffer at that moment), ld_addr/ld_conflict (dependence check of a
// scalar load against in-flight vector stores). L2 side: one request /
// response port to the regular half of the L2 (cache controller, storage
// ways, LLC and memory behind it, not part of this design), and l1_evict for
// lines whose presence bit says they are also in the L1.
//
// Structure follows the paper's cache-architecture figure (controller with
// instruction queue and CB PCs, eight CBs of four arrays, MSHR, XB-TMU,
// address decoder in the core). Port formats are this design's own.
module mve_top
  import mve_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // core
  input  logic                  core_valid,
  output logic                  core_ready,
  input  mve_instr_t            core_instr,
  input  logic [ADDR_W-1:0]     ld_addr,
  output logic                  ld_conflict,
  // regular half of the L2
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_req_t              mem_req,
  input  logic                  mem_rsp_valid,
  output logic                  mem_rsp_ready,
  input  mem_rsp_t              mem_rsp,
  output logic                  l1_evict_valid,
  output logic [ADDR_W-1:OFF_W] l1_evict_line,
  // status
  output logic                  busy
);
  localparam int unsigned CW = $clog2(N_CB);

  // ---------------- core side ----------------
  logic       ctl_ready, ad_st_ready, take, take_store;
  logic       st_done;
  logic [$clog2(8+1)-1:0] wb_count;

  assign take_store = is_store(core_instr.op);
  assign core_ready = ctl_ready && (!take_store || ad_st_ready);
  assign take       = core_valid && core_ready;

  address_decoder u_ad (
    .clk         (clk),
    .rst_n       (rst_n),
    .cfg_valid   (take && is_config(core_instr.op)),
    .cfg         (core_instr),
    .st_valid    (take && take_store),
    .st_ready    (ad_st_ready),
    .st          (core_instr),
    .st_done     (st_done),
    .ld_addr     (ld_addr),
    .ld_conflict (ld_conflict),
    .wb_count    (wb_count)
  );

  // ---------------- controller ----------------
  logic [N_CB-1:0]       cb_valid, cb_ready, cb_ack, cb_busy;
  cb_cmd_t               cb_cmd [N_CB];
  logic                  agu_start, agu_next, agu_random, agu_cb_done, agu_all_done;
  logic [7:0]            agu_modes;
  logic [ADDR_W-1:0]     agu_base;
  logic [2:0]            cr_dimc;
  logic [LEN_W-1:0]      cr_len [N_DIMS];
  logic [ADDR_W-1:0]     agu_str [N_DIMS];
  logic [1:0]            mem_size_l2;
  logic [MAX_HI_LEN-1:0] cr_mask;
  logic                  mshr_idle, mem_store, tmu_clear, mem_busy, cfg_busy;
  logic [CW-1:0]         mem_cb;

  mve_controller u_ctl (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (core_valid && core_ready),
    .in_ready    (ctl_ready),
    .in_instr    (core_instr),
    .cb_valid    (cb_valid),
    .cb_ready    (cb_ready),
    .cb_cmd      (cb_cmd),
    .cb_ack      (cb_ack),
    .agu_start   (agu_start),
    .agu_next    (agu_next),
    .agu_random  (agu_random),
    .agu_modes   (agu_modes),
    .agu_base    (agu_base),
    .cr_dimc     (cr_dimc),
    .cr_len      (cr_len),
    .agu_str     (agu_str),
    .mem_size_l2 (mem_size_l2),
    .cr_mask     (cr_mask),
    .agu_cb_done (agu_cb_done),
    .mshr_idle   (mshr_idle),
    .mem_store   (mem_store),
    .mem_cb      (mem_cb),
    .tmu_clear   (tmu_clear),
    .st_done     (st_done),
    .mem_busy    (mem_busy),
    .cfg_busy    (cfg_busy)
  );

  // ---------------- control blocks ----------------
  logic [CB_LANES-1:0] tmu_slice, tmu_valid;
  logic [CB_LANES-1:0] cb_slice_out [N_CB];
  logic [5:0]          cb_slice_idx [N_CB];
  logic [N_CB-1:0]     cb_slice_rd, cb_slice_wr;
  logic [CB_LANES-1:0] cb_tag [N_CB];

  for (genvar c = 0; c < N_CB; c++) begin : g_cb
    control_block u_cb (
      .clk        (clk),
      .rst_n      (rst_n),
      .cmd_valid  (cb_valid[c]),
      .cmd_ready  (cb_ready[c]),
      .cmd        (cb_cmd[c]),
      .ack        (cb_ack[c]),
      .busy       (cb_busy[c]),
      .slice_in   (tmu_slice),
      .lane_valid (tmu_valid),
      .slice_out  (cb_slice_out[c]),
      .slice_idx  (cb_slice_idx[c]),
      .slice_rd   (cb_slice_rd[c]),
      .slice_wr   (cb_slice_wr[c]),
      .tag        (cb_tag[c])
    );
  end

  // ---------------- address generation and memory path ----------------
  logic                 agu_valid, agu_ready, agu_ptr;
  logic [CBL_W-1:0]     agu_lane;
  logic [ADDR_W-1:0]    agu_addr;
  logic                 ptr_rsp_valid;
  logic [MAX_W-1:0]     xb_rd_word, tmu_rd_data;
  logic [LINE_BITS-1:0] xb_wr_line, m_out_line;
  logic [LINE_BYTES-1:0] xb_wr_be;
  logic                 m_out_valid, m_out_ptr;
  logic [OFF_W-1:0]     m_out_off;
  logic [CBL_W-1:0]     m_out_lane;

  agu u_agu (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (agu_start),
    .next          (agu_next),
    .random        (agu_random),
    .modes         (agu_modes),
    .base          (agu_base),
    .dimc          (cr_dimc),
    .len           (cr_len),
    .str_cr        (agu_str),
    .size_l2       (mem_size_l2),
    .mask          (cr_mask),
    .out_valid     (agu_valid),
    .out_ready     (agu_ready),
    .out_ptr       (agu_ptr),
    .out_lane      (agu_lane),
    .out_addr      (agu_addr),
    .ptr_rsp_valid (ptr_rsp_valid),
    .ptr_rsp       (xb_rd_word),
    .cb_done       (agu_cb_done),
    .all_done      (agu_all_done)
  );

  mshr u_mshr (
    .clk            (clk),
    .rst_n          (rst_n),
    .req_valid      (agu_valid),
    .req_ready      (agu_ready),
    .req_we         (mem_store && !agu_ptr),
    .req_addr       (agu_addr),
    .req_lane       (agu_lane),
    .req_ptr        (agu_ptr),
    .req_wline      (xb_wr_line),
    .req_be         (xb_wr_be),
    .mem_req_valid  (mem_req_valid),
    .mem_req_ready  (mem_req_ready),
    .mem_req        (mem_req),
    .mem_rsp_valid  (mem_rsp_valid),
    .mem_rsp_ready  (mem_rsp_ready),
    .mem_rsp        (mem_rsp),
    .out_valid      (m_out_valid),
    .out_line       (m_out_line),
    .out_off        (m_out_off),
    .out_lane       (m_out_lane),
    .out_ptr        (m_out_ptr),
    .l1_evict_valid (l1_evict_valid),
    .l1_evict_line  (l1_evict_line),
    .idle           (mshr_idle)
  );

  xb u_xb (
    .rd_size_l2 (m_out_ptr ? 2'd3 : mem_size_l2),
    .rd_line    (m_out_line),
    .rd_off     (m_out_off),
    .rd_word    (xb_rd_word),
    .wr_size_l2 (mem_size_l2),
    .wr_word    (tmu_rd_data),
    .wr_off     (agu_addr[OFF_W-1:0]),
    .wr_line    (xb_wr_line),
    .wr_be      (xb_wr_be)
  );

  assign ptr_rsp_valid = m_out_valid && m_out_ptr;

  tmu u_tmu (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (tmu_clear),
    .wr_en     (m_out_valid && !m_out_ptr),
    .wr_lane   (m_out_lane),
    .wr_data   (xb_rd_word),
    .rd_lane   (agu_lane),
    .rd_data   (tmu_rd_data),
    .slice_idx (cb_slice_idx[mem_cb]),
    .slice_out (tmu_slice),
    .slice_wr  (cb_slice_wr[mem_cb]),
    .slice_in  (cb_slice_out[mem_cb]),
    .valid     (tmu_valid)
  );

  assign busy = mem_busy || cfg_busy || (|cb_busy) || !mshr_idle || (wb_count != '0);

endmodule
