// mshr: miss status holding registers between the vector engine and the
// regular (storage) half of the L2 cache.
//
// Per-lane read requests (byte address, lane, pointer flag) are merged by
// cache line: a request to a line that already has an entry is added to that
// entry's target list; otherwise a free entry is taken and one line read is
// sent to the L2 port. When the line returns, its targets are handed out one
// per clock (line data, byte offset, lane, pointer flag) to the crossbar, and
// the entry is freed as soon as the line arrives. Write requests (whole line
// with byte enables) pass straight to the L2 port; their acknowledgements are
// counted so that `idle` only rises once every read has been delivered and
// every write acknowledged. If the L2 reports that a returned line is present
// in the L1 (its presence bit), the line is sent out on l1_evict to keep the
// inclusive hierarchy coherent.
//
// Handshakes: req_valid/req_ready, mem_req_valid/mem_req_ready,
// mem_rsp_valid/mem_rsp_ready. Delivery (out_valid) cannot be stalled.
//
// The paper has the controller send every lane's address to the L2's MSHRs
// (46 of them) to coalesce accesses, and the controller check the presence
// bit and evict from the L1; the number of targets per entry (8), the
// write path and the port format are this design's choices.
module mshr
  import mve_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 46,
  parameter int unsigned N_TARGETS = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // requests from the address generator / store path
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_we,
  input  logic [ADDR_W-1:0]     req_addr,
  input  logic [CBL_W-1:0]      req_lane,
  input  logic                  req_ptr,
  input  logic [LINE_BITS-1:0]  req_wline,
  input  logic [LINE_BYTES-1:0] req_be,
  // L2 port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_req_t              mem_req,
  input  logic                  mem_rsp_valid,
  output logic                  mem_rsp_ready,
  input  mem_rsp_t              mem_rsp,
  // deliveries
  output logic                  out_valid,
  output logic [LINE_BITS-1:0]  out_line,
  output logic [OFF_W-1:0]      out_off,
  output logic [CBL_W-1:0]      out_lane,
  output logic                  out_ptr,
  // coherence
  output logic                  l1_evict_valid,
  output logic [ADDR_W-1:OFF_W] l1_evict_line,
  output logic                  idle
);
  localparam int unsigned EW = $clog2(N_ENTRIES);
  localparam int unsigned TW = $clog2(N_TARGETS + 1);
  localparam int unsigned IW = $clog2(N_TARGETS);

  typedef struct packed {
    logic [OFF_W-1:0] off;
    logic [CBL_W-1:0] lane;
    logic             ptr;
  } target_t;

  logic                   e_vld  [N_ENTRIES];
  logic [ADDR_W-1:OFF_W]  e_line [N_ENTRIES];
  logic [TW-1:0]          e_cnt  [N_ENTRIES];
  target_t                e_tgt  [N_ENTRIES][N_TARGETS];

  // drain buffer for the line being delivered
  logic                   d_act;
  logic [LINE_BITS-1:0]   d_data;
  target_t                d_tgt [N_TARGETS];
  logic [TW-1:0]          d_cnt, d_pos;

  logic [15:0]            wr_out;   // writes awaiting acknowledgement

  logic                   hit, free_ok, rsp_hit;
  logic [EW-1:0]          hit_idx, free_idx, rsp_idx;
  logic [ADDR_W-1:OFF_W]  rline;
  target_t                new_tgt;
  logic                   acc_rd, acc_wr, rsp_take;

  always_comb begin
    rline   = req_addr[ADDR_W-1:OFF_W];
    new_tgt = '{off: req_addr[OFF_W-1:0], lane: req_lane, ptr: req_ptr};
    hit = 1'b0; hit_idx = '0; free_ok = 1'b0; free_idx = '0;
    rsp_hit = 1'b0; rsp_idx = '0;
    for (int e = N_ENTRIES-1; e >= 0; e--) begin
      if (e_vld[e] && e_line[e] == rline) begin hit = 1'b1; hit_idx = EW'(e); end
      if (!e_vld[e]) begin free_ok = 1'b1; free_idx = EW'(e); end
      if (e_vld[e] && e_line[e] == mem_rsp.line) begin rsp_hit = 1'b1; rsp_idx = EW'(e); end
    end

    mem_req_valid = 1'b0;
    mem_req       = '0;
    acc_rd        = 1'b0;
    acc_wr        = 1'b0;
    if (req_valid && req_we) begin
      mem_req_valid = 1'b1;
      mem_req       = '{we: 1'b1, line: rline, wdata: req_wline, be: req_be};
      acc_wr        = mem_req_ready;
    end else if (req_valid && !hit && free_ok) begin
      mem_req_valid = 1'b1;
      mem_req       = '{we: 1'b0, line: rline, wdata: '0, be: '0};
      acc_rd        = mem_req_ready;
    end else if (req_valid && hit && e_cnt[hit_idx] != TW'(N_TARGETS)
                 && !(mem_rsp_valid && !mem_rsp.we && !d_act && rsp_hit && rsp_idx == hit_idx)) begin
      acc_rd        = 1'b1;
    end
    req_ready = acc_rd | acc_wr;

    // a read response waits while an earlier line is still being delivered
    mem_rsp_ready = mem_rsp.we ? 1'b1 : !d_act;
    rsp_take      = mem_rsp_valid && mem_rsp_ready && !mem_rsp.we && rsp_hit;

    out_valid = d_act;
    out_line  = d_data;
    out_off   = d_tgt[d_pos[IW-1:0]].off;
    out_lane  = d_tgt[d_pos[IW-1:0]].lane;
    out_ptr   = d_tgt[d_pos[IW-1:0]].ptr;

    l1_evict_valid = mem_rsp_valid && mem_rsp_ready && mem_rsp.l1_present;
    l1_evict_line  = mem_rsp.line;
  end

  logic any_vld;
  always_comb begin
    any_vld = 1'b0;
    for (int e = 0; e < N_ENTRIES; e++) any_vld |= e_vld[e];
    idle = !any_vld && !d_act && (wr_out == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < N_ENTRIES; e++) begin
        e_vld[e]  <= 1'b0;
        e_line[e] <= '0;
        e_cnt[e]  <= '0;
      end
      d_act  <= 1'b0;
      d_data <= '0;
      d_cnt  <= '0;
      d_pos  <= '0;
      wr_out <= '0;
    end else begin
      // new read target
      if (acc_rd) begin
        if (hit) begin
          e_tgt[hit_idx][e_cnt[hit_idx][IW-1:0]] <= new_tgt;
          e_cnt[hit_idx] <= e_cnt[hit_idx] + 1'b1;
        end else begin
          e_vld[free_idx]     <= 1'b1;
          e_line[free_idx]    <= rline;
          e_cnt[free_idx]     <= TW'(1);
          e_tgt[free_idx][0]  <= new_tgt;
        end
      end
      // line returned: move its targets to the drain buffer, free the entry
      if (rsp_take) begin
        e_vld[rsp_idx] <= 1'b0;
        d_act  <= 1'b1;
        d_data <= mem_rsp.rdata;
        d_cnt  <= e_cnt[rsp_idx];
        d_pos  <= '0;
        for (int t = 0; t < N_TARGETS; t++) d_tgt[t] <= e_tgt[rsp_idx][t];
      end else if (d_act) begin
        d_pos <= d_pos + 1'b1;
        if (d_pos + 1'b1 == d_cnt) d_act <= 1'b0;
      end
      // outstanding writes
      unique case ({acc_wr, mem_rsp_valid && mem_rsp.we})
        2'b10:   wr_out <= wr_out + 1'b1;
        2'b01:   wr_out <= wr_out - 1'b1;
        default: ;
      endcase
    end
  end

  // A response must match an outstanding read or be a write acknowledgement.
  a_rsp_known: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid && mem_rsp_ready && !mem_rsp.we |-> rsp_hit);

endmodule
