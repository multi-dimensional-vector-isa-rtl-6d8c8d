// agu: per-lane address generator for multi-dimensional strided and
// random-base vector loads and stores.
//
// A physical register holds up to 8192 lanes; the active dimensions
// (1 to 4, count dimc, lengths len[i]) flatten onto them with dimension 0
// fastest: lane = ((w*L2 + z)*L1 + y)*L0 + x. For a strided access lane
// (w,z,y,x) reads element
//     base + (w*S3 + z*S2 + y*S1 + x*S0) * element_size
// and for a random access the highest active dimension h = dimc-1 is taken
// from a table of pointers in memory, base_w = MEM64[base + 8*w], and the
// lower dimensions are strided from it. Each stride comes from a 2-bit mode
// per dimension: 0 -> 0 (replicate), 1 -> 1 (consecutive), 2 -> S(i-1) *
// L(i-1) (continues the dimension below it; 1 for dimension 0), 3 -> the
// stride control register of that dimension.
//
// The unit walks the lanes in order, one per clock, keeping one index and one
// running offset per dimension so no multiplier sits in the per-lane path.
// Lanes whose highest-dimension element is masked off, and lanes past the
// last element, produce nothing. It works on one control block (1024 lanes)
// at a time: `start` loads the configuration and begins block 0, `next`
// continues with the following block, and `cb_done` is raised once the block
// has been walked (at once, when every element has already been produced).
// Outputs: lane requests (lane within the block, byte address) and, for random
// accesses, pointer fetches (ptr set), answered on ptr_rsp_valid/ptr_rsp.
//
// Algorithm 1 and Figs. 3 and 4 of the paper give the addressing and the
// stride modes. The paper's Eq. 2 indexes the random case as z*S3 + y*S2 +
// x*S1, while its Fig. 4 and code examples give dimension 0 the first stride
// mode; this unit follows the figure and code. Byte addressing, 64-bit
// pointers and the walk order are this design's choices.
module agu
  import mve_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration, sampled on start
  input  logic                 start,
  input  logic                 next,
  input  logic                 random,
  input  logic [7:0]           modes,
  input  logic [ADDR_W-1:0]    base,
  input  logic [2:0]           dimc,
  input  logic [LEN_W-1:0]     len    [N_DIMS],
  input  logic [ADDR_W-1:0]    str_cr [N_DIMS],
  input  logic [1:0]           size_l2,
  input  logic [MAX_HI_LEN-1:0] mask,
  // lane requests
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic                 out_ptr,     // this is a pointer fetch
  output logic [CBL_W-1:0]     out_lane,
  output logic [ADDR_W-1:0]    out_addr,
  // pointer return
  input  logic                 ptr_rsp_valid,
  input  logic [ADDR_W-1:0]    ptr_rsp,
  output logic                 cb_done,
  output logic                 all_done
);
  typedef enum logic [1:0] { A_IDLE, A_WALK, A_WAIT } astate_e;

  astate_e                 state;
  logic                    rnd_q;
  logic [1:0]              sz_q;
  logic [ADDR_W-1:0]       base_q;
  logic [2:0]              dimc_q;
  logic [LEN_W-1:0]        len_q [N_DIMS];
  logic [ADDR_W-1:0]       s_q   [N_DIMS];
  logic [LEN_W-1:0]        idx   [N_DIMS];
  logic [ADDR_W-1:0]       acc   [N_DIMS];
  logic [LANE_W:0]         g;           // global lane
  logic                    exhausted;
  logic                    ptr_ok, ptr_pend;
  logic [ADDR_W-1:0]       ptr_q;

  // effective strides of the incoming configuration
  logic [ADDR_W-1:0]       s_new [N_DIMS];
  logic [LEN_W-1:0]        len_new [N_DIMS];
  logic [1:0]              hi_new;

  always_comb begin
    hi_new = 2'(dimc - 3'd1);
    for (int d = 0; d < N_DIMS; d++) begin
      len_new[d] = (3'(d) < dimc) ? len[d] : LEN_W'(1);
      unique case (modes[2*d +: 2])
        2'd0: s_new[d] = '0;
        2'd1: s_new[d] = 64'd1;
        2'd2: s_new[d] = (d == 0) ? 64'd1 : s_new[(d == 0) ? 0 : d-1] * 64'(len_new[(d == 0) ? 0 : d-1]);
        default: s_new[d] = str_cr[d];
      endcase
    end
    // random: the pointer table replaces the highest dimension's stride
    if (random) s_new[hi_new] = '0;
  end

  logic [1:0]        hi;
  logic [LEN_W-1:0]  w;
  logic              lane_on, need_ptr, cb_end, adv;
  logic [LEN_W-1:0]  nidx [N_DIMS];
  logic [ADDR_W-1:0] nacc [N_DIMS];
  logic              nexh;

  always_comb begin
    hi       = 2'(dimc_q - 3'd1);
    w        = idx[hi];
    // only the first 256 highest-dimension elements have a mask bit
    lane_on  = !exhausted && ((w >= LEN_W'(MAX_HI_LEN)) || mask[w[7:0]]);
    need_ptr = rnd_q && lane_on && !ptr_ok;
    cb_end   = (g[CBL_W-1:0] == '1);

    out_valid = (state == A_WALK) && lane_on && !ptr_pend;
    out_ptr   = need_ptr;
    out_lane  = g[CBL_W-1:0];
    out_addr  = need_ptr ? base_q + ADDR_W'({w, 3'b000})
                         : (rnd_q ? ptr_q : base_q) + (acc[0] << sz_q);
    // a lane moves on when it needs nothing or its request was taken
    adv = (state == A_WALK) && (!lane_on || (!need_ptr && out_ready));

    // next index: lowest dimension that does not wrap is incremented
    nexh = 1'b1;
    for (int d = 0; d < N_DIMS; d++) begin
      nidx[d] = idx[d];
      nacc[d] = acc[d];
    end
    for (int d = N_DIMS-1; d >= 0; d--) begin
      if (idx[d] + LEN_W'(1) < len_q[d]) begin
        // every dimension below d restarts from the new value of d
        nexh = 1'b0;
        nidx[d] = idx[d] + LEN_W'(1);
        nacc[d] = acc[d] + s_q[d];
        for (int e = 0; e < N_DIMS; e++) begin
          if (e < d) begin
            nidx[e] = '0;
            nacc[e] = acc[d] + s_q[d];
          end else if (e > d) begin
            nidx[e] = idx[e];
            nacc[e] = acc[e];
          end
        end
      end
    end
  end

  assign cb_done  = (state == A_WAIT);
  assign all_done = exhausted;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= A_IDLE;
      rnd_q     <= 1'b0;
      sz_q      <= '0;
      base_q    <= '0;
      dimc_q    <= 3'd1;
      g         <= '0;
      exhausted <= 1'b1;
      ptr_ok    <= 1'b0;
      ptr_pend  <= 1'b0;
      ptr_q     <= '0;
      for (int d = 0; d < N_DIMS; d++) begin
        len_q[d] <= LEN_W'(1);
        s_q[d]   <= '0;
        idx[d]   <= '0;
        acc[d]   <= '0;
      end
    end else begin
      if (start) begin
        state     <= A_WALK;
        rnd_q     <= random;
        sz_q      <= size_l2;
        base_q    <= base;
        dimc_q    <= dimc;
        g         <= '0;
        exhausted <= 1'b0;
        ptr_ok    <= 1'b0;
        ptr_pend  <= 1'b0;
        for (int d = 0; d < N_DIMS; d++) begin
          len_q[d] <= len_new[d];
          s_q[d]   <= s_new[d];
          idx[d]   <= '0;
          acc[d]   <= '0;
        end
      end else begin
        unique case (state)
          A_WALK: begin
            if (need_ptr && out_ready && !ptr_pend) ptr_pend <= 1'b1;
            if (ptr_rsp_valid) begin
              ptr_pend <= 1'b0;
              ptr_ok <= 1'b1;
              ptr_q  <= ptr_rsp;
            end
            if (exhausted) begin
              state <= A_WAIT;
              g     <= (g | (LANE_W+1)'(CB_LANES - 1)) + 1'b1;
            end else if (adv) begin
              g <= g + 1'b1;
              for (int d = 0; d < N_DIMS; d++) begin
                idx[d] <= nidx[d];
                acc[d] <= nacc[d];
              end
              if (nexh) exhausted <= 1'b1;
              if (nidx[hi] != idx[hi]) ptr_ok <= 1'b0;
              if (cb_end) state <= A_WAIT;
            end
          end
          A_WAIT: if (next) begin
            state <= A_WALK;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
