// address_decoder: memory-dependence check in the core's load/store queue for
// vector stores that are still executing in the cache.
//
// It keeps a copy of the dimension count, the dimension lengths, the store
// stride registers and the element width, updated from the configuration
// instructions the core sends to the cache (cfg_valid/cfg). When a vector
// store commits (st_valid), it computes the store's address range
//     [Base, Base + sum_i Len_i * Stride_i * element_bytes)
// over the active dimensions, with each stride resolved from the store's
// stride mode as the address generator does, and places the range in a
// write buffer entry. The entry leaves the buffer, oldest first, when the
// cache acknowledges the store (st_done). A scalar load (ld_addr) is flagged
// (ld_conflict, combinational) when it falls inside any buffered range, so the
// core can hold it while younger loads that do not overlap proceed.
//
// The range formula and the copy of the configuration registers follow the
// paper. The write-buffer depth (8), treating a random-base store as covering
// all of memory (its row addresses are not known to the core) and st_ready
// back-pressure when the buffer is full are this design's choices.
module address_decoder
  import mve_pkg::*;
#(
  parameter int unsigned WB_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  mve_instr_t        cfg,
  input  logic              st_valid,
  output logic              st_ready,
  input  mve_instr_t        st,
  input  logic              st_done,
  input  logic [ADDR_W-1:0] ld_addr,
  output logic              ld_conflict,
  output logic [$clog2(WB_DEPTH+1)-1:0] wb_count
);
  localparam int unsigned PW = $clog2(WB_DEPTH);

  logic [2:0]        dimc;
  logic [LEN_W-1:0]  len [N_DIMS];
  logic [ADDR_W-1:0] sstr [N_DIMS];
  logic [6:0]        width;

  logic [ADDR_W-1:0] wb_lo  [WB_DEPTH];
  logic [ADDR_W-1:0] wb_hi  [WB_DEPTH];
  logic              wb_all [WB_DEPTH];
  logic [PW-1:0]     rp, wp;
  logic [$clog2(WB_DEPTH+1)-1:0] cnt;

  // range of the committing store
  logic [ADDR_W-1:0] s_eff [N_DIMS];
  logic [ADDR_W-1:0] span, range_hi;
  logic [LEN_W-1:0]  len_eff [N_DIMS];

  always_comb begin
    span = '0;
    for (int d = 0; d < N_DIMS; d++) begin
      len_eff[d] = (3'(d) < dimc) ? len[d] : LEN_W'(1);
      unique case (st.modes[2*d +: 2])
        2'd0: s_eff[d] = '0;
        2'd1: s_eff[d] = 64'd1;
        2'd2: s_eff[d] = (d == 0) ? 64'd1 : s_eff[(d == 0) ? 0 : d-1] * 64'(len_eff[(d == 0) ? 0 : d-1]);
        default: s_eff[d] = sstr[d];
      endcase
      if (3'(d) < dimc) span = span + 64'(len_eff[d]) * s_eff[d];
    end
    range_hi = st.rs + (span << size_log2(width));
  end

  assign st_ready = (cnt != WB_DEPTH[$clog2(WB_DEPTH+1)-1:0]);
  assign wb_count = cnt;

  always_comb begin
    ld_conflict = 1'b0;
    for (int e = 0; e < WB_DEPTH; e++) begin
      // entry e is live when it lies between the read and write pointers
      if (PW'(e - int'(rp)) < cnt[PW-1:0] || cnt == WB_DEPTH[$clog2(WB_DEPTH+1)-1:0])
        if (wb_all[e] || (ld_addr >= wb_lo[e] && ld_addr < wb_hi[e]))
          ld_conflict = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dimc  <= 3'd1;
      width <= 7'd32;
      rp    <= '0;
      wp    <= '0;
      cnt   <= '0;
      for (int d = 0; d < N_DIMS; d++) begin
        len[d]  <= LEN_W'(1);
        sstr[d] <= '0;
      end
      for (int e = 0; e < WB_DEPTH; e++) begin
        wb_lo[e]  <= '0;
        wb_hi[e]  <= '0;
        wb_all[e] <= 1'b0;
      end
    end else begin
      if (cfg_valid) begin
        unique case (cfg.op)
          OP_SETDIMC:  dimc <= cfg.rs[2:0];
          OP_SETDIML:  len[cfg.imm[1:0]]  <= cfg.rs[LEN_W-1:0];
          OP_SETSTSTR: sstr[cfg.imm[1:0]] <= cfg.rs;
          OP_SETWIDTH: width <= cfg.imm[6:0];
          default: ;
        endcase
      end
      if (st_valid && st_ready) begin
        wb_lo[wp]  <= st.rs;
        wb_hi[wp]  <= range_hi;
        wb_all[wp] <= (st.op == OP_RST);
        wp <= wp + 1'b1;
      end
      if (st_done && cnt != '0) rp <= rp + 1'b1;
      unique case ({st_valid && st_ready, st_done && cnt != '0})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: ;
      endcase
    end
  end

endmodule
