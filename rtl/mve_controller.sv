// mve_controller: front end of the in-cache vector engine.
//
// Instructions arrive from the core in program order (in_valid/in_ready).
//  * Configuration instructions (dimension count and lengths, stride
//    registers, element width, dimension-level mask) update the control
//    registers (CRs) at once and take no queue slot. After a change of the
//    dimensions or the mask, a walk over the highest-dimension elements
//    (one element per clock, at most 256) recomputes which control blocks
//    (CBs) hold at least one unmasked lane; new instructions wait for it.
//  * Compute and memory instructions enter the instruction queue together with
//    a pending bit per CB (the CBs that are not masked off) and the element
//    width in force.
// Each CB has its own PC into the queue. A CB whose PC points at an entry
// with its pending bit clear skips it; otherwise it receives the command
// (operation and the first word-lines of its registers, register r of width n
// starting at word-line r*n) and on its ACK clears its bit and moves on. CBs
// therefore run ahead of each other. The oldest entry leaves the queue once no
// CB has its bit set.
//
// Memory instructions are handled by a sequencer here, one at a time: from
// the moment one is queued, no further instruction is accepted until it has
// finished, so the CRs it uses stay fixed. For each CB in turn (0 to 7):
//   load:  clear the transpose unit (TMU), let the address generator walk the
//          CB's 1024 lanes (requests go through the MSHRs, data return into the
//          TMU), wait until the MSHRs are idle, then, once the CB has reached
//          the load, command it to copy the TMU into the register (n cycles).
//   store: once the CB has reached the store, command it to copy the register
//          into the TMU, then walk the lanes, writing each element out, and
//          wait until every write is acknowledged.
// After the last CB a store is reported done (st_done) to the core's write
// buffer.
//
// The queue with per-CB PCs and pending bit-vectors, skipping masked entries,
// dequeue when all bits are clear, one memory instruction at a time, CRs set by
// config instructions and the 256-element mask follow the paper. The 2 KB
// queue holds 128 slots of 16 bytes. Applying config instructions at enqueue
// and accepting nothing while a memory instruction is queued are this
// design's choices. Greater-than and less-or-equal are sent to the CB as
// less-than and greater-or-equal with swapped operands.
module mve_controller
  import mve_pkg::*;
#(
  parameter int unsigned IQ_BYTES = 2048,
  parameter int unsigned SLOT_BYTES = 16,
  parameter int unsigned NCB = N_CB
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the core
  input  logic               in_valid,
  output logic               in_ready,
  input  mve_instr_t         in_instr,
  // control blocks
  output logic [NCB-1:0]     cb_valid,
  input  logic [NCB-1:0]     cb_ready,
  output cb_cmd_t            cb_cmd [NCB],
  input  logic [NCB-1:0]     cb_ack,
  // address generator
  output logic               agu_start,
  output logic               agu_next,
  output logic               agu_random,
  output logic [7:0]         agu_modes,
  output logic [ADDR_W-1:0]  agu_base,
  output logic [2:0]         cr_dimc,
  output logic [LEN_W-1:0]   cr_len [N_DIMS],
  output logic [ADDR_W-1:0]  agu_str [N_DIMS],
  output logic [1:0]         mem_size_l2,
  output logic [MAX_HI_LEN-1:0] cr_mask,
  input  logic               agu_cb_done,
  // memory datapath
  input  logic               mshr_idle,
  output logic               mem_store,     // the running memory op is a store
  output logic [$clog2(NCB)-1:0] mem_cb,    // CB connected to the TMU
  output logic               tmu_clear,
  output logic               st_done,
  output logic               mem_busy,
  output logic               cfg_busy
);
  localparam int unsigned DEPTH = IQ_BYTES / SLOT_BYTES;   // 128
  localparam int unsigned QW    = $clog2(DEPTH);
  localparam int unsigned CW    = $clog2(NCB);

  typedef struct packed {
    mve_instr_t  ins;
    logic [6:0]  width;
  } qentry_t;

  // ---------------- control registers ----------------
  logic [2:0]             dimc;
  logic [LEN_W-1:0]       len   [N_DIMS];
  logic [ADDR_W-1:0]      ldstr [N_DIMS];
  logic [ADDR_W-1:0]      ststr [N_DIMS];
  logic [6:0]             width;
  logic [MAX_HI_LEN-1:0]  mask;
  logic [NCB-1:0]         cb_active;

  // ---------------- queue ----------------
  qentry_t                q [DEPTH];
  logic [DEPTH-1:0]       pend [NCB];
  logic [QW:0]            head, tail;
  logic [QW:0]            pc [NCB];
  logic [NCB-1:0]         cb_wait;

  // ---------------- mask walk ----------------
  logic                   walk;
  logic [8:0]             walk_w;
  logic [31:0]            walk_s;
  logic [NCB-1:0]         walk_acc;
  logic [31:0]            elem_lanes, total_lanes;
  logic [1:0]             hi;

  always_comb begin
    hi = 2'(dimc - 3'd1);
    elem_lanes = 32'd1;
    for (int d = 0; d < N_DIMS; d++)
      if (2'(d) < hi) elem_lanes = elem_lanes * 32'(len[d]);
    total_lanes = elem_lanes * 32'(len[hi]);
  end

  function automatic logic [NCB-1:0] cb_range(logic [31:0] lo, logic [31:0] hi_l);
    logic [31:0] h;
    logic [NCB-1:0] r;
    h = (hi_l > 32'(TOTAL_LANES - 1)) ? 32'(TOTAL_LANES - 1) : hi_l;
    r = '0;
    for (int c = 0; c < NCB; c++)
      if (32'(c) >= (lo >> CBL_W) && 32'(c) <= (h >> CBL_W)) r[c] = 1'b1;
    return r;
  endfunction

  // ---------------- memory sequencer ----------------
  typedef enum logic [2:0] { M_IDLE, M_PRE, M_WALK_REQ, M_WALK, M_CB_REQ, M_CB_WAIT, M_NEXT } mstate_e;
  mstate_e                ms;
  logic [QW:0]            m_idx;
  mve_instr_t             m_ins;
  logic [CW:0]            m_cb;
  logic                   m_first;

  // ---------------- enqueue ----------------
  logic in_cfg, q_full, enq, deq;
  assign in_cfg   = is_config(in_instr.op);
  assign q_full   = (tail - head) == (QW+1)'(DEPTH);
  assign in_ready = !walk && (ms == M_IDLE) && (in_cfg || !q_full);
  assign enq      = in_valid && in_ready && !in_cfg;
  assign cfg_busy = walk || (head != tail);   // mask walk running or queue not empty
  assign mem_busy = (ms != M_IDLE);

  logic [NCB-1:0] pend_head;
  always_comb begin
    for (int c = 0; c < NCB; c++) pend_head[c] = pend[c][head[QW-1:0]];
    deq = (head != tail) && (pend_head == '0)
          && !((ms != M_IDLE) && (m_idx == head));
  end

  // ---------------- command build ----------------
  function automatic cb_cmd_t make_cmd(qentry_t e);
    cb_cmd_t cm;
    logic [ROW_W-1:0] rd, r1, r2;
    rd = ROW_W'(e.ins.vd  * e.width);
    r1 = ROW_W'(e.ins.vs1 * e.width);
    r2 = ROW_W'(e.ins.vs2 * e.width);
    cm = '{op: CB_CPY, rd: rd, ra: r1, rb: r2, width: e.width,
           sgn: e.ins.sgn, pred: e.ins.pred, value: e.ins.rs};
    unique case (e.ins.op)
      OP_SETDUP: cm.op = CB_SETDUP;
      OP_SHIL:   cm.op = CB_SHL;
      OP_SHIR:   cm.op = CB_SHR;
      OP_ROTIL:  cm.op = CB_ROTL;
      OP_ROTIR:  cm.op = CB_ROTR;
      OP_ADD:    cm.op = CB_ADD;
      OP_SUB:    cm.op = CB_SUB;
      OP_MUL:    cm.op = CB_MUL;
      OP_XOR:    cm.op = CB_XOR;
      OP_LT:     cm.op = CB_LT;
      OP_GE:     cm.op = CB_GE;
      OP_GT:     begin cm.op = CB_LT; cm.ra = r2; cm.rb = r1; end
      OP_LE:     begin cm.op = CB_GE; cm.ra = r2; cm.rb = r1; end
      OP_EQ:     cm.op = CB_EQ;
      OP_NE:     cm.op = CB_NE;
      OP_MIN:    cm.op = CB_MIN;
      OP_MAX:    cm.op = CB_MAX;
      OP_SHVL:   cm.op = CB_SHVL;
      OP_SHVR:   cm.op = CB_SHVR;
      OP_SLD, OP_RLD: cm.op = CB_LD_TMU;
      OP_SST, OP_RST: begin cm.op = CB_ST_TMU; cm.ra = rd; end
      default:   cm.op = CB_CPY;
    endcase
    return cm;
  endfunction

  // per-CB issue
  logic [NCB-1:0] issue, skip, me_issue;
  always_comb begin
    for (int c = 0; c < NCB; c++) begin
      qentry_t e;
      logic at_mem;
      e        = q[pc[c][QW-1:0]];
      at_mem   = is_mem(e.ins.op);
      issue[c] = 1'b0;
      skip[c]  = 1'b0;
      me_issue[c] = (ms == M_CB_REQ) && (CW'(m_cb) == CW'(c)) && (pc[c] == m_idx)
                    && !cb_wait[c] && cb_ready[c];
      if (!cb_wait[c] && pc[c] != tail) begin
        if (!pend[c][pc[c][QW-1:0]]) skip[c] = 1'b1;
        else if (!at_mem && cb_ready[c]) issue[c] = 1'b1;
      end
      cb_valid[c] = issue[c] || me_issue[c];
      cb_cmd[c]   = me_issue[c] ? make_cmd('{ins: m_ins, width: width}) : make_cmd(e);
    end
  end

  // memory sequencer outputs
  logic m_pend;
  always_comb begin
    m_pend      = pend[CW'(m_cb)][m_idx[QW-1:0]];
    agu_start   = (ms == M_WALK_REQ) && m_first;
    agu_next    = (ms == M_WALK_REQ) && !m_first;
    agu_random  = (m_ins.op inside {OP_RLD, OP_RST});
    agu_modes   = m_ins.modes;
    agu_base    = m_ins.rs;
    mem_store   = is_store(m_ins.op);
    mem_cb      = CW'(m_cb);
    tmu_clear   = (ms == M_WALK_REQ) && !mem_store;
    mem_size_l2 = size_log2(width);
    cr_dimc     = dimc;
    cr_mask     = mask;
    for (int d = 0; d < N_DIMS; d++) begin
      cr_len[d]  = len[d];
      agu_str[d] = mem_store ? ststr[d] : ldstr[d];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dimc      <= 3'd1;
      width     <= 7'd32;
      mask      <= '1;
      cb_active <= '1;
      for (int d = 0; d < N_DIMS; d++) begin
        len[d]   <= (d == 0) ? LEN_W'(TOTAL_LANES) : LEN_W'(1);
        ldstr[d] <= '0;
        ststr[d] <= '0;
      end
      head <= '0;
      tail <= '0;
      for (int c = 0; c < NCB; c++) begin
        pc[c]   <= '0;
        pend[c] <= '0;
      end
      cb_wait  <= '0;
      walk     <= 1'b0;
      walk_w   <= '0;
      walk_s   <= '0;
      walk_acc <= '0;
      ms       <= M_IDLE;
      m_idx    <= '0;
      m_ins    <= '0;
      m_cb     <= '0;
      m_first  <= 1'b0;
      st_done  <= 1'b0;
    end else begin
      st_done <= 1'b0;

      // ---- configuration ----
      if (in_valid && in_ready && in_cfg) begin
        unique case (in_instr.op)
          OP_SETDIMC:   dimc <= (in_instr.rs[2:0] == 3'd0) ? 3'd1 :
                                (in_instr.rs[2:0] > 3'd4) ? 3'd4 : in_instr.rs[2:0];
          OP_SETDIML:   len[in_instr.imm[1:0]]   <= in_instr.rs[LEN_W-1:0];
          OP_SETLDSTR:  ldstr[in_instr.imm[1:0]] <= in_instr.rs;
          OP_SETSTSTR:  ststr[in_instr.imm[1:0]] <= in_instr.rs;
          OP_SETWIDTH:  width <= in_instr.imm[6:0];
          OP_SETMASK:   mask[in_instr.rs[7:0]] <= 1'b1;
          default:      mask[in_instr.rs[7:0]] <= 1'b0;   // OP_UNSETMASK
        endcase
        if (in_instr.op inside {OP_SETDIMC, OP_SETDIML, OP_SETMASK, OP_UNSETMASK}) begin
          walk     <= 1'b1;
          walk_w   <= '0;
          walk_s   <= '0;
          walk_acc <= '0;
        end
      end

      // ---- mask walk: one highest-dimension element per clock ----
      if (walk) begin
        if (32'(walk_w) < 32'(len[hi]) && walk_w < 9'(MAX_HI_LEN)) begin
          if (mask[walk_w[7:0]] && walk_s < 32'(TOTAL_LANES))
            walk_acc <= walk_acc | cb_range(walk_s, walk_s + elem_lanes - 32'd1);
          walk_s <= walk_s + elem_lanes;
          walk_w <= walk_w + 1'b1;
        end else begin
          // elements past the 256th have no mask bit and stay active
          if (32'(len[hi]) > 32'(MAX_HI_LEN) && walk_s < 32'(TOTAL_LANES))
            cb_active <= walk_acc | cb_range(walk_s, total_lanes - 32'd1);
          else
            cb_active <= walk_acc;
          walk <= 1'b0;
        end
      end

      // ---- enqueue ----
      if (enq) begin
        q[tail[QW-1:0]] <= '{ins: in_instr, width: width};
        for (int c = 0; c < NCB; c++) pend[c][tail[QW-1:0]] <= cb_active[c];
        tail <= tail + 1'b1;
        if (is_mem(in_instr.op)) begin
          ms      <= M_PRE;
          m_idx   <= tail;
          m_ins   <= in_instr;
          m_cb    <= '0;
          m_first <= 1'b1;
        end
      end
      if (deq) head <= head + 1'b1;

      // ---- per-CB issue and completion ----
      for (int c = 0; c < NCB; c++) begin
        if (skip[c]) pc[c] <= pc[c] + 1'b1;
        if (issue[c]) cb_wait[c] <= 1'b1;
        if (cb_wait[c] && cb_ack[c]) begin
          cb_wait[c] <= 1'b0;
          pend[c][pc[c][QW-1:0]] <= 1'b0;
          pc[c] <= pc[c] + 1'b1;
        end
      end

      // ---- memory sequencer ----
      unique case (ms)
        M_PRE: begin
          // a store first copies the register of this CB into the TMU
          if (mem_store && m_pend) ms <= M_CB_REQ;
          else                     ms <= M_WALK_REQ;
        end
        M_WALK_REQ: begin
          ms      <= M_WALK;
          m_first <= 1'b0;
        end
        M_WALK: if (agu_cb_done && mshr_idle) begin
          if (!mem_store && m_pend) ms <= M_CB_REQ;
          else                      ms <= M_NEXT;
        end
        M_CB_REQ: if (me_issue[CW'(m_cb)]) ms <= M_CB_WAIT;
        M_CB_WAIT: if (cb_ack[CW'(m_cb)]) begin
          if (mem_store) ms <= M_WALK_REQ;
          else           ms <= M_NEXT;
        end
        M_NEXT: begin
          pend[CW'(m_cb)][m_idx[QW-1:0]] <= 1'b0;
          if (m_cb == (CW+1)'(NCB - 1)) begin
            ms      <= M_IDLE;
            st_done <= mem_store;
          end else begin
            m_cb <= m_cb + 1'b1;
            ms   <= M_PRE;
          end
        end
        default: ;
      endcase
    end
  end

  // The memory sequencer must only command a CB that is not running a command.
  for (genvar c = 0; c < NCB; c++) begin : g_chk
    a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(issue[c] && me_issue[c]));
  end

endmodule
