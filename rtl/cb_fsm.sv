// cb_fsm: micro-op sequencer of one control block (CB).
//
// Takes one command at a time from the MVE controller (an operation plus the
// first word-lines of its registers and the element width n) and expands it
// into bit-serial micro-ops, one per clock, for the four data arrays of the
// CB. All arrays of the CB receive the same micro-op. When the last micro-op
// has been issued the FSM pulses ack for one cycle and accepts the next
// command.
//
// Sequences and their lengths in micro-op cycles (n = element width):
//   copy, set-duplicate, xor, add ............ n
//   shift / rotate by an immediate ........... n (rotate in place: 2n, the
//                                               source is first copied)
//   subtract ................................. 2n: per bit, ~B is written to
//                                               scratch, then A + ~B with
//                                               carry-in 1
//   less-than / greater-or-equal (unsigned) .. 2n, result in the tag latch T;
//                                               signed: 2n+1 (the sign bits are
//                                               swapped through one extra cycle)
//   equal / not-equal ........................ 2n: xor to scratch, then the
//                                               carry chain against the all-
//                                               ones row ORs the bits together
//   multiply (low n bits of the product) ..... n(n+1)/2 + 4n: copy A and B to
//                                               scratch, clear the destination,
//                                               then for each multiplier bit i
//                                               load it into T (1 cycle) and
//                                               add A into bits i..n-1 of the
//                                               destination under T (n-i cycles)
//   min / max ................................ 4n (+1 signed): copy one source
//                                               to the destination, compare
//                                               into T, copy the other source
//                                               where T is set; 3n (+1) when
//                                               the destination is a source
//   shift by a register (low log2 n bits) .... 2n + log2(n)(n+1): copy B to
//                                               S2 and A to the destination,
//                                               then per bit i of B load it
//                                               into T (1 cycle) and shift the
//                                               destination in place by 2^i
//                                               under T (n cycles)
//   load from / store to the transpose unit .. n (one bit-slice per cycle)
// Greater-than and less-or-equal are less-than and greater-or-equal with the
// operands swapped by the controller.
//
// Scratch word-lines: the top word-line holds all ones (written once after
// reset), S1 = the n word-lines below it, S2 = the n below S1. Registers must
// not overlap them, so 256 word-lines hold floor((255-2n)/n) registers.
//
// The paper fixes the structure (one FSM per four arrays, instruction in,
// micro-ops out, ACK back) and the latencies of add (n), subtract (2n) and
// shift/rotate/xor/copy (n). The micro-op sequences are this design's own.
// Departures from the paper's latency table: comparisons take 2n instead of
// n, multiplication takes n(n+1)/2+4n instead of n^2+5n. Multiplication uses
// T for the multiplier bits, so it ignores the predicate flag and leaves T
// changed; min/max also leave T changed and ignore the predicate flag. The
// paper gives 2n for min/max; this design's chained sequence takes 3n-4n.
// The paper gives n log(n) for the shift by a register and describes the
// conditional constant shifts under T; the sequence above takes
// 2n + log2(n)(n+1) and, like min/max, leaves T changed. Type conversion is
// not implemented.
module cb_fsm
  import mve_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  cb_cmd_t        cmd,
  output uop_t           uop,
  output logic           ext_wps,    // lanes write only where the TMU holds valid data
  output logic           slice_rd,   // reading bit-slice slice_idx from the TMU
  output logic           slice_wr,   // writing bit-slice slice_idx to the TMU
  output logic [5:0]     slice_idx,
  output logic           busy,
  output logic           ack
);
  typedef enum logic [1:0] { S_INIT, S_IDLE, S_RUN } state_e;

  state_e           state;
  cb_cmd_t          c;
  logic [2:0]       step, nstep;
  logic [1:0]       ph, nph;
  logic [6:0]       i, ni, j, nj;
  logic             done;

  logic [6:0]       n;
  logic [ROW_W-1:0] s1, s2;
  logic             last, scmp, rot_copy;
  logic [7:0]       k, jj, src_bit;
  logic [ROW_W-1:0] src;

  // min/max and variable shifts run as chains of simpler sub-commands on
  // the original command's operands
  cb_cmd_t          mm_q;
  logic             mm_on;
  logic [3:0]       mm_st;
  cb_cmd_t          mm_sub_c;

  // Min/max, sub-command st: 0 = copy the base operand into the destination,
  // 1 = compare A with B into T, 2 = copy the other operand into the
  // destination where T is set. The comparison is chosen so that a
  // destination equal to one source needs no first copy.
  // Variable shift by B: 0 = copy B to scratch S2, 1 = copy A to the
  // destination, then for each i < log2(n): load bit i of B into T, shift the
  // destination in place by 2^i where T is set.
  function automatic cb_cmd_t mm_sub(cb_cmd_t m, logic [3:0] st);
    cb_cmd_t r;
    logic swap;
    logic [ROW_W-1:0] base, over, sc2;
    logic [3:0] bi;
    swap = (m.op == CB_MIN) ? (m.rd == m.ra) : (m.rd == m.rb);
    if ((m.op == CB_MIN) != swap) begin base = m.rb; over = m.ra; end
    else                          begin base = m.ra; over = m.rb; end
    sc2 = ONES_ROW - ROW_W'({m.width, 1'b0});
    bi  = (st - 4'd2) >> 1;
    r = m;
    r.pred = 1'b0;
    if (m.op inside {CB_MIN, CB_MAX}) begin
      unique case (st)
        4'd0:    begin r.op = CB_CPY; r.ra = base; end
        4'd1:    r.op = swap ? CB_GE : CB_LT;
        default: begin r.op = CB_CPY; r.ra = over; r.pred = 1'b1; end
      endcase
    end else begin
      if (st == 4'd0)      begin r.op = CB_CPY; r.rd = sc2; r.ra = m.rb; end
      else if (st == 4'd1) begin r.op = CB_CPY; end
      else if (!st[0])     begin r.op = CB_TLD; r.ra = sc2 + ROW_W'(bi); end
      else begin
        r.op = (m.op == CB_SHVL) ? CB_SHL : CB_SHR;
        r.ra = m.rd;
        r.value = 64'd1 << bi;
        r.pred = 1'b1;
      end
    end
    return r;
  endfunction

  function automatic logic [3:0] mm_first(cb_cmd_t m);
    if (m.op inside {CB_SHVL, CB_SHVR}) return 4'd0;
    return (m.rd == mm_sub(m, 4'd0).ra) ? 4'd1 : 4'd0;
  endfunction

  function automatic logic [3:0] mm_last(cb_cmd_t m);
    if (m.op inside {CB_SHVL, CB_SHVR}) return 4'd1 + 4'(2 * size_log2(m.width)) + 4'd6;
    return 4'd2;
  endfunction

  assign cmd_ready = (state == S_IDLE);
  assign mm_sub_c  = mm_sub(mm_q, mm_st + 4'd1);
  assign busy      = (state == S_RUN);

  always_comb begin
    n        = c.width;
    s1       = ONES_ROW - ROW_W'(n);
    s2       = ONES_ROW - ROW_W'({n, 1'b0});
    last     = (j == n - 7'd1);
    scmp     = c.sgn && (c.op inside {CB_LT, CB_GE});
    rot_copy = (c.op inside {CB_ROTL, CB_ROTR}) && (c.rd == c.ra);
    k        = c.value[7:0];
    jj       = 8'(j);
    src_bit  = '0;
    src      = rot_copy ? s1 : c.ra;

    uop       = '0;
    uop.dsel  = D_AND;
    uop.cinit = C_KEEP;
    uop.tsel  = T_NODE;
    ext_wps   = 1'b0;
    slice_rd  = 1'b0;
    slice_wr  = 1'b0;
    slice_idx = j[5:0];
    nstep     = step;
    nph       = ph;
    ni        = i;
    nj        = j + 7'd1;
    done      = 1'b0;

    if (state == S_INIT) begin
      uop.wr     = 1'b1;
      uop.rw     = ONES_ROW;
      uop.dsel   = D_DCONST;
      uop.dconst = 1'b1;
    end else if (state == S_RUN) begin
      unique case (c.op)
        CB_CPY: begin
          uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
          uop.wr  = 1'b1; uop.rw = c.rd + ROW_W'(j);
          uop.pred = c.pred;
          done = last;
        end
        CB_SETDUP: begin
          uop.wr = 1'b1; uop.rw = c.rd + ROW_W'(j);
          uop.dsel = D_DCONST; uop.dconst = c.value[j[5:0]];
          uop.pred = c.pred;
          done = last;
        end
        CB_XOR: begin
          uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
          uop.rd1 = 1'b1; uop.rb = c.rb + ROW_W'(j);
          uop.wr  = 1'b1; uop.rw = c.rd + ROW_W'(j);
          uop.dsel = D_XOR; uop.pred = c.pred;
          done = last;
        end
        CB_ADD: begin
          uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
          uop.rd1 = 1'b1; uop.rb = c.rb + ROW_W'(j);
          uop.wr  = 1'b1; uop.rw = c.rd + ROW_W'(j);
          uop.dsel = D_SUM; uop.pred = c.pred;
          uop.cinit = (j == 0) ? C_ZERO : C_KEEP;
          uop.c_en  = 1'b1;
          done = last;
        end
        CB_SUB, CB_LT, CB_GE: begin
          unique case (ph)
            2'd0: begin  // S1[j] = ~B[j] (B[j] itself for a signed sign bit)
              uop.rd0 = 1'b1; uop.ra = c.rb + ROW_W'(j);
              uop.wr  = 1'b1; uop.rw = s1 + ROW_W'(j);
              uop.dsel = (scmp && last) ? D_AND : D_NOR;
              nph = (scmp && last) ? 2'd2 : 2'd1;
              nj  = j;
            end
            2'd2: begin  // S2[0] = ~A[msb] for a signed comparison
              uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
              uop.wr  = 1'b1; uop.rw = s2;
              uop.dsel = D_NOR;
              nph = 2'd1;
              nj  = j;
            end
            default: begin  // A[j] + S1[j] + C
              uop.rd0 = 1'b1; uop.ra = (scmp && last) ? s2 : c.ra + ROW_W'(j);
              uop.rd1 = 1'b1; uop.rb = s1 + ROW_W'(j);
              uop.dsel  = D_SUM;
              uop.cinit = (j == 0) ? C_ONE : C_KEEP;
              uop.c_en  = 1'b1;
              if (c.op == CB_SUB) begin
                uop.wr = 1'b1; uop.rw = c.rd + ROW_W'(j); uop.pred = c.pred;
              end else if (last) begin
                uop.t_en = 1'b1;
                uop.tsel = (c.op == CB_LT) ? T_NCARRY : T_CARRY;
              end
              nph  = 2'd0;
              done = last;
            end
          endcase
        end
        CB_EQ, CB_NE: begin
          if (step == 3'd0) begin  // S1 = A ^ B
            uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
            uop.rd1 = 1'b1; uop.rb = c.rb + ROW_W'(j);
            uop.wr  = 1'b1; uop.rw = s1 + ROW_W'(j);
            uop.dsel = D_XOR;
            if (last) begin nstep = 3'd1; nj = '0; end
          end else begin           // C = C | S1[j] through carry(S1[j], 1, C)
            uop.rd0 = 1'b1; uop.ra = s1 + ROW_W'(j);
            uop.rd1 = 1'b1; uop.rb = ONES_ROW;
            uop.cinit = (j == 0) ? C_ZERO : C_KEEP;
            uop.c_en  = 1'b1;
            if (last) begin
              uop.t_en = 1'b1;
              uop.tsel = (c.op == CB_EQ) ? T_NCARRY : T_CARRY;
            end
            done = last;
          end
        end
        CB_SHL, CB_SHR, CB_ROTL, CB_ROTR: begin
          if (rot_copy && step == 3'd0) begin
            uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
            uop.wr  = 1'b1; uop.rw = s1 + ROW_W'(j);
            if (last) begin nstep = 3'd1; nj = '0; end
          end else begin
            // left shift walks from the top bit down so it can work in place
            jj = (c.op == CB_SHL) ? 8'(n - 7'd1 - j) : 8'(j);
            uop.wr = 1'b1; uop.rw = c.rd + ROW_W'(jj);
            uop.pred = c.pred;
            uop.rd0 = 1'b1;
            unique case (c.op)
              CB_SHL: begin
                src_bit = jj - k;
                if (jj < k) begin uop.rd0 = 1'b0; uop.dsel = D_DCONST; end
              end
              CB_SHR: begin
                src_bit = jj + k;
                if ({1'b0, jj} + {1'b0, k} >= {2'b0, n}) begin
                  src_bit = 8'(n - 7'd1);
                  if (!c.sgn) begin uop.rd0 = 1'b0; uop.dsel = D_DCONST; end
                end
              end
              CB_ROTL: src_bit = (jj - k) & 8'(n - 7'd1);
              default: src_bit = (jj + k) & 8'(n - 7'd1);
            endcase
            uop.ra = src + ROW_W'(src_bit);
            done = last;
          end
        end
        CB_MUL: begin
          unique case (step)
            3'd0: begin  // S1 = A
              uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
              uop.wr  = 1'b1; uop.rw = s1 + ROW_W'(j);
              if (last) begin nstep = 3'd1; nj = '0; end
            end
            3'd1: begin  // S2 = B
              uop.rd0 = 1'b1; uop.ra = c.rb + ROW_W'(j);
              uop.wr  = 1'b1; uop.rw = s2 + ROW_W'(j);
              if (last) begin nstep = 3'd2; nj = '0; end
            end
            3'd2: begin  // D = 0
              uop.wr = 1'b1; uop.rw = c.rd + ROW_W'(j);
              uop.dsel = D_DCONST;
              if (last) begin nstep = 3'd3; nj = '0; ni = '0; nph = 2'd0; end
            end
            default: begin
              if (ph == 2'd0) begin  // T = B[i]
                uop.rd0 = 1'b1; uop.ra = s2 + ROW_W'(i);
                uop.t_en = 1'b1; uop.tsel = T_NODE;
                nph = 2'd1; nj = '0;
              end else begin         // D[i+j] += S1[j] where T
                uop.rd0 = 1'b1; uop.ra = s1 + ROW_W'(j);
                uop.rd1 = 1'b1; uop.rb = c.rd + ROW_W'(i + j);
                uop.wr  = 1'b1; uop.rw = c.rd + ROW_W'(i + j);
                uop.dsel = D_SUM; uop.pred = 1'b1;
                uop.cinit = (j == 0) ? C_ZERO : C_KEEP;
                uop.c_en  = 1'b1;
                if (i + j == n - 7'd1) begin
                  nph = 2'd0; ni = i + 7'd1;
                  done = (i == n - 7'd1);
                end
              end
            end
          endcase
        end
        CB_TLD: begin  // T = one bit of a register (single cycle)
          uop.rd0 = 1'b1; uop.ra = c.ra;
          uop.t_en = 1'b1; uop.tsel = T_NODE;
          done = 1'b1;
        end
        CB_LD_TMU: begin
          uop.wr = 1'b1; uop.rw = c.rd + ROW_W'(j);
          uop.dsel = D_DIN; ext_wps = 1'b1; slice_rd = 1'b1;
          done = last;
        end
        default: begin  // CB_ST_TMU
          uop.rd0 = 1'b1; uop.ra = c.ra + ROW_W'(j);
          slice_wr = 1'b1;
          done = last;
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT;
      c     <= '0;
      step  <= '0;
      ph    <= '0;
      i     <= '0;
      j     <= '0;
      ack   <= 1'b0;
      mm_q  <= '0;
      mm_on <= 1'b0;
      mm_st <= '0;
    end else begin
      ack <= 1'b0;
      unique case (state)
        S_INIT: state <= S_IDLE;
        S_IDLE: if (cmd_valid) begin
          state <= S_RUN;
          c     <= cmd;
          mm_q  <= cmd;
          mm_on <= cmd.op inside {CB_MIN, CB_MAX, CB_SHVL, CB_SHVR};
          mm_st <= mm_first(cmd);
          if (cmd.op inside {CB_MIN, CB_MAX, CB_SHVL, CB_SHVR}) c <= mm_sub(cmd, mm_first(cmd));
          step  <= '0;
          ph    <= '0;
          i     <= '0;
          j     <= '0;
        end
        default: begin
          step <= nstep;
          ph   <= nph;
          i    <= ni;
          j    <= nj;
          if (done && mm_on && mm_st != mm_last(mm_q)) begin
            mm_st <= mm_st + 4'd1;
            c     <= mm_sub_c;
            step  <= '0;
            ph    <= '0;
            i     <= '0;
            j     <= '0;
          end else if (done) begin
            state <= S_IDLE;
            mm_on <= 1'b0;
            ack   <= 1'b1;
          end
        end
      endcase
    end
  end

  // A command must not arrive while a sequence runs.
  a_no_cmd_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                       busy |-> !cmd_valid);

endmodule
