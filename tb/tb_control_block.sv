// tb_control_block: one control block (FSM + four 256x256 arrays, 1024
// lanes) driven through its command port, with this testbench standing in
// for the transpose unit. Registers are filled with random values through
// load commands, every operation is run, results are read back through store
// commands (or the tag latches for comparisons) and compared with the same
// arithmetic done here on integers. The busy cycles of every command are
// checked against the sequence lengths documented in cb_fsm (min/max
// included), for widths 8 and 16. Also checked: predicated writes and partial (lane-masked) loads.
`timescale 1ns/1ps
module tb_control_block;
  import mve_pkg::*;
  localparam int L = CB_LANES;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic cmd_valid, cmd_ready, ack, busy;
  cb_cmd_t cmd;
  logic [L-1:0] slice_in, lane_valid, slice_out, tag;
  logic [5:0] slice_idx;
  logic slice_rd, slice_wr;
  int checks = 0, failures = 0;

  control_block dut (.*);
  always #5 clk = ~clk;

  logic [63:0] tv [L];          // transpose-unit contents seen by the CB
  logic [L-1:0] tvalid;
  logic [63:0] cap [L];         // captured store
  always_comb begin
    for (int l = 0; l < L; l++) slice_in[l] = tv[l][slice_idx];
    lane_valid = tvalid;
  end
  always @(posedge clk)
    if (slice_wr) for (int l = 0; l < L; l++) cap[l][slice_idx] <= slice_out[l];

  int busy_cnt;
  always @(posedge clk) if (busy) busy_cnt++;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic run(input cb_op_e op, input int w, input int rd, input int ra, input int rb,
                     input logic [63:0] value, input logic sgn, input logic pred, input int exp_cyc);
    cmd = '0;
    cmd.op = op; cmd.width = 7'(w);
    cmd.rd = 8'(rd*w); cmd.ra = 8'(ra*w); cmd.rb = 8'(rb*w);
    cmd.value = value; cmd.sgn = sgn; cmd.pred = pred;
    while (!cmd_ready) @(posedge clk);
    busy_cnt = 0;
    cmd_valid = 1; @(posedge clk); #1; cmd_valid = 0;
    while (!ack) begin @(posedge clk); #1; end
    if (exp_cyc > 0) chk(busy_cnt == exp_cyc, $sformatf("%s w=%0d cycles %0d exp %0d", op.name(), w, busy_cnt, exp_cyc));
  endtask

  function automatic logic [63:0] msk(logic [63:0] v, int w);
    return (w == 64) ? v : v & ((64'd1 << w) - 1);
  endfunction
  function automatic logic signed [63:0] sx(logic [63:0] v, int w);
    return $signed(v << (64 - w)) >>> (64 - w);
  endfunction

  logic [63:0] A [L], B [L], R [L];

  task automatic load(input int r, input int w);
    run(CB_LD_TMU, w, r, 0, 0, 0, 0, 0, w);
  endtask
  task automatic store(input int r, input int w);
    run(CB_ST_TMU, w, 0, r, 0, 0, 0, 0, w);
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0; tvalid = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk); #1;
    for (int wi = 0; wi < 2; wi++) begin
      int w, k;
      w = (wi == 0) ? 8 : 16;
      k = 3;
      for (int l = 0; l < L; l++) begin
        A[l] = msk({$urandom, $urandom}, w);
        B[l] = (l % 4 == 0) ? A[l] : msk({$urandom, $urandom}, w);
      end
      tvalid = '1;
      for (int l = 0; l < L; l++) tv[l] = A[l];
      load(1, w);
      for (int l = 0; l < L; l++) tv[l] = B[l];
      load(2, w);
      store(1, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == A[l], $sformatf("ld/st lane %0d", l));

      run(CB_ADD, w, 3, 1, 2, 0, 0, 0, w);     store(3, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(A[l] + B[l], w), $sformatf("add w%0d lane %0d", w, l));
      run(CB_SUB, w, 4, 1, 2, 0, 0, 0, 2*w);   store(4, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(A[l] - B[l], w), $sformatf("sub w%0d lane %0d", w, l));
      run(CB_XOR, w, 5, 1, 2, 0, 0, 0, w);     store(5, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == (A[l] ^ B[l]), "xor");
      run(CB_MUL, w, 6, 1, 2, 0, 0, 0, w*(w+1)/2 + 4*w); store(6, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(A[l] * B[l], w), $sformatf("mul w%0d lane %0d", w, l));
      run(CB_CPY, w, 7, 1, 0, 0, 0, 0, w);     store(7, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == A[l], "copy");
      run(CB_SETDUP, w, 8, 0, 0, 64'h5A3C, 0, 0, w); store(8, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(64'h5A3C, w), "setdup");
      run(CB_SHL, w, 9, 1, 0, k, 0, 0, w);      store(9, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(A[l] << k, w), "shl");
      run(CB_SHR, w, 9, 1, 0, k, 0, 0, w);      store(9, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == (A[l] >> k), "shr");
      run(CB_SHR, w, 9, 1, 0, k, 1, 0, w);      store(9, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(64'(sx(A[l], w) >>> k), w), "sra");
      run(CB_ROTL, w, 10, 1, 0, k, 0, 0, w);    store(10, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk((A[l] << k) | (A[l] >> (w - k)), w), "rotl");
      run(CB_ROTR, w, 10, 10, 0, k, 0, 0, 2*w); store(10, w);   // in place: back to A
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == A[l], "rotr in place");
      // shift in place
      run(CB_CPY, w, 11, 1, 0, 0, 0, 0, w);
      run(CB_SHL, w, 11, 11, 0, k, 0, 0, w);    store(11, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(A[l] << k, w), "shl in place");
      // comparisons into the tag latches
      run(CB_LT, w, 0, 1, 2, 0, 0, 0, 2*w);
      for (int l = 0; l < L; l++) chk(tag[l] == (A[l] < B[l]), $sformatf("ltu lane %0d", l));
      run(CB_GE, w, 0, 1, 2, 0, 0, 0, 2*w);
      for (int l = 0; l < L; l++) chk(tag[l] == (A[l] >= B[l]), "geu");
      run(CB_LT, w, 0, 1, 2, 0, 1, 0, 2*w + 1);
      for (int l = 0; l < L; l++) chk(tag[l] == (sx(A[l], w) < sx(B[l], w)), $sformatf("lts lane %0d", l));
      run(CB_GE, w, 0, 1, 2, 0, 1, 0, 2*w + 1);
      for (int l = 0; l < L; l++) chk(tag[l] == (sx(A[l], w) >= sx(B[l], w)), "ges");
      run(CB_NE, w, 0, 1, 2, 0, 0, 0, 2*w);
      for (int l = 0; l < L; l++) chk(tag[l] == (A[l] != B[l]), "ne");
      run(CB_EQ, w, 0, 1, 2, 0, 0, 0, 2*w);
      for (int l = 0; l < L; l++) chk(tag[l] == (A[l] == B[l]), "eq");
      // min / max: distinct destination 4n (+1 signed), destination equal
      // to a source 3n (+1 signed)
      run(CB_MIN, w, 12, 1, 2, 0, 0, 0, 4*w);      store(12, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == ((A[l] < B[l]) ? A[l] : B[l]), $sformatf("minu lane %0d", l));
      run(CB_MAX, w, 12, 1, 2, 0, 1, 0, 4*w + 1);  store(12, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == ((sx(A[l], w) < sx(B[l], w)) ? B[l] : A[l]), $sformatf("maxs lane %0d", l));
      run(CB_CPY, w, 11, 1, 0, 0, 0, 0, w);
      run(CB_MIN, w, 11, 11, 2, 0, 1, 0, 3*w + 1); store(11, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == ((sx(A[l], w) < sx(B[l], w)) ? A[l] : B[l]), $sformatf("mins in place lane %0d", l));
      run(CB_CPY, w, 11, 2, 0, 0, 0, 0, w);
      run(CB_MAX, w, 11, 1, 11, 0, 0, 0, 3*w);     store(11, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == ((A[l] < B[l]) ? B[l] : A[l]), $sformatf("maxu in place lane %0d", l));
      // variable shifts by the low log2(n) bits of B: 2n + log2(n)(n+1)
      run(CB_SHVL, w, 12, 1, 2, 0, 0, 0, 2*w + $clog2(w)*(w+1)); store(12, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(A[l] << (B[l] % w), w), $sformatf("shvl lane %0d", l));
      run(CB_SHVR, w, 12, 1, 2, 0, 1, 0, 2*w + $clog2(w)*(w+1)); store(12, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == msk(64'(sx(A[l], w) >>> (B[l] % w)), w), $sformatf("shvr signed lane %0d", l));
      run(CB_CPY, w, 11, 2, 0, 0, 0, 0, w);
      run(CB_SHVR, w, 11, 1, 11, 0, 0, 0, 2*w + $clog2(w)*(w+1)); store(11, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == (A[l] >> (B[l] % w)), $sformatf("shvr dest=B lane %0d", l));
      // predicated add: r7 = A everywhere, then A+B only where A<B
      run(CB_LT, w, 0, 1, 2, 0, 0, 0, 2*w);
      run(CB_ADD, w, 7, 1, 2, 0, 0, 1, w);      store(7, w);
      for (int l = 0; l < L; l++)
        chk(msk(cap[l], w) == ((A[l] < B[l]) ? msk(A[l] + B[l], w) : A[l]), "predicated add");
      // lane-masked load: only even lanes take the new value
      for (int l = 0; l < L; l++) begin tv[l] = B[l]; tvalid[l] = (l % 2 == 0); end
      load(1, w);
      tvalid = '1;
      store(1, w);
      for (int l = 0; l < L; l++) chk(msk(cap[l], w) == ((l % 2 == 0) ? B[l] : A[l]), "masked load");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
