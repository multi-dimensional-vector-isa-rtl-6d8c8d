// tb_agu: checks the per-lane address generator against an independent model
// of multi-dimensional addressing. For each configuration (dimension count,
// lengths, stride modes, stride registers, element size, dimension mask,
// strided or random base) the testbench lists every lane's expected byte
// address, computed from the lane's (w,z,y,x) coordinates by multiplication,
// and compares it with the requests the unit emits while it walks the eight
// control blocks (start, then next after each cb_done). The request port is
// stalled at random. For random-base accesses, pointer fetches must go to
// base + 8*index of the highest dimension and are answered a few cycles later
// with a made-up pointer, from which the lower dimensions are strided. Masked
// elements must produce no request. Rate: with the port always ready and no
// pointer fetches, one lane per clock is checked for the first block.
`timescale 1ns/1ps
module tb_agu;
  import mve_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic start, next, random;
  logic [7:0] modes;
  logic [ADDR_W-1:0] base;
  logic [2:0] dimc;
  logic [LEN_W-1:0] len [N_DIMS];
  logic [ADDR_W-1:0] str_cr [N_DIMS];
  logic [1:0] size_l2;
  logic [MAX_HI_LEN-1:0] mask;
  logic out_valid, out_ready, out_ptr;
  logic [CBL_W-1:0] out_lane;
  logic [ADDR_W-1:0] out_addr;
  logic ptr_rsp_valid, cb_done, all_done;
  logic [ADDR_W-1:0] ptr_rsp;
  int checks = 0, failures = 0;

  agu dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] ptr_of(logic [63:0] a);
    return 64'h0010_0000 + (a - base) * 64'h200;
  endfunction

  // expected requests
  logic [63:0] exp_addr [$];
  int          exp_lane [$];
  logic        stall_rand;

  task automatic build_expect();
    int l [4]; longint s [4]; int hi, total;
    exp_addr.delete(); exp_lane.delete();
    hi = int'(dimc) - 1;
    total = 1;
    for (int d = 0; d < 4; d++) begin
      l[d] = (d < int'(dimc)) ? int'(len[d]) : 1;
      total *= l[d];
    end
    for (int d = 0; d < 4; d++) begin
      case (modes[2*d +: 2])
        2'd0: s[d] = 0;
        2'd1: s[d] = 1;
        2'd2: s[d] = (d == 0) ? 1 : s[d-1] * l[d-1];
        default: s[d] = longint'(str_cr[d]);
      endcase
    end
    for (int g = 0; g < total && g < TOTAL_LANES; g++) begin
      int ix [4]; int r; longint off; logic [63:0] a;
      r = g;
      for (int d = 0; d < 4; d++) begin ix[d] = r % l[d]; r = r / l[d]; end
      if (ix[hi] < MAX_HI_LEN && !mask[ix[hi]]) continue;
      off = 0;
      for (int d = 0; d < 4; d++) if (!(random && d == hi)) off += ix[d] * s[d];
      a = random ? ptr_of(base + 64'(ix[hi]) * 8) : base;
      exp_addr.push_back(a + (64'(off) << size_l2));
      exp_lane.push_back(g);
    end
  endtask

  int cb_cur, got_n, ptr_fetches, rate_cycles, rate_reqs;
  logic [63:0] ptr_req_addr; int ptr_wait;

  // request sink and pointer responder
  always @(posedge clk) begin
    ptr_rsp_valid <= 1'b0;
    if (ptr_wait > 0) begin
      ptr_wait <= ptr_wait - 1;
      if (ptr_wait == 1) begin ptr_rsp_valid <= 1'b1; ptr_rsp <= ptr_of(ptr_req_addr); end
    end
    if (out_valid && out_ready) begin
      if (out_ptr) begin
        chk(random, "pointer fetch on strided access");
        ptr_fetches++;
        ptr_req_addr <= out_addr;
        ptr_wait <= 3;
      end else begin
        if (got_n < exp_addr.size()) begin
          chk(out_addr == exp_addr[got_n] && cb_cur*CB_LANES + int'(out_lane) == exp_lane[got_n],
              $sformatf("req %0d: lane %0d addr %h, exp lane %0d addr %h", got_n,
                        cb_cur*CB_LANES + int'(out_lane), out_addr, exp_lane[got_n], exp_addr[got_n]));
        end else chk(0, "extra request");
        got_n++;
      end
    end
    out_ready <= stall_rand ? ($urandom % 3 != 0) : 1'b1;
  end

  task automatic run_cfg(input string name, input logic rate_check);
    build_expect();
    got_n = 0;
    cb_cur = 0;
    @(posedge clk); #1;
    start = 1; @(posedge clk); #1; start = 0;
    for (int c = 0; c < N_CB; c++) begin
      int cyc;
      cb_cur = c;
      cyc = 0;
      while (!cb_done) begin @(posedge clk); #1; cyc++; end
      if (rate_check && c == 0)
        chk(cyc == CB_LANES, $sformatf("%s: block walk took %0d cycles", name, cyc));
      if (c < N_CB - 1) begin next = 1; @(posedge clk); #1; next = 0; end
    end
    chk(got_n == exp_addr.size(), $sformatf("%s: %0d requests, expected %0d", name, got_n, exp_addr.size()));
    chk(all_done, "all_done");
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; next = 0; random = 0; modes = '0; base = '0; dimc = 3'd1;
    for (int d = 0; d < 4; d++) begin len[d] = 1; str_cr[d] = 0; end
    size_l2 = 0; mask = '1; ptr_wait = 0; ptr_fetches = 0; stall_rand = 0; ptr_rsp = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // 1: contiguous 3-D, all strides mode 2, bytes, full rate
    dimc = 3; len[0] = 16; len[1] = 8; len[2] = 20; modes = 8'b00_10_10_10;
    base = 64'h1000; size_l2 = 0; mask = '1;
    run_cfg("contiguous", 1);
    // 2: 2-D, dim1 stride register, 4-byte elements, masked rows, stalls
    stall_rand = 1;
    dimc = 2; len[0] = 50; len[1] = 30; modes = 8'b00_00_11_01; str_cr[1] = 100;
    base = 64'h2_0000; size_l2 = 2;
    for (int k = 0; k < 8; k++) mask[k*32 +: 32] = $urandom;
    run_cfg("2-D strided masked", 0);
    // 3: 4-D with a replicated dimension and register strides, 2-byte
    dimc = 4; len[0] = 3; len[1] = 4; len[2] = 5; len[3] = 6;
    modes = 8'b11_11_00_11; str_cr[0] = 2; str_cr[2] = 40; str_cr[3] = 1000;
    base = 64'h30_0000; size_l2 = 1; mask = '1; mask[2] = 0;
    run_cfg("4-D", 0);
    // 4: random base, 2-D, 8-byte elements
    random = 1;
    dimc = 2; len[0] = 16; len[1] = 40; modes = 8'b00_00_00_01;
    base = 64'h8000; size_l2 = 3; mask = '1; mask[5] = 0; mask[17] = 0;
    ptr_fetches = 0;
    run_cfg("random 2-D", 0);
    chk(ptr_fetches == 38, $sformatf("pointer fetches %0d", ptr_fetches));
    // 5: 1-D covering all 8192 lanes
    random = 0; dimc = 1; len[0] = LEN_W'(TOTAL_LANES); modes = 8'b00_00_00_01; base = 0;
    size_l2 = 2; mask = '1;
    run_cfg("1-D full", 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
