// tb_mve_top: end-to-end test of the whole engine at its full size (eight
// control blocks, 8192 lanes, 46 MSHRs, 128-slot instruction queue), with
// no parameter overrides. The testbench plays the core (sending instructions
// in program order and probing scalar load addresses) and the regular half of
// the L2 (a byte-addressed memory with a fixed response latency that flags
// some lines as present in the L1). Unwritten memory reads as a fixed byte
// pattern of the address, so every expected value is computed here.
//
// Program, with 16-bit elements:
//   1. two strided 1-D loads over all 8192 lanes (consecutive, and a stride
//      register of 2 elements), an add and a contiguous store;
//   2. a compare into the tag latches and a predicated add, stored; a max,
//      stored; a left shift of one vector by the other, stored;
//   3. a 2-D shape (8 x 1024) with element 5 of the outer dimension masked
//      off: a multiply and a store, which must leave element 5 untouched;
//   4. a random-base 2-D load (8 row pointers read from a table in memory,
//      16 elements per row), stored contiguously;
// with scalar loads probed against the in-flight stores. Memory contents are
// compared word by word afterwards.
//
// Mechanisms counted (each must happen at least once): strided load,
// random-base load, pointer fetch, store, MSHR coalescing (fewer line reads
// than lane reads), masked control block skipping instructions, predicated
// write, L1 eviction, store/load conflict flagged, queue back-pressure on the
// core. A watchdog ends the run if it hangs.
`timescale 1ns/1ps
module tb_mve_top;
  import mve_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic core_valid, core_ready, ld_conflict;
  mve_instr_t core_instr;
  logic [ADDR_W-1:0] ld_addr;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic l1_evict_valid, busy;
  logic [ADDR_W-1:OFF_W] l1_evict_line;
  int checks = 0, failures = 0;

  mve_top dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------- memory model ----------------
  logic [7:0] mem [logic [63:0]];
  function automatic logic [7:0] rdb(logic [63:0] a);
    return mem.exists(a) ? mem[a] : (a[7:0] ^ (a[15:8] * 8'd7) ^ a[23:16]);
  endfunction
  function automatic logic [15:0] rd16(logic [63:0] a);
    return {rdb(a + 1), rdb(a)};
  endfunction
  function automatic logic present(logic [57:0] line);
    return line[1:0] == 2'b11;
  endfunction

  localparam int LAT = 10;
  mem_req_t q [$];
  int qt [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  assign mem_req_ready = (q.size() < 64);
  always @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we)
        for (int b = 0; b < LINE_BYTES; b++)
          if (mem_req.be[b]) mem[{mem_req.line, 6'(b)}] = mem_req.wdata[8*b +: 8];
      q.push_back(mem_req); qt.push_back(cyc + LAT);
    end
    if (mem_rsp_valid && mem_rsp_ready) begin
      void'(q.pop_front()); void'(qt.pop_front());
    end
  end
  always_comb begin
    mem_rsp_valid = 1'b0; mem_rsp = '0;
    if (q.size() > 0 && qt[0] <= cyc) begin
      mem_rsp_valid = 1'b1;
      mem_rsp.we = q[0].we; mem_rsp.line = q[0].line;
      for (int b = 0; b < LINE_BYTES; b++) mem_rsp.rdata[8*b +: 8] = rdb({q[0].line, 6'(b)});
      mem_rsp.l1_present = !q[0].we && present(q[0].line);
    end
  end

  // ---------------- mechanism counters ----------------
  int n_sld, n_rld, n_st, n_ptr, n_lane_rd, n_line_rd, n_skip, n_pred, n_evict, n_conflict, n_bp;
  always @(posedge clk) if (rst_n) begin
    if (dut.agu_valid && dut.agu_ready && dut.agu_ptr) n_ptr++;
    if (dut.agu_valid && dut.agu_ready && !dut.agu_ptr && !dut.mem_store) n_lane_rd++;
    if (mem_req_valid && mem_req_ready && !mem_req.we) n_line_rd++;
    if (dut.u_ctl.skip[5]) n_skip++;
    if (l1_evict_valid) n_evict++;
    if (core_valid && !core_ready) n_bp++;
  end

  task automatic send(input mve_op_e op, input int vd, input int vs1, input int vs2,
                      input int imm, input logic [63:0] rs, input logic [7:0] modes = 8'b00_00_10_01,
                      input logic pred = 1'b0);
    core_instr = '0;
    core_instr.op = op; core_instr.vd = 5'(vd); core_instr.vs1 = 5'(vs1); core_instr.vs2 = 5'(vs2);
    core_instr.imm = 8'(imm); core_instr.rs = rs; core_instr.modes = modes; core_instr.pred = pred;
    core_valid = 1;
    @(posedge clk);
    while (!core_ready) @(posedge clk);
    #1; core_valid = 0;
    if (op == OP_SLD) n_sld++;
    if (op == OP_RLD) n_rld++;
    if (op == OP_SST || op == OP_RST) n_st++;
    if (pred) n_pred++;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (busy) @(posedge clk);
    #1;
  endtask

  localparam logic [63:0] A = 64'h1_0000, B = 64'h2_0000, C = 64'h4_0000, D = 64'h5_0000,
                          E = 64'h6_0000, P = 64'h7_0000, F = 64'h9_0000,
                          G = 64'hA_0000, H = 64'hB_0000;
  function automatic logic [63:0] rowp(int w);
    return 64'h8_0000 + 64'(w) * 64'h400;
  endfunction

  logic [15:0] a [TOTAL_LANES], b [TOTAL_LANES];

  initial begin
    #50000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_valid = 0; core_instr = '0; ld_addr = '0;
    n_sld = 0; n_rld = 0; n_st = 0; n_ptr = 0; n_lane_rd = 0; n_line_rd = 0; n_skip = 0;
    n_pred = 0; n_evict = 0; n_conflict = 0; n_bp = 0;
    for (int w = 0; w < 8; w++)
      for (int k = 0; k < 8; k++) mem[P + 64'(8*w + k)] = rowp(w)[8*k +: 8];
    for (int g = 0; g < TOTAL_LANES; g++) begin
      a[g] = rd16(A + 64'(2*g));
      b[g] = rd16(B + 64'(4*g));
    end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk); #1;

    // ---- 1: strided loads, add, store ----
    send(OP_SETWIDTH, 0, 0, 0, 16, 0);
    send(OP_SETDIMC, 0, 0, 0, 0, 1);
    send(OP_SETDIML, 0, 0, 0, 0, TOTAL_LANES);
    send(OP_SETLDSTR, 0, 0, 0, 0, 2);
    send(OP_SLD, 1, 0, 0, 0, A, 8'b00_00_00_01);
    send(OP_SLD, 2, 0, 0, 0, B, 8'b00_00_00_11);
    send(OP_ADD, 3, 1, 2, 0, 0);
    send(OP_SST, 3, 0, 0, 0, C, 8'b00_00_00_01);
    // scalar loads against the store in flight
    ld_addr = C + 64'd100; #1;
    chk(ld_conflict, "load inside an in-flight store range");
    if (ld_conflict) n_conflict++;
    ld_addr = C + 64'(2*TOTAL_LANES); #1;
    chk(!ld_conflict, "load just past the store range");
    ld_addr = 64'h7000_0000; #1;
    chk(!ld_conflict, "unrelated load");
    wait_idle();
    for (int g = 0; g < TOTAL_LANES; g++)
      chk(rd16(C + 64'(2*g)) == 16'(a[g] + b[g]), $sformatf("add lane %0d", g));
    ld_addr = C + 64'd100; #1;
    chk(!ld_conflict, "store retired from the write buffer");

    // ---- 2: compare and predicated add ----
    send(OP_CPY, 4, 1, 0, 0, 0);
    send(OP_LT, 0, 1, 2, 0, 0);
    send(OP_ADD, 4, 1, 2, 0, 0, 8'b00_00_10_01, 1'b1);
    send(OP_SST, 4, 0, 0, 0, D, 8'b00_00_00_01);
    wait_idle();
    for (int g = 0; g < TOTAL_LANES; g++)
      chk(rd16(D + 64'(2*g)) == ((a[g] < b[g]) ? 16'(a[g] + b[g]) : a[g]), $sformatf("pred lane %0d", g));
    send(OP_MAX, 7, 1, 2, 0, 0);
    send(OP_SST, 7, 0, 0, 0, G, 8'b00_00_00_01);
    wait_idle();
    for (int g = 0; g < TOTAL_LANES; g++)
      chk(rd16(G + 64'(2*g)) == ((a[g] < b[g]) ? b[g] : a[g]), $sformatf("max lane %0d", g));
    send(OP_SHVL, 8, 1, 2, 0, 0);
    send(OP_SST, 8, 0, 0, 0, H, 8'b00_00_00_01);
    wait_idle();
    for (int g = 0; g < TOTAL_LANES; g++)
      chk(rd16(H + 64'(2*g)) == 16'(a[g] << b[g][3:0]), $sformatf("shvl lane %0d", g));

    // ---- 3: 2-D shape, element 5 masked, multiply and store ----
    for (int g = 0; g < TOTAL_LANES; g++) mem[E + 64'(2*g)] = 8'hEE;
    send(OP_SETDIMC, 0, 0, 0, 0, 2);
    send(OP_SETDIML, 0, 0, 0, 0, 1024);
    send(OP_SETDIML, 0, 0, 0, 1, 8);
    send(OP_UNSETMASK, 0, 0, 0, 0, 5);
    send(OP_MUL, 5, 1, 2, 0, 0);
    send(OP_SST, 5, 0, 0, 0, E, 8'b00_00_10_01);
    wait_idle();
    for (int g = 0; g < TOTAL_LANES; g++)
      if (g / 1024 == 5) chk(rd16(E + 64'(2*g)) == {rdb(E + 64'(2*g + 1)), 8'hEE}, $sformatf("masked lane %0d written", g));
      else chk(rd16(E + 64'(2*g)) == 16'(a[g] * b[g]), $sformatf("mul lane %0d", g));

    // ---- 4: random-base load through a pointer table ----
    send(OP_SETMASK, 0, 0, 0, 0, 5);
    send(OP_SETDIML, 0, 0, 0, 0, 16);
    send(OP_SETDIML, 0, 0, 0, 1, 8);
    send(OP_RLD, 6, 0, 0, 0, P, 8'b00_00_00_01);
    send(OP_SST, 6, 0, 0, 0, F, 8'b00_00_10_01);
    wait_idle();
    for (int w = 0; w < 8; w++)
      for (int x = 0; x < 16; x++)
        chk(rd16(F + 64'(2*(16*w + x))) == rd16(rowp(w) + 64'(2*x)), $sformatf("random row %0d elem %0d", w, x));

    $display("mechanisms: strided_load=%0d random_load=%0d pointer_fetch=%0d store=%0d lane_reads=%0d line_reads=%0d masked_skip=%0d predicated=%0d l1_evict=%0d conflicts=%0d backpressure_cycles=%0d",
             n_sld, n_rld, n_ptr, n_st, n_lane_rd, n_line_rd, n_skip, n_pred, n_evict, n_conflict, n_bp);
    chk(n_sld > 0, "strided load happened");
    chk(n_rld > 0, "random load happened");
    chk(n_ptr == 8, "pointer fetches");
    chk(n_st > 0, "store happened");
    chk(n_line_rd < n_lane_rd, "MSHR coalescing happened");
    chk(n_skip > 0, "masked block skipped instructions");
    chk(n_pred > 0, "predicated write happened");
    chk(n_evict > 0, "L1 eviction happened");
    chk(n_conflict > 0, "store/load conflict flagged");
    chk(n_bp > 0, "queue back-pressure happened");
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
