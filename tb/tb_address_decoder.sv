// tb_address_decoder: checks the core-side store range check. Configuration
// instructions (dimension count, lengths, store strides, element width) are
// sent as the core would; vector stores then commit with different stride
// modes. For each buffered store the testbench computes the covered range
// [base, base + sum(len*stride)*bytes) itself and probes scalar load
// addresses just below, at, inside, at the last byte of and just past it.
// A random-base store must conflict with every address. Entries must leave
// oldest first on st_done; the buffer must refuse a store when full.
// ld_conflict is combinational; a committed store is visible after one clock.
`timescale 1ns/1ps
module tb_address_decoder;
  import mve_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic cfg_valid, st_valid, st_ready, st_done, ld_conflict;
  mve_instr_t cfg, st;
  logic [ADDR_W-1:0] ld_addr;
  logic [3:0] wb_count;
  int checks = 0, failures = 0;

  address_decoder dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic config_op(input mve_op_e op, input int imm, input longint rs);
    cfg = '0; cfg.op = op; cfg.imm = 8'(imm); cfg.rs = 64'(rs);
    cfg_valid = 1; @(posedge clk); #1; cfg_valid = 0;
  endtask

  task automatic store(input mve_op_e op, input logic [7:0] modes, input longint b);
    st = '0; st.op = op; st.modes = modes; st.rs = 64'(b);
    st_valid = 1; @(posedge clk); #1; st_valid = 0;
  endtask


  task automatic check_range(input longint lo, input longint hi, input string name);
    ld_addr = 64'(lo - 1); #1; chk(!ld_conflict, {name, ": below"});
    ld_addr = 64'(lo);     #1; chk(ld_conflict,  {name, ": first byte"});
    ld_addr = 64'((lo + hi) / 2); #1; chk(ld_conflict, {name, ": middle"});
    ld_addr = 64'(hi - 1); #1; chk(ld_conflict,  {name, ": last byte"});
    ld_addr = 64'(hi);     #1; chk(!ld_conflict, {name, ": past end"});
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_valid = 0; st_valid = 0; st_done = 0; cfg = '0; st = '0; ld_addr = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // 2-D: 64 x 10, dim0 consecutive, dim1 register stride 256, 4-byte
    config_op(OP_SETDIMC, 0, 2);
    config_op(OP_SETDIML, 0, 64);
    config_op(OP_SETDIML, 1, 10);
    config_op(OP_SETSTSTR, 1, 256);
    config_op(OP_SETWIDTH, 32, 0);
    store(OP_SST, 8'b00_00_11_01, 'h10000);
    check_range('h10000, 'h10000 + (64*1 + 10*256)*4, "2-D store");
    // same shape, dim1 mode 2 (continues dim0): 64*10 contiguous words
    store(OP_SST, 8'b00_00_10_01, 'h40000);
    check_range('h40000, 'h40000 + (64 + 10*64)*4, "mode-2 store");
    chk(wb_count == 2, "two entries");
    // oldest leaves first
    st_done = 1; @(posedge clk); #1; st_done = 0;
    ld_addr = 'h10000; #1; chk(!ld_conflict, "first store retired");
    ld_addr = 'h40000; #1; chk(ld_conflict, "second store still held");
    st_done = 1; @(posedge clk); #1; st_done = 0;
    chk(wb_count == 0, "empty");
    // random-base store covers everything
    store(OP_RST, 8'b00_00_00_01, 'h800);
    ld_addr = 'h1234_5678; #1; chk(ld_conflict, "random store blocks all");
    st_done = 1; @(posedge clk); #1; st_done = 0;
    ld_addr = 'h1234_5678; #1; chk(!ld_conflict, "random store retired");
    // fill the buffer
    for (int i = 0; i < 8; i++) store(OP_SST, 8'b00_00_11_01, 'h100000 * (i + 1));
    chk(!st_ready && wb_count == 8, "full buffer refuses");
    ld_addr = 'h800000; #1; chk(ld_conflict, "last entry held when full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
