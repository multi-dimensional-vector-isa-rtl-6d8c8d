// tb_mve_controller: checks the instruction controller with simple stand-ins
// for its neighbours: eight control blocks that take a command, stay busy a
// random number of cycles and pulse ack, and an address generator that
// reports a block walked a few cycles after start/next. Checked:
//  - configuration: dimension lengths and a dimension mask (two highest-
//    dimension elements switched off) become the per-CB active vector, so the
//    masked blocks never see a command and the others see every instruction;
//  - decode: register numbers become word-line addresses (register x width),
//    greater-than is sent as less-than with swapped operands;
//  - per-CB program order, with blocks running ahead of one another;
//  - queue back-pressure: with the blocks stalled, exactly 128 instructions
//    (2 KB of 16-byte slots) are accepted before in_ready falls;
//  - memory sequencing: a load walks block c's addresses before block c
//    copies the transpose unit in; a store copies out before its walk;
//    blocks go in order 0..7 and a store ends with one st_done pulse.
`timescale 1ns/1ps
module tb_mve_controller;
  import mve_pkg::*;
  localparam int NCB = N_CB;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic in_valid, in_ready;
  mve_instr_t in_instr;
  logic [NCB-1:0] cb_valid, cb_ready, cb_ack;
  cb_cmd_t cb_cmd [NCB];
  logic agu_start, agu_next, agu_random, agu_cb_done, mshr_idle;
  logic [7:0] agu_modes;
  logic [ADDR_W-1:0] agu_base;
  logic [2:0] cr_dimc;
  logic [LEN_W-1:0] cr_len [N_DIMS];
  logic [ADDR_W-1:0] agu_str [N_DIMS];
  logic [1:0] mem_size_l2;
  logic [MAX_HI_LEN-1:0] cr_mask;
  logic mem_store, tmu_clear, st_done, mem_busy, cfg_busy;
  logic [2:0] mem_cb;
  int checks = 0, failures = 0;

  mve_controller dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // control-block stand-ins
  int  cnt [NCB];
  logic hold;
  cb_cmd_t got [NCB][$];
  string ev [$];
  for (genvar c = 0; c < NCB; c++) begin : g_cb
    assign cb_ready[c] = (cnt[c] == 0);
    always @(posedge clk) begin
      cb_ack[c] <= 1'b0;
      if (cb_valid[c] && cb_ready[c]) begin
        got[c].push_back(cb_cmd[c]);
        if (cb_cmd[c].op == CB_LD_TMU) begin
          chk(mem_cb == 3'(c), "load copy-in to the selected block");
          ev.push_back($sformatf("L%0d", c));
        end
        if (cb_cmd[c].op == CB_ST_TMU) begin
          chk(mem_cb == 3'(c), "store copy-out from the selected block");
          ev.push_back($sformatf("S%0d", c));
        end
        cnt[c] <= 2 + $urandom % 6;
      end else if (cnt[c] > 1 && !hold) cnt[c] <= cnt[c] - 1;
      else if (cnt[c] == 1 && !hold) begin cnt[c] <= 0; cb_ack[c] <= 1'b1; end
    end
  end

  // address-generator stand-in
  int agu_cnt, walks, st_dones;
  always @(posedge clk) begin
    if (agu_start || agu_next) begin
      ev.push_back($sformatf("W%0d", walks));
      walks++;
      agu_cnt <= 4;
      agu_cb_done <= 1'b0;
    end else if (agu_cnt > 1) agu_cnt <= agu_cnt - 1;
    else if (agu_cnt == 1) begin agu_cnt <= 0; agu_cb_done <= 1'b1; end
    if (st_done) st_dones++;
  end
  assign mshr_idle = 1'b1;

  task automatic send(input mve_op_e op, input int vd, input int vs1, input int vs2,
                      input int imm, input longint rs);
    in_instr = '0;
    in_instr.op = op; in_instr.vd = 5'(vd); in_instr.vs1 = 5'(vs1); in_instr.vs2 = 5'(vs2);
    in_instr.imm = 8'(imm); in_instr.rs = 64'(rs); in_instr.modes = 8'b00_00_01_01;
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1; in_valid = 0;
  endtask

  task automatic drain();
    @(posedge clk);
    while (cfg_busy || mem_busy || cb_ready != '1) @(posedge clk);
    repeat (3) @(posedge clk);
    #1;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string exp_ev [$];
    in_valid = 0; in_instr = '0; hold = 0; agu_cb_done = 0; agu_cnt = 0; walks = 0; st_dones = 0;
    for (int c = 0; c < NCB; c++) cnt[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // 2-D register: 8 elements of 1024 lanes, element 3 and 5 masked off
    send(OP_SETDIMC, 0, 0, 0, 0, 2);
    send(OP_SETDIML, 0, 0, 0, 0, 1024);
    send(OP_SETDIML, 0, 0, 0, 1, 8);
    send(OP_SETWIDTH, 0, 0, 0, 16, 0);
    send(OP_UNSETMASK, 0, 0, 0, 0, 3);
    send(OP_UNSETMASK, 0, 0, 0, 0, 5);
    chk(cr_dimc == 2 && cr_len[0] == 1024 && cr_len[1] == 8 && mem_size_l2 == 1, "config registers");
    send(OP_ADD, 3, 1, 2, 0, 0);
    send(OP_GT, 0, 1, 2, 0, 0);
    send(OP_MUL, 4, 3, 3, 0, 0);
    drain();
    for (int c = 0; c < NCB; c++) begin
      if (c == 3 || c == 5) chk(got[c].size() == 0, $sformatf("masked block %0d got %0d commands", c, got[c].size()));
      else begin
        chk(got[c].size() == 3, $sformatf("block %0d got %0d commands", c, got[c].size()));
        if (got[c].size() == 3) begin
          chk(got[c][0].op == CB_ADD && got[c][0].rd == 48 && got[c][0].ra == 16 && got[c][0].rb == 32
              && got[c][0].width == 16, "add decode");
          chk(got[c][1].op == CB_LT && got[c][1].ra == 32 && got[c][1].rb == 16, "gt as swapped lt");
          chk(got[c][2].op == CB_MUL && got[c][2].rd == 64, "program order");
        end
      end
      got[c].delete();
    end
    // back-pressure: blocks stalled, the queue takes exactly 128 entries
    send(OP_SETMASK, 0, 0, 0, 0, 3);
    send(OP_SETMASK, 0, 0, 0, 0, 5);
    hold = 1;
    begin
      int taken, idle_cycles;
      taken = 0; idle_cycles = 0;
      in_instr = '0; in_instr.op = OP_XOR; in_instr.vd = 5'd2; in_instr.vs1 = 5'd1; in_instr.vs2 = 5'd1;
      in_valid = 1;
      while (idle_cycles < 20) begin
        @(posedge clk);
        if (in_ready) begin taken++; idle_cycles = 0; end else idle_cycles++;
      end
      #1; in_valid = 0;
      chk(taken == 128, $sformatf("queue accepted %0d entries", taken));
    end
    hold = 0;
    drain();
    for (int c = 0; c < NCB; c++) begin
      chk(got[c].size() == 128, $sformatf("block %0d ran %0d queued ops", c, got[c].size()));
      got[c].delete();
    end
    // memory sequencing with blocks 2 and 6 masked
    send(OP_UNSETMASK, 0, 0, 0, 0, 2);
    send(OP_UNSETMASK, 0, 0, 0, 0, 6);
    ev.delete(); walks = 0;
    send(OP_ADD, 1, 1, 1, 0, 0);
    send(OP_SLD, 5, 0, 0, 0, 'h1000);
    drain();
    exp_ev = '{"W0","L0","W1","L1","W2","W3","L3","W4","L4","W5","L5","W6","W7","L7"};
    chk(ev == exp_ev, "load sequence");
    if (ev != exp_ev) foreach (ev[i]) $display("  ev %s", ev[i]);
    ev.delete(); walks = 0; st_dones = 0;
    send(OP_SST, 5, 0, 0, 0, 'h2000);
    drain();
    exp_ev = '{"S0","W0","S1","W1","W2","S3","W3","S4","W4","S5","W5","W6","S7","W7"};
    chk(ev == exp_ev, "store sequence");
    if (ev != exp_ev) foreach (ev[i]) $display("  ev %s", ev[i]);
    chk(st_dones == 1, "one st_done per store");
    for (int c = 0; c < NCB; c++)
      if (c != 2 && c != 6) chk(got[c].size() == 3 && got[c][0].op == CB_ADD && got[c][1].op == CB_LD_TMU
                                && got[c][2].op == CB_ST_TMU && got[c][2].ra == 80, "order around memory ops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
