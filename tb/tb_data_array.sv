// tb_data_array: checks one 256x256 compute array at the micro-op level.
// Random words are written into word-lines from the external data input and
// read back through single-row sensing; two rows are then activated at once
// and every logic node (AND, NOR, NAND, OR, XOR) is written back and checked;
// a 4-bit ripple addition over vertically stored operands checks the carry
// latch chain; the tag latch is loaded from a node and used to predicate a
// write; a write with a random per-lane write select checks lane masking.
// Every micro-op takes one clock, which is checked by issuing them back to
// back (one per cycle) and reading results right after.
`timescale 1ns/1ps
module tb_data_array;
  import mve_pkg::*;
  localparam int N = COLS;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  uop_t uop;
  logic [N-1:0] din, wps, dout, t_q;
  int checks = 0, failures = 0;

  data_array dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic uop_t nop();
    uop_t u = '0;
    u.dsel = D_AND; u.cinit = C_KEEP; u.tsel = T_NODE;
    return u;
  endfunction

  task automatic issue(input uop_t u);
    uop = u; @(posedge clk); #1; uop = nop();
  endtask

  task automatic wr_row(input int r, input logic [N-1:0] v);
    uop_t u = nop();
    u.wr = 1; u.rw = 8'(r); u.dsel = D_DIN;
    din = v; issue(u);
  endtask


  task automatic sense(input int r, output logic [N-1:0] v);
    uop_t u = nop();
    u.rd0 = 1; u.ra = 8'(r);
    uop = u; #1; v = dout; uop = nop();
  endtask

  task automatic op2(input int ra, input int rb, input int rw, input dsel_e d);
    uop_t u = nop();
    u.rd0 = 1; u.ra = 8'(ra); u.rd1 = 1; u.rb = 8'(rb);
    u.wr = 1; u.rw = 8'(rw); u.dsel = d;
    issue(u);
  endtask

  logic [N-1:0] v [16];
  logic [N-1:0] got, exp_sum [4];

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uop = nop(); din = '0; wps = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 8; i++) begin
      for (int k = 0; k < N/32; k++) v[i][k*32 +: 32] = $urandom;
      wr_row(i, v[i]);
    end
    for (int i = 0; i < 8; i++) begin
      sense(i, got); chk(got == v[i], $sformatf("row %0d readback", i));
    end
    // two-row logic written back to rows 10..14
    op2(0, 1, 10, D_AND);  op2(0, 1, 11, D_NOR); op2(0, 1, 12, D_NAND);
    op2(0, 1, 13, D_OR);   op2(0, 1, 14, D_XOR);
    sense(10, got); chk(got == (v[0] & v[1]), "and");
    sense(11, got); chk(got == ~(v[0] | v[1]), "nor");
    sense(12, got); chk(got == ~(v[0] & v[1]), "nand");
    sense(13, got); chk(got == (v[0] | v[1]), "or");
    sense(14, got); chk(got == (v[0] ^ v[1]), "xor");
    // 4-bit ripple add: A in rows 0..3, B in rows 4..7, sum to rows 20..23
    begin
      logic [N-1:0] c;
      c = '0;
      for (int b = 0; b < 4; b++) begin
        uop_t u = nop();
        u.rd0 = 1; u.ra = 8'(b); u.rd1 = 1; u.rb = 8'(4 + b);
        u.wr = 1; u.rw = 8'(20 + b); u.dsel = D_SUM; u.c_en = 1;
        u.cinit = (b == 0) ? C_ZERO : C_KEEP;
        issue(u);
        exp_sum[b] = v[b] ^ v[4+b] ^ c;
        c = (v[b] & v[4+b]) | (c & (v[b] ^ v[4+b]));
      end
      for (int b = 0; b < 4; b++) begin
        sense(20 + b, got); chk(got == exp_sum[b], $sformatf("sum bit %0d", b));
      end
    end
    // tag from XOR of rows 2,3, then predicated write of row 5 into row 30
    begin
      uop_t u = nop();
      u.rd0 = 1; u.ra = 8'd2; u.rd1 = 1; u.rb = 8'd3; u.dsel = D_XOR;
      u.t_en = 1; u.tsel = T_NODE;
      issue(u);
      chk(t_q == (v[2] ^ v[3]), "tag load");
      wr_row(30, v[6]);
      u = nop(); u.rd0 = 1; u.ra = 8'd5; u.dsel = D_AND; u.wr = 1; u.rw = 8'd30; u.pred = 1;
      issue(u);
      sense(30, got);
      chk(got == (((v[2] ^ v[3]) & v[5]) | (~(v[2] ^ v[3]) & v[6])), "predicated write");
    end
    // lane-masked external write
    begin
      logic [N-1:0] m;
      for (int k = 0; k < N/32; k++) m[k*32 +: 32] = $urandom;
      wps = m;
      wr_row(7, v[0]);
      wps = '1;
      sense(7, got); chk(got == ((m & v[0]) | (~m & v[7])), "write select");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
