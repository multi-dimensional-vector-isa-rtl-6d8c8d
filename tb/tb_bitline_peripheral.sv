// tb_bitline_peripheral: exhaustive check of one bit-line's compute logic.
// For every pair of stored bits (A,B), carry state and carry-in override it
// checks each node the write drivers can select, the carry latch update, the
// tag-latch sources and the predicated write enable, against values computed
// here from A and B directly.
`timescale 1ns/1ps
module tb_bitline_peripheral;
  import mve_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic sa_and, sa_nor, din, wps;
  uop_t uop;
  logic wbit, wen, dout, t_q;
  int checks = 0, failures = 0;

  bitline_peripheral dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b exp %0b", what, got, exp);
    end
  endtask

  // drive the carry latch to value v with a single-cycle add of (v,v)
  task automatic set_c(input logic v);
    uop = '0; uop.cinit = C_ZERO; uop.c_en = 1'b1;
    sa_and = v; sa_nor = ~v;
    @(posedge clk); #1;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uop = '0; sa_and = 0; sa_nor = 1; din = 0; wps = 1;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    chk(t_q, 1'b0, "T after reset");
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++)
        for (int cq = 0; cq < 2; cq++)
          for (int ci = 0; ci < 3; ci++) begin
            logic A, B, cin, x;
            A = a[0]; B = b[0];
            set_c(cq[0]);
            cin = (ci == 1) ? 1'b0 : (ci == 2) ? 1'b1 : cq[0];
            x = A ^ B;
            for (int d = 0; d < 8; d++) begin
              logic e;
              uop = '0; uop.dsel = dsel_e'(d); uop.cinit = cinit_e'(ci);
              uop.dconst = A; din = ~B;
              sa_and = A & B; sa_nor = ~(A | B);
              #1;
              case (d)
                0: e = A & B;  1: e = ~(A | B); 2: e = ~(A & B); 3: e = A | B;
                4: e = x;      5: e = x ^ cin;  6: e = ~B;       default: e = A;
              endcase
              chk(wbit, e, $sformatf("node %0d A%0b B%0b cin%0b", d, A, B, cin));
              chk(dout, A & B, "dout");
            end
            // carry latch and carry-sourced tag
            uop = '0; uop.cinit = cinit_e'(ci); uop.c_en = 1'b1; uop.t_en = 1'b1;
            uop.tsel = T_CARRY; sa_and = A & B; sa_nor = ~(A | B);
            @(posedge clk); #1;
            chk(t_q, (A & B) | (cin & x), "T<=carry");
            // next cycle with C kept: sum uses the latched carry
            uop = '0; uop.dsel = D_SUM; sa_and = 0; sa_nor = 1; #1;
            chk(wbit, (A & B) | (cin & x), "C latched");
            uop.t_en = 1'b1; uop.tsel = T_NCARRY; @(posedge clk); #1;
            chk(t_q, 1'b1, "T<=~carry of (0,0,C)");
          end
    // write enable: wr, wps and predicate
    for (int t = 0; t < 2; t++) begin
      uop = '0; uop.t_en = 1'b1; uop.tsel = T_NODE; uop.dsel = D_DCONST; uop.dconst = t[0];
      @(posedge clk); #1;
      chk(t_q, t[0], "T<=node");
      for (int m = 0; m < 8; m++) begin
        uop = '0; uop.wr = m[0]; uop.pred = m[1]; wps = m[2]; #1;
        chk(wen, m[0] & m[2] & (~m[1] | t[0]), $sformatf("wen wr%0b pred%0b wps%0b T%0b", m[0], m[1], m[2], t[0]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
