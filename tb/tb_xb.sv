// tb_xb: checks the line/word crossbar for all element sizes (1, 2, 4 and 8
// bytes) and every aligned offset in a 64-byte line. Read side: the extracted
// word must equal the bytes of a random line at that offset, zero-extended.
// Write side: the produced line must hold the word's low bytes at the offset,
// and the byte enables must cover exactly those bytes. The crossbar is
// combinational; results are sampled one time step after the inputs change.
`timescale 1ns/1ps
module tb_xb;
  import mve_pkg::*;
  logic [1:0] rd_size_l2, wr_size_l2;
  logic [LINE_BITS-1:0] rd_line, wr_line;
  logic [OFF_W-1:0] rd_off, wr_off;
  logic [MAX_W-1:0] rd_word, wr_word;
  logic [LINE_BYTES-1:0] wr_be;
  int checks = 0, failures = 0;

  xb dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 8; rep++)
      for (int s = 0; s < 4; s++) begin
        int nb;
        nb = 1 << s;
        for (int k = 0; k < LINE_BITS/32; k++) rd_line[k*32 +: 32] = $urandom;
        wr_word = {$urandom, $urandom};
        for (int o = 0; o < LINE_BYTES; o += nb) begin
          logic [MAX_W-1:0] e;
          rd_size_l2 = 2'(s); wr_size_l2 = 2'(s);
          rd_off = 6'(o); wr_off = 6'(o);
          #1;
          e = '0;
          for (int b = 0; b < nb; b++) e[8*b +: 8] = rd_line[8*(o+b) +: 8];
          chk(rd_word == e, $sformatf("read size %0d off %0d", nb, o));
          for (int b = 0; b < LINE_BYTES; b++) begin
            logic inb;
            inb = (b >= o) && (b < o + nb);
            chk(wr_be[b] == inb, $sformatf("be size %0d off %0d byte %0d", nb, o, b));
            if (inb) chk(wr_line[8*b +: 8] == wr_word[8*(b-o) +: 8], "write data");
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
