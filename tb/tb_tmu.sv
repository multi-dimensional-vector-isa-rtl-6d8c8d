// tb_tmu: checks the transpose unit at its full size (1024 lanes x 64 bits).
// Random words are written lane by lane, one per clock, into a random subset
// of lanes; the valid vector must mark exactly those lanes; every bit-slice
// read across the lanes must equal the corresponding bit of each word; bit-
// slices written from the array side must then read back as words per lane;
// clear must empty the valid vector. Word writes and slice writes take effect
// at the next clock edge, reads are combinational; both are checked that way.
`timescale 1ns/1ps
module tb_tmu;
  import mve_pkg::*;
  localparam int L = CB_LANES, W = MAX_W;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic clear, wr_en, slice_wr;
  logic [$clog2(L)-1:0] wr_lane, rd_lane;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(W)-1:0] slice_idx;
  logic [L-1:0] slice_out, slice_in, valid;
  int checks = 0, failures = 0;

  tmu dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  logic [W-1:0] ref_w [L];
  logic [L-1:0] ref_v;
  logic [L-1:0] sl [W];

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; wr_en = 0; slice_wr = 0; wr_lane = '0; rd_lane = '0; wr_data = '0;
    slice_idx = '0; slice_in = '0; ref_v = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    clear = 1; @(posedge clk); #1; clear = 0;
    chk(valid == '0, "clear");
    for (int l = 0; l < L; l++) begin
      ref_w[l] = {$urandom, $urandom};
      if ($urandom % 4 != 0) begin
        wr_en = 1; wr_lane = 10'(l); wr_data = ref_w[l];
        @(posedge clk); #1;
        ref_v[l] = 1'b1;
      end
    end
    wr_en = 0;
    chk(valid == ref_v, "valid vector");
    for (int b = 0; b < W; b++) begin
      slice_idx = 6'(b); #1;
      for (int l = 0; l < L; l++)
        if (ref_v[l]) chk(slice_out[l] == ref_w[l][b], $sformatf("slice %0d lane %0d", b, l));
    end
    for (int b = 0; b < W; b++) begin
      for (int k = 0; k < L/32; k++) sl[b][k*32 +: 32] = $urandom;
      slice_wr = 1; slice_idx = 6'(b); slice_in = sl[b];
      @(posedge clk); #1;
    end
    slice_wr = 0;
    for (int l = 0; l < L; l++) begin
      logic [W-1:0] e;
      for (int b = 0; b < W; b++) e[b] = sl[b][l];
      rd_lane = 10'(l); #1;
      chk(rd_data == e, $sformatf("word lane %0d", l));
    end
    clear = 1; @(posedge clk); #1; clear = 0;
    chk(valid == '0, "clear again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
