// tb_mshr: checks the miss-status registers against a memory model in this
// testbench. Several hundred read requests, each for a different lane and
// spread over a few dozen cache lines, are offered with random gaps, mixed
// with line writes. The memory answers in order after a fixed latency and
// marks some lines as present in the L1. Checked: every read request is
// delivered exactly once with the right line data, offset, lane and pointer
// flag; the number of line reads sent to memory is smaller than the number of
// requests (coalescing);
// every write
// reaches memory with its data and byte enables; an L1 eviction is raised for
// every returned read line marked present; idle rises only at the end.
`timescale 1ns/1ps
module tb_mshr;
  import mve_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous resets
  logic req_valid, req_ready, req_we, req_ptr;
  logic [ADDR_W-1:0] req_addr;
  logic [CBL_W-1:0] req_lane;
  logic [LINE_BITS-1:0] req_wline, out_line;
  logic [LINE_BYTES-1:0] req_be;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic out_valid, out_ptr, l1_evict_valid, idle;
  logic [OFF_W-1:0] out_off;
  logic [CBL_W-1:0] out_lane;
  logic [ADDR_W-1:OFF_W] l1_evict_line;
  int checks = 0, failures = 0;

  mshr dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [LINE_BITS-1:0] pat(logic [57:0] line);
    logic [LINE_BITS-1:0] r;
    for (int k = 0; k < LINE_BITS/64; k++) r[k*64 +: 64] = {line[31:0], 32'(k) ^ 32'hA5A5_0000};
    return r;
  endfunction
  function automatic logic present(logic [57:0] line);
    return line[0] & line[1];
  endfunction

  // memory model: fixed latency FIFO
  localparam int LAT = 40;
  mem_req_t q [$];
  int       qt [$];
  int       cyc = 0, n_rd = 0, n_wr = 0, n_evict = 0, n_evict_exp = 0;
  always @(posedge clk) cyc++;
  assign mem_req_ready = (q.size() < 64);
  always @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      q.push_back(mem_req); qt.push_back(cyc + LAT);
      if (mem_req.we) n_wr++; else n_rd++;
    end
    if (mem_rsp_valid && mem_rsp_ready) begin
      if (!mem_rsp.we && mem_rsp.l1_present) n_evict_exp++;
      void'(q.pop_front()); void'(qt.pop_front());
    end
    if (l1_evict_valid) n_evict++;
  end
  always_comb begin
    mem_rsp_valid = 1'b0; mem_rsp = '0;
    if (q.size() > 0 && qt[0] <= cyc) begin
      mem_rsp_valid = 1'b1;
      mem_rsp.we = q[0].we; mem_rsp.line = q[0].line;
      mem_rsp.rdata = q[0].we ? '0 : pat(q[0].line);
      mem_rsp.l1_present = !q[0].we && present(q[0].line);
    end
  end

  // expected deliveries by lane
  logic [63:0] exp_addr [CB_LANES];
  logic        exp_ptr  [CB_LANES];
  int          delivered [CB_LANES];
  int          n_req = 0, n_out = 0;
  always @(posedge clk) if (out_valid) begin
    int l; l = int'(out_lane);
    n_out++;
    delivered[l]++;
    chk(out_line == pat(exp_addr[l][63:6]) && out_off == exp_addr[l][5:0] && out_ptr == exp_ptr[l],
        $sformatf("delivery lane %0d", l));
  end
  // writes seen by memory
  logic [57:0] wr_line_exp [$];
  always @(posedge clk) if (mem_req_valid && mem_req_ready && mem_req.we) begin
    chk(wr_line_exp.size() > 0 && mem_req.line == wr_line_exp[0] &&
        mem_req.wdata == ~pat(mem_req.line) && mem_req.be == {32'h0, 32'hFFFF_0000}, "write forwarded");
    if (wr_line_exp.size() > 0) void'(wr_line_exp.pop_front());
  end

  task automatic send(input logic we, input logic [63:0] a, input int lane, input logic ptr);
    req_valid = 1; req_we = we; req_addr = a; req_lane = 10'(lane); req_ptr = ptr;
    req_wline = ~pat(a[63:6]); req_be = {32'h0, 32'hFFFF_0000};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1; req_valid = 0;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_we = 0; req_addr = '0; req_lane = '0; req_ptr = 0; req_wline = '0; req_be = '0;
    for (int l = 0; l < CB_LANES; l++) delivered[l] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    chk(idle, "idle after reset");
    for (int l = 0; l < 800; l++) begin
      logic [63:0] a;
      a = 64'h4_0000 + 64'($urandom % 40) * 64 + 64'($urandom % 8) * 8;
      exp_addr[l] = a; exp_ptr[l] = (l % 7 == 0);
      n_req++;
      send(1'b0, a, l, exp_ptr[l]);
      if (l % 50 == 0) begin
        logic [63:0] wa; wa = 64'h9_0000 + 64'(l) * 64;
        wr_line_exp.push_back(wa[63:6]);
        send(1'b1, wa, 0, 1'b0);
      end
      if ($urandom % 16 == 0) repeat ($urandom % 5) @(posedge clk);
      #1;
    end
    while (!idle) @(posedge clk);
    repeat (2) @(posedge clk);
    chk(n_out == n_req, $sformatf("deliveries %0d of %0d", n_out, n_req));
    for (int l = 0; l < 800; l++) chk(delivered[l] == 1, $sformatf("lane %0d delivered %0d times", l, delivered[l]));
    chk(n_rd < n_req / 2, $sformatf("line reads %0d for %0d requests: no coalescing", n_rd, n_req));
    chk(n_wr == 16 && wr_line_exp.size() == 0, "all writes sent");
    chk(n_evict == n_evict_exp && n_evict > 0, $sformatf("l1 evictions %0d exp %0d", n_evict, n_evict_exp));
    $display("mshr: %0d requests, %0d line reads, %0d writes, %0d evictions", n_req, n_rd, n_wr, n_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
