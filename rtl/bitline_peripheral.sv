// bitline_peripheral: bit-serial compute logic under one SRAM bit-line.
//
// When two word-lines are activated together, the two sense amplifiers of a
// bit-line pair deliver A&B (bit-line) and ~(A|B) (complement bit-line) of the
// two stored bits. From these this block derives NAND, OR and XOR, a full
// adder (sum and carry) whose carry-in comes from the carry latch C, and
// selects one node to drive back into the array through the write drivers.
// The tag latch T holds a per-lane predicate (a comparison result, or one
// multiplier bit during multiplication) and, when the micro-op asks for it,
// suppresses the write on lanes whose T is 0. With a single word-line
// activated, A&B reads the stored bit and ~(A|B) its complement.
//
// Interface: the micro-op fields are shared by all bit-lines of an array;
// sa_and/sa_nor come from the array, din is this lane's external bit (from
// the transpose unit), wps is this lane's write select. wbit/wen go to the
// write driver. Timing: everything is combinational within the cycle of the
// read; C and T update at the clock edge that also writes the array.
//
// Follows the blue (bit-serial) part of the paper's bit-line peripheral
// figure: the nodes A&B, ~(A|B), ~(A&B), A|B, A^B, Sum, Carry, Din, the C and
// T latches and the Pred / write-select gating of the drivers. The inter-
// bit-line paths (carry chain, shift latch) serve only the bit-hybrid and
// bit-parallel alternatives and are left out. The carry-in override (force 0
// or 1), the constant-bit input and the choice of what T loads are this
// design's own, needed to start additions, subtractions and comparisons.
module bitline_peripheral
  import mve_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   sa_and,    // sense amplifier on BL: A & B
  input  logic   sa_nor,    // sense amplifier on BLB: ~(A | B)
  input  logic   din,       // external data bit Din_i
  input  logic   wps,       // write select for this lane
  input  uop_t   uop,
  output logic   wbit,      // value to the write drivers
  output logic   wen,       // write enable for this bit-line
  output logic   dout,      // Dout_i: the sensed A & B
  output logic   t_q        // tag latch
);
  logic c_q;
  logic n_nand, n_or, n_xor, cin, n_sum, n_carry;

  always_comb begin
    n_nand  = ~sa_and;
    n_or    = ~sa_nor;
    n_xor   = n_or & n_nand;
    unique case (uop.cinit)
      C_ZERO:  cin = 1'b0;
      C_ONE:   cin = 1'b1;
      default: cin = c_q;
    endcase
    n_sum   = n_xor ^ cin;
    n_carry = sa_and | (cin & n_xor);
    unique case (uop.dsel)
      D_AND:   wbit = sa_and;
      D_NOR:   wbit = sa_nor;
      D_NAND:  wbit = n_nand;
      D_OR:    wbit = n_or;
      D_XOR:   wbit = n_xor;
      D_SUM:   wbit = n_sum;
      D_DIN:   wbit = din;
      default: wbit = uop.dconst;
    endcase
    wen  = uop.wr & wps & (~uop.pred | t_q);
    dout = sa_and;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q <= 1'b0;
      t_q <= 1'b0;
    end else begin
      if (uop.c_en) c_q <= n_carry;
      if (uop.t_en) begin
        unique case (uop.tsel)
          T_CARRY:  t_q <= n_carry;
          T_NCARRY: t_q <= ~n_carry;
          default:  t_q <= wbit;
        endcase
      end
    end
  end

endmodule
