// bitSerialMAC_booth -- Booth-recoded bit-serial multiply-accumulate unit.
//
// Operands are streamed one bit per cycle: the multiplicand MSb first, the
// multiplier LSb first, the multiplier of a product one operand window (b
// cycles, b = run-time width) behind its multiplicand, so that in every window
// the MAC receives the multiplier of the current product together with the
// multiplicand of the next one. v_t_i toggles at the first cycle of every
// window; the MAC compares it with its registered copy to find window starts
// instead of counting cycles.
//
// In cycle j of a product the mask circuit supplies the multiplicand already
// shifted left by j and sign-extended (M_j = M * 2^j). Booth recoding looks at
// the current multiplier bit ml_i and the previous one (ml_reg, taken as 0 in
// the first cycle of a window): bits 10 subtract M_j, bits 01 add it, 00/11
// do nothing. The single adder computes acc + (ml_i ? ~M_j : M_j) + ml_i, so
// the carry-in completes the two's complement on subtraction. Summed over the
// b cycles this gives M times the two's-complement multiplier.
//
// Protocol and timing: after reset, window 0 carries only multiplicand 0;
// windows 1..n carry multiplier k-1 with multiplicand k (zero in window n);
// one more toggle (window n+1) closes the stream. result_o is the next
// accumulator value (combinational, as in the published circuit); it holds the
// dot product from the first cycle of window n+1, (n+1)*b cycles after the
// first multiplicand bit, until reset. Inputs must be zero after the stream.
//
// The recoding, the single adder with inverted operand and carry-in, the
// sign-extend-and-shift multiplicand and the toggle-based control follow the
// published design; accumulator width and synchronous reset are choices of
// this design.
module bitSerialMAC_booth
  import bitsmm_pkg::*;
#(
  parameter int unsigned W     = MAX_W,
  parameter int unsigned ACC_W = ACC_W_DEF
) (
  input  logic             clk,
  input  logic             rst_i,
  input  logic             v_t_i,     // value toggle
  input  logic             mc_i,      // multiplicand bit (MSb first)
  input  logic             ml_i,      // multiplier bit (LSb first)
  output logic [ACC_W-1:0] result_o
);

  logic             v_t_reg, ml_reg;
  logic             new_op, m_e, b_e, sign;
  logic [2*W-1:0]   m_mc, ext;
  logic [ACC_W-1:0] mj, addend, acc_reg, acc_n;

  assign new_op = v_t_i ^ v_t_reg;

  bsmac_mask #(.W(W)) u_mask (
    .clk, .rst_i, .new_i(new_op), .mc_i,
    .m_mc_o(m_mc), .ext_o(ext), .sign_o(sign)
  );

  bsmac_mult_en u_men (.clk, .rst_i, .new_i(new_op), .m_e_o(m_e));

  always_comb begin
    // sign-extended, shifted multiplicand
    mj     = {{(ACC_W-2*W){sign}}, m_mc | (sign ? ext : '0)};
    // Booth enable: current and previous multiplier bits differ
    b_e    = m_e & (ml_i ^ (ml_reg & ~new_op));
    addend = ml_i ? ~mj : mj;
    acc_n  = b_e ? acc_reg + addend + ACC_W'(ml_i) : acc_reg;
  end

  assign result_o = acc_n;

  always_ff @(posedge clk) begin
    if (rst_i) begin
      v_t_reg <= 1'b0;
      ml_reg  <= 1'b0;
      acc_reg <= '0;
    end else begin
      v_t_reg <= v_t_i;
      ml_reg  <= ml_i;
      acc_reg <= acc_n;
    end
  end

endmodule
