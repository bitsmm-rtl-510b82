// bitSerialMAC_sbmwc -- bit-serial MAC by standard binary multiplication with
// correction (SBMwC).
//
// Same operand protocol, value toggle, mask and enable circuits as
// bitSerialMAC_booth. Multiplier bits are treated as unsigned partial-product
// selectors, except that the sign bit (the last one) must subtract the
// multiplicand. The MAC cannot know which bit is the last, so it keeps two
// accumulators and two adders: acc_reg assumes the current bit is an ordinary
// bit (base + M_j), result_reg assumes it is the sign bit (base - M_j, done as
// base + ~M_j + 1). Both are updated only when the multiplier bit is 1. The
// base is result_reg in the first cycle of a window (the previous product has
// then ended, so its last bit was indeed the sign bit) and acc_reg otherwise.
//
// Timing: as for the Booth MAC, result_o (= next result_reg) is the dot
// product from the first cycle of window n+1. Here the closing toggle is
// required: it moves the finished value into both accumulators; without it
// result_reg would be overwritten by acc_reg.
//
// The two-adder/two-register structure and the base selection by the toggle
// follow the published circuit; widths and reset are this design's choices.
module bitSerialMAC_sbmwc
  import bitsmm_pkg::*;
#(
  parameter int unsigned W     = MAX_W,
  parameter int unsigned ACC_W = ACC_W_DEF
) (
  input  logic             clk,
  input  logic             rst_i,
  input  logic             v_t_i,
  input  logic             mc_i,
  input  logic             ml_i,
  output logic [ACC_W-1:0] result_o
);

  logic             v_t_reg;
  logic             new_op, m_e, sel, sign;
  logic [2*W-1:0]   m_mc, ext;
  logic [ACC_W-1:0] mj, base, acc_reg, result_reg, acc_n, result_n;

  assign new_op = v_t_i ^ v_t_reg;

  bsmac_mask #(.W(W)) u_mask (
    .clk, .rst_i, .new_i(new_op), .mc_i,
    .m_mc_o(m_mc), .ext_o(ext), .sign_o(sign)
  );

  bsmac_mult_en u_men (.clk, .rst_i, .new_i(new_op), .m_e_o(m_e));

  always_comb begin
    mj       = {{(ACC_W-2*W){sign}}, m_mc | (sign ? ext : '0)};
    sel      = m_e & ml_i;
    base     = new_op ? result_reg : acc_reg;
    result_n = sel ? base + ~mj + 1'b1 : base;
    acc_n    = sel ? base + mj : base;
  end

  assign result_o = result_n;

  always_ff @(posedge clk) begin
    if (rst_i) begin
      v_t_reg    <= 1'b0;
      acc_reg    <= '0;
      result_reg <= '0;
    end else begin
      v_t_reg    <= v_t_i;
      acc_reg    <= acc_n;
      result_reg <= result_n;
    end
  end

endmodule
