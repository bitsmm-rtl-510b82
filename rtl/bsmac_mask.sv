// bsmac_mask -- multiplicand mask circuit shared by both bit-serial MACs.
//
// The multiplicand arrives one bit per cycle, MSb first, and is shifted into
// mc_reg from the bottom (mc_reg <= {mc_reg, mc_i}). Because the register
// keeps shifting left while the next multiplicand is being received, the
// previous, complete multiplicand moves up one place per cycle: in cycle j of
// a multiplication it sits at bits [j+b-1 : j], i.e. it is already weighted by
// 2^j for multiplier bit j. The mask circuit tracks where it is:
//   * b_m_reg (bit mask) gains one more leading one every cycle between value
//     toggles, so at a toggle it holds b ones, b being the operand width; it
//     restarts at every toggle (and at reset);
//   * at a toggle (new_i) this bit mask becomes the active mask, otherwise the
//     shift mask s_m_reg is; the active mask, shifted left by one, is the next
//     shift mask.
// m_mc_o = mc_reg & mask is the masked multiplicand; sign_o is its sign bit
// (the mc_reg bit under the top one of the mask) and ext_o marks the bits
// above the mask, which a MAC fills with sign_o to sign-extend the value.
// The operand width never has to be told to the MAC: it is the number of
// cycles between two toggles.
//
// The structure (mc_reg shift register, bit mask grown by one leading one per
// cycle, selection of bit or shift mask at a toggle, shift mask shifted left
// by one, AND with mc_reg, sign extension) follows the published MAC; the
// register widths (2*MAX_W), the synchronous active-high reset and the exact
// start value of the bit mask are this design's choices.
//
// Interface: new_i is the toggle-detect pulse (v_t_i ^ v_t_reg) from the MAC;
// all outputs are combinational from registers and new_i.
module bsmac_mask
  import bitsmm_pkg::*;
#(
  parameter int unsigned W = MAX_W
) (
  input  logic             clk,
  input  logic             rst_i,
  input  logic             new_i,     // a new operand starts this cycle
  input  logic             mc_i,      // multiplicand bit, MSb first
  output logic [2*W-1:0]   m_mc_o,    // masked, already-shifted multiplicand
  output logic [2*W-1:0]   ext_o,     // bit positions above the multiplicand
  output logic             sign_o     // sign bit of the masked multiplicand
);

  logic [2*W-1:0] mc_reg, b_m_reg, s_m_reg;
  logic [2*W-1:0] mask, top;

  always_comb begin
    mask   = new_i ? b_m_reg : s_m_reg;
    m_mc_o = mc_reg & mask;
    top    = mask & ~(mask >> 1);            // the highest one of the mask
    sign_o = |(mc_reg & top);
    ext_o  = ~(mask | (mask - 1'b1));        // everything above that one
  end

  always_ff @(posedge clk) begin
    if (rst_i) begin
      mc_reg  <= '0;
      b_m_reg <= '0;
      s_m_reg <= '0;
    end else begin
      mc_reg  <= {mc_reg[2*W-2:0], mc_i};
      b_m_reg <= new_i ? {{(2*W-1){1'b0}}, 1'b1} : {b_m_reg[2*W-2:0], 1'b1};
      s_m_reg <= mask << 1;
    end
  end

endmodule
