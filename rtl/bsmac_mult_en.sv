// bsmac_mult_en -- multiplication-enable circuit shared by both bit-serial MACs.
//
// The first value toggle after reset marks the arrival of the first
// multiplicand; its multiplier bits arrive one operand window later, with the
// second toggle. f_m_reg ("first multiplicand seen") is set by the first
// toggle, m_e_reg by the first toggle that finds f_m_reg set. m_e_o is high
// from the cycle of that second toggle on (it includes the combinational term
// so that bit 0 of the first multiplier is already enabled) until reset.
//
// The published MAC names the two registers (m_e, f_m) and says what the
// circuit detects; the gate-level equations here are this design's own.
module bsmac_mult_en (
  input  logic clk,
  input  logic rst_i,
  input  logic new_i,   // value toggle detected this cycle
  output logic m_e_o    // multiplier bits are valid this cycle
);

  logic f_m_reg, m_e_reg;

  assign m_e_o = m_e_reg | (f_m_reg & new_i);

  always_ff @(posedge clk) begin
    if (rst_i) begin
      f_m_reg <= 1'b0;
      m_e_reg <= 1'b0;
    end else begin
      f_m_reg <= f_m_reg | new_i;
      m_e_reg <= m_e_o;
    end
  end

endmodule
