// tb_bsmac_mult_en -- self-checking testbench for the multiplication enable.
//
// Applies random toggle-detect pulses and resets and compares m_e_o with a
// reference: low until the second pulse after reset, high from the cycle of
// that pulse until the next reset.
module tb_bsmac_mult_en;

  logic clk = 1'b0;
  logic rst_i, new_i, m_e_o;
  int   checks = 0, failures = 0;
  int   pulses;
  logic exp_e;

  always #5 clk = ~clk;

  bsmac_mult_en dut (.*);

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_i = 1'b1; new_i = 1'b0; pulses = 0;
    @(negedge clk);
    for (int t = 0; t < 20000; t++) begin
      rst_i = ($urandom % 97 == 0);
      new_i = ($urandom % 5 == 0);
      #1;
      exp_e = !rst_i && (pulses + (new_i ? 1 : 0) >= 2);
      // during reset the output is not defined by the reference; skip it
      if (!rst_i) begin
        checks++;
        if (m_e_o !== exp_e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d pulses=%0d m_e=%b", t, pulses, m_e_o);
        end
      end
      if (rst_i) pulses = 0;
      else if (new_i) pulses++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
