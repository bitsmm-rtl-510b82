// tb_bsmac_mask -- self-checking testbench for the multiplicand mask circuit.
//
// Streams random multiplicands MSb first in windows of b cycles (new_i high
// in the first cycle of each window) and checks, in cycle j of the window
// after multiplicand m arrived, that the masked multiplicand equals m << j,
// that the sign bit equals the top bit of m, and that the extension mask
// covers exactly the bits above position j+b-1. Widths 1..16 are all used.
module tb_bsmac_mask;
  import bitsmm_pkg::*;

  localparam int unsigned W = MAX_W;

  logic           clk = 1'b0;
  logic           rst_i, new_i, mc_i;
  logic [2*W-1:0] m_mc_o, ext_o;
  logic           sign_o;
  int             checks = 0, failures = 0;

  always #5 clk = ~clk;

  bsmac_mask #(.W(W)) dut (.*);

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0]   prev, cur;
    logic [2*W-1:0] e_mc, e_ext;
    rst_i = 1'b1; new_i = 1'b0; mc_i = 1'b0;
    for (int it = 0; it < 160; it++) begin
      automatic int b = 1 + it % 16;
      @(negedge clk);
      rst_i = 1'b1; new_i = 1'b0; mc_i = 1'b0;
      @(negedge clk);
      rst_i = 1'b0;
      prev = '0;
      for (int k = 0; k < 6; k++) begin
        cur = W'($urandom) & W'((32'd1 << b) - 1);
        for (int j = 0; j < b; j++) begin
          new_i = (j == 0);
          mc_i  = cur[b-1-j];
          #1;
          if (k > 0) begin
            e_mc  = (2*W)'(prev) << j;
            e_ext = ~((2*W)'(0)) << (j + b);
            checks++;
            if (m_mc_o !== e_mc || ext_o !== e_ext || sign_o !== prev[b-1]) begin
              failures++;
              if (failures < 10)
                $display("FAIL b=%0d j=%0d m_mc=%h exp %h ext=%h exp %h", b, j,
                         m_mc_o, e_mc, ext_o, e_ext);
            end
          end
          @(negedge clk);
        end
        prev = cur;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
