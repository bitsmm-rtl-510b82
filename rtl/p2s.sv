// p2s -- parallel-to-serial converter at the edge of the systolic array.
//
// On valid_i the converter stores a parallel operand; from the next cycle on
// it shifts it out one bit per cycle, zeros following once the value has been
// sent. With MSB_FIRST = 1 (the vertical, multiplicand converters) the
// register shifts left and bit bw_i-1 is sent first; with MSB_FIRST = 0 (the
// horizontal, multiplier converters) it shifts right and bit 0 is sent first.
// bw_i is the run-time operand width, 1..W (asserted on every load; other
// values are treated as W).
//
// tog_o is the value toggle: it changes in the cycle the first bit of a newly
// loaded operand appears on bit_o. The array uses the toggle of the vertical
// converters; the horizontal ones leave it unused.
//
// Load-on-valid, shift direction and bit order follow the published array;
// generating the toggle here, the zero fill and the reset are this design's
// choices.
module p2s
  import bitsmm_pkg::*;
#(
  parameter int unsigned W         = MAX_W,
  parameter bit          MSB_FIRST = 1'b1
) (
  input  logic            clk,
  input  logic            rst_i,
  input  logic            valid_i,
  input  logic [W-1:0]    data_i,
  input  logic [BW_W-1:0] bw_i,
  output logic            bit_o,
  output logic            tog_o
);

  logic [W-1:0] sr;
  logic [$clog2(W)-1:0] top;

  always_comb begin
    if (bw_i == '0 || bw_i > BW_W'(W)) top = $clog2(W)'(W - 1);
    else                               top = $clog2(W)'(bw_i - 1'b1);
    bit_o = MSB_FIRST ? sr[top] : sr[0];
  end

  // operands are loaded only with a run-time width inside 1..W
  a_width: assert property (@(posedge clk) disable iff (rst_i)
                            valid_i |-> (bw_i != '0 && bw_i <= BW_W'(W)))
    else $error("p2s loaded with operand width %0d", bw_i);

  always_ff @(posedge clk) begin
    if (rst_i) begin
      sr    <= '0;
      tog_o <= 1'b0;
    end else if (valid_i) begin
      sr    <= data_i;
      tog_o <= ~tog_o;
    end else begin
      sr    <= MSB_FIRST ? (sr << 1) : (sr >> 1);
    end
  end

endmodule
