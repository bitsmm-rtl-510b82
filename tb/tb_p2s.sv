// tb_p2s -- self-checking testbench for the parallel-to-serial converters.
//
// One MSb-first (vertical) and one LSb-first (horizontal) converter are loaded
// with random values at random widths, back to back every b cycles and with
// idle gaps. Each emitted bit is compared with the expected bit of the value
// (zeros once it has been sent), and the toggle must change exactly in the
// cycle that follows each load.
module tb_p2s;
  import bitsmm_pkg::*;

  localparam int unsigned W = MAX_W;

  logic            clk = 1'b0;
  logic            rst_i, valid_i;
  logic [W-1:0]    data_i;
  logic [BW_W-1:0] bw_i;
  logic            bit_msb, tog_msb, bit_lsb, tog_lsb;
  int              checks = 0, failures = 0;

  always #5 clk = ~clk;

  p2s #(.W(W), .MSB_FIRST(1'b1)) dut_v (
    .clk, .rst_i, .valid_i, .data_i, .bw_i, .bit_o(bit_msb), .tog_o(tog_msb));
  p2s #(.W(W), .MSB_FIRST(1'b0)) dut_h (
    .clk, .rst_i, .valid_i, .data_i, .bw_i, .bit_o(bit_lsb), .tog_o(tog_lsb));

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %b exp %b", what, got, exp);
    end
  endtask

  initial begin
    logic [W-1:0] v;
    logic         tv, th;
    rst_i = 1'b1; valid_i = 1'b0; data_i = '0; bw_i = BW_W'(W);
    @(negedge clk);
    rst_i = 1'b0;
    tv = 1'b0; th = 1'b0;
    for (int it = 0; it < 2000; it++) begin
      automatic int b   = 1 + $urandom % W;
      automatic int gap = ($urandom % 3 == 0) ? $urandom % 4 : 0;
      v = W'($urandom);
      bw_i = BW_W'(b);
      valid_i = 1'b1; data_i = v;
      @(negedge clk);
      valid_i = 1'b0; data_i = W'($urandom);
      tv = ~tv; th = ~th;
      for (int j = 0; j < b + gap; j++) begin
        #1;
        check("msb bit", bit_msb, (j < b) ? v[b-1-j] : 1'b0);
        check("lsb bit", bit_lsb, (j < W) ? v[j] : 1'b0);
        check("toggle",  tog_msb, tv);
        check("toggle",  tog_lsb, th);
        if (j < b + gap - 1) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
