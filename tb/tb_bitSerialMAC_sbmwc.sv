// tb_bitSerialMAC_sbmwc -- self-checking testbench for the SBMwC bit-serial MAC.
//
// Streams operands with the MAC protocol (value toggle at each window start,
// multiplicand MSb first, multiplier LSb first one window later, a zero flush
// window and a closing toggle) and compares result_o, in the first cycle of
// the closing window, i.e. exactly (n+1)*b cycles after the first bit, with a
// dot product computed by the testbench in 64-bit integer arithmetic. It then
// checks that the result holds while the inputs stay idle.
// Coverage: every operand pair for widths 1..8, 100 random pairs for each
// width 9..16, random dot products (width 1..16, length 1..40), and a
// 1000-term worst-case dot product of -2^15 * -2^15.
module tb_bitSerialMAC_sbmwc;
  import bitsmm_pkg::*;

  localparam int unsigned W  = MAX_W;
  localparam int unsigned AW = ACC_W_DEF;

  logic          clk = 1'b0;
  logic          rst_i, v_t_i, mc_i, ml_i;
  logic [AW-1:0] result_o;
  int            checks = 0, failures = 0;
  longint        mcs[], mls[];

  always #5 clk = ~clk;

  bitSerialMAC_sbmwc #(.W(W), .ACC_W(AW)) dut (.*);

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sext(longint v, int b);
    longint m = (longint'(1) << b) - 1;
    v = v & m;
    return v[b-1] ? v - (longint'(1) << b) : v;
  endfunction

  // Runs one dot product of n = mcs.size() terms at width b.
  task automatic run_dot(int b);
    int     n = mcs.size();
    longint exp_v = 0;
    logic [AW-1:0] exp_bits;
    for (int k = 0; k < n; k++) exp_v += sext(mcs[k], b) * sext(mls[k], b);
    exp_bits = AW'(exp_v);
    @(negedge clk);
    rst_i = 1'b1; v_t_i = 1'b0; mc_i = 1'b0; ml_i = 1'b0;
    @(negedge clk);
    rst_i = 1'b0;
    for (int k = 0; k <= n + 1; k++) begin
      for (int j = 0; j < b; j++) begin
        if (j == 0) v_t_i = ~v_t_i;
        mc_i = (k < n) ? mcs[k][b-1-j] : 1'b0;
        ml_i = (k >= 1 && k <= n) ? mls[k-1][j] : 1'b0;
        if (k == n + 1 && j == 0) begin
          #1;
          checks++;
          if (result_o !== exp_bits) begin
            failures++;
            if (failures < 10)
              $display("FAIL b=%0d n=%0d got %0d exp %0d", b, n,
                       $signed(result_o), exp_v);
          end
          // the close window is the last one; stop here
          break;
        end
        @(negedge clk);
      end
    end
    // idle: result must hold
    @(negedge clk);
    mc_i = 1'b0; ml_i = 1'b0;
    repeat (3) @(negedge clk);
    #1;
    checks++;
    if (result_o !== exp_bits) begin
      failures++;
      if (failures < 10) $display("FAIL hold b=%0d n=%0d", b, n);
    end
  endtask

  initial begin
    rst_i = 1'b1; v_t_i = 1'b0; mc_i = 1'b0; ml_i = 1'b0;
    // exhaustive single products
    for (int b = 1; b <= 8; b++)
      for (int x = 0; x < (1 << b); x++)
        for (int y = 0; y < (1 << b); y++) begin
          mcs = new[1]; mls = new[1];
          mcs[0] = x; mls[0] = y;
          run_dot(b);
        end
    // random single products, wide operands
    for (int b = 9; b <= 16; b++)
      repeat (100) begin
        mcs = new[1]; mls = new[1];
        mcs[0] = $urandom; mls[0] = $urandom;
        run_dot(b);
      end
    // random dot products
    repeat (200) begin
      automatic int b = 1 + $urandom % 16;
      automatic int n = 1 + $urandom % 40;
      mcs = new[n]; mls = new[n];
      foreach (mcs[k]) begin mcs[k] = $urandom; mls[k] = $urandom; end
      run_dot(b);
    end
    // worst case magnitude, 1000 terms
    mcs = new[1000]; mls = new[1000];
    foreach (mcs[k]) begin mcs[k] = 16'h8000; mls[k] = 16'h8000; end
    run_dot(16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
