// tb_sa_readout -- self-checking testbench for the readout network.
//
// A 3 x 3 network is checked against the path of the published figure,
// (0,0) (0,1) (1,0) (2,0) (1,1) (0,2) (1,2) (2,1) (2,2), written out here by
// hand; a 4 x 6 network is checked against a path built by walking the
// anti-diagonals. Each MAC input carries a distinct random value; after a
// one-cycle read enable in cycle t, result_o must carry the p-th value of the
// path in cycle t+1+p, for every p. Repeated with new values and with a
// second enable right after a full drain.
module tb_sa_readout;
  import bitsmm_pkg::*;

  localparam int unsigned AW = ACC_W_DEF;

  logic          clk = 1'b0;
  logic          rst_i, rd_a, rd_b;
  logic [AW-1:0] acc_a [3][3];
  logic [AW-1:0] acc_b [4][6];
  logic [AW-1:0] res_a, res_b;
  int            checks = 0, failures = 0;
  int            pa_r[9] = '{0, 0, 1, 2, 1, 0, 1, 2, 2};
  int            pa_c[9] = '{0, 1, 0, 0, 1, 2, 2, 1, 2};
  int            pb_r[24], pb_c[24];

  always #5 clk = ~clk;

  sa_readout #(.ROWS(3), .COLS(3), .ACC_W(AW)) dut_a (
    .clk, .rst_i, .rd_en_i(rd_a), .acc_i(acc_a), .result_o(res_a));
  sa_readout #(.ROWS(4), .COLS(6), .ACC_W(AW)) dut_b (
    .clk, .rst_i, .rd_en_i(rd_b), .acc_i(acc_b), .result_o(res_b));

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p;
    p = 0;
    for (int d = 0; d <= 8; d++)
      for (int i = 0; i < 4; i++) begin
        automatic int r = (d % 2 == 1) ? i : 3 - i;
        if (d - r >= 0 && d - r < 6) begin pb_r[p] = r; pb_c[p] = d - r; p++; end
      end

    rst_i = 1'b1; rd_a = 1'b0; rd_b = 1'b0;
    foreach (acc_a[r, c]) acc_a[r][c] = '0;
    foreach (acc_b[r, c]) acc_b[r][c] = '0;
    @(negedge clk);
    rst_i = 1'b0;
    for (int it = 0; it < 20; it++) begin
      foreach (acc_a[r, c]) acc_a[r][c] = {AW'($urandom), 8'(r * 3 + c)};
      foreach (acc_b[r, c]) acc_b[r][c] = {AW'($urandom), 8'(r * 6 + c)};
      if (it % 2 == 0) repeat ($urandom % 3) @(negedge clk);
      rd_a = 1'b1; rd_b = 1'b1;
      @(negedge clk);
      rd_a = 1'b0; rd_b = 1'b0;
      for (int q = 0; q < 24; q++) begin
        if (q < 9) begin
          checks++;
          if (res_a !== acc_a[pa_r[q]][pa_c[q]]) begin
            failures++;
            if (failures < 10) $display("FAIL 3x3 p=%0d", q);
          end
        end
        checks++;
        if (res_b !== acc_b[pb_r[q]][pb_c[q]]) begin
          failures++;
          if (failures < 10) $display("FAIL 4x6 p=%0d (%0d,%0d)", q, pb_r[q], pb_c[q]);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
