// tb_bitSerialSA_full -- full-size run of the bit-serial systolic array.
//
// The array is instantiated with its default parameters: 16 rows x 64
// columns of Booth MACs, 16-bit maximum width. Two complete matrix products
// are run, X (16 x n) times Y (n x 64): one at the full 16-bit width with
// n = 4 and one at 5 bits with n = 3. All 1024 accumulators of each are read
// back through the readout network, one per cycle, in zig-zag order, and
// compared with products computed here. The read enable is pulsed in cycle
// (n+1)*b + 1 and the last value appears 1024 cycles later, so the values
// being correct at those cycles checks the latency as well.
module tb_bitSerialSA_full;
  import bitsmm_pkg::*;

  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 64;

  int checks = 0, failures = 0;
  int n_negative = 0, n_readout = 0;

  localparam int unsigned W  = MAX_W;
  localparam int unsigned AW = ACC_W_DEF;

  logic            clk = 1'b0;
  logic            rst_i;
  logic [BW_W-1:0] bw_i;
  logic [W-1:0]    v_data_i  [COLS];
  logic            v_valid_i [COLS];
  logic [W-1:0]    h_data_i  [ROWS];
  logic            h_valid_i [ROWS];
  logic            rd_en_i;
  logic [AW-1:0]   result_o;

  always #5 clk = ~clk;

  bitSerialSA dut (.*);

  longint X [ROWS][];
  longint Y [][COLS];
  longint Cx[ROWS][COLS];
  int     path_r[ROWS*COLS], path_c[ROWS*COLS];

  function automatic longint sext(longint v, int b);
    v = v & ((longint'(1) << b) - 1);
    return v[b-1] ? v - (longint'(1) << b) : v;
  endfunction

  // zig-zag path: walk the anti-diagonals, alternating direction
  task automatic build_path();
    int p = 0;
    for (int d = 0; d <= ROWS + COLS - 2; d++) begin
      if (d % 2 == 1) begin
        for (int r = 0; r < ROWS; r++)
          if (d - r >= 0 && d - r < COLS) begin path_r[p] = r; path_c[p] = d - r; p++; end
      end else begin
        for (int r = ROWS - 1; r >= 0; r--)
          if (d - r >= 0 && d - r < COLS) begin path_r[p] = r; path_c[p] = d - r; p++; end
      end
    end
  endtask

  task automatic run_test(int b, int n, int ar, int ac);
    int t_re, t_end;
    longint got;
    for (int r = 0; r < ROWS; r++) begin
      X[r] = new[n];
      for (int k = 0; k < n; k++) X[r][k] = (r < ar) ? sext($urandom, b) : 0;
    end
    Y = new[n];
    for (int k = 0; k < n; k++)
      for (int c = 0; c < COLS; c++) Y[k][c] = (c < ac) ? sext($urandom, b) : 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        Cx[r][c] = 0;
        for (int k = 0; k < n; k++) Cx[r][c] += X[r][k] * Y[k][c];
      end

    @(negedge clk);
    rst_i = 1'b1; rd_en_i = 1'b0; bw_i = BW_W'(b);
    foreach (v_valid_i[c]) begin v_valid_i[c] = 1'b0; v_data_i[c] = '0; end
    foreach (h_valid_i[r]) begin h_valid_i[r] = 1'b0; h_data_i[r] = '0; end
    @(negedge clk);
    rst_i = 1'b0;

    t_re  = (n + 1) * b + 1;
    t_end = t_re + ROWS * COLS;
    for (int t = 0; t <= t_end; t++) begin
      for (int c = 0; c < COLS; c++) begin
        automatic int k = (t - c) / b;
        v_valid_i[c] = (c < ac) && (t >= c) && ((t - c) % b == 0) && (k <= n + 1);
        v_data_i[c]  = (v_valid_i[c] && k < n) ? W'(Y[k][c]) : '0;
      end
      for (int r = 0; r < ROWS; r++) begin
        automatic int k = (t - b - r) / b;
        h_valid_i[r] = (r < ar) && (t >= b + r) && ((t - b - r) % b == 0) && (k < n);
        h_data_i[r]  = h_valid_i[r] ? W'(X[r][k]) : '0;
      end
      rd_en_i = (t == t_re);
      if (t > t_re) begin
        automatic int p = t - t_re - 1;
        got = longint'($signed(result_o));
        checks++;
        if (got != Cx[path_r[p]][path_c[p]]) begin
          failures++;
          if (failures < 10)
            $display("FAIL %m b=%0d n=%0d MAC(%0d,%0d) got %0d exp %0d", b, n,
                     path_r[p], path_c[p], got, Cx[path_r[p]][path_c[p]]);
        end
        if (got < 0) n_negative++;
        if (p == ROWS * COLS - 1) n_readout++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_i = 1'b1; rd_en_i = 1'b0; bw_i = BW_W'(MAX_W);
    foreach (v_valid_i[c]) begin v_valid_i[c] = 1'b0; v_data_i[c] = '0; end
    foreach (h_valid_i[r]) begin h_valid_i[r] = 1'b0; h_data_i[r] = '0; end
    build_path();
    run_test(16, 4, ROWS, COLS);
    run_test(5, 3, ROWS, COLS);
    checks += 2;
    if (n_readout != 2) failures++;
    if (n_negative == 0) failures++;
    $display("readouts=%0d negative results=%0d", n_readout, n_negative);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
