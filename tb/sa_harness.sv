// sa_harness -- reusable driver and checker for bitSerialSA (testbench only).
//
// Instantiates one array of the given size and MAC variant and runs TESTS
// random matrix products C = X * Y through it: each test resets the array,
// picks a run-time width b and inner dimension n, optionally uses only a
// sub-block of the array (the unused rows/columns are never loaded and must
// read back zero), drives the converters with the input schedule documented
// in bitSerialSA, pulses the read enable in cycle (n+1)*b + 1 and checks that
// output cycle p carries C at the p-th position of the zig-zag readout path,
// one value per cycle, so a whole product takes (n+1)*b + 1 + ROWS*COLS
// cycles. The path is recomputed here independently of the RTL package.
// Counts of the exercised mechanisms are reported for the caller.
module sa_harness
  import bitsmm_pkg::*;
#(
  parameter int unsigned  ROWS    = 3,
  parameter int unsigned  COLS    = 4,
  parameter mac_variant_e VARIANT = MAC_BOOTH,
  parameter int unsigned  TESTS   = 20
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_width_switch,   // tests whose width differs from the previous one
  output int   n_submatrix,      // tests using only part of the array
  output int   n_readout,        // complete readouts of all ROWS*COLS MACs
  output int   n_negative        // negative results read back
);

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

  bitSerialSA #(.ROWS(ROWS), .COLS(COLS), .W(W), .ACC_W(AW), .MAC_VARIANT(VARIANT)) dut (.*);

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
    int prev_b = 0;
    done = 1'b0; checks = 0; failures = 0;
    n_width_switch = 0; n_submatrix = 0; n_readout = 0; n_negative = 0;
    rst_i = 1'b1; rd_en_i = 1'b0; bw_i = BW_W'(MAX_W);
    foreach (v_valid_i[c]) begin v_valid_i[c] = 1'b0; v_data_i[c] = '0; end
    foreach (h_valid_i[r]) begin h_valid_i[r] = 1'b0; h_data_i[r] = '0; end
    build_path();
    for (int i = 0; i < TESTS; i++) begin
      automatic int b  = (i < 16) ? i + 1 : 1 + $urandom % 16;
      automatic int n  = (i % 5 == 0) ? 1 : 1 + $urandom % 12;
      automatic int ar = (i % 4 == 3) ? 1 + $urandom % ROWS : ROWS;
      automatic int ac = (i % 4 == 3) ? 1 + $urandom % COLS : COLS;
      if (b != prev_b && i > 0) n_width_switch++;
      if (ar < ROWS || ac < COLS) n_submatrix++;
      prev_b = b;
      run_test(b, n, ar, ac);
    end
    done = 1'b1;
  end

endmodule
