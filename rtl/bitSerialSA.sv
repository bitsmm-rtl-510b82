// bitSerialSA -- bit-serial systolic array for matrix multiplication (top).
//
// A ROWS x COLS grid of bit-serial MACs computes C = X * Y, MAC (r,c) forming
// C[r][c] = sum_k X[r][k] * Y[k][c]. Column c receives Y[.][c] (multiplicands)
// through a vertical parallel-to-serial converter that sends MSb first; row r
// receives X[r][.] (multipliers) through a horizontal converter that sends
// LSb first. Serial bits move down the columns and along the rows through one
// pipeline register per MAC hop, so MAC (r,c) sees column data r cycles and
// row data c cycles late. The value toggle made by each vertical converter
// travels down its column in a control register beside the data bit.
// After the computation a one-cycle read enable drains the accumulators, one
// per cycle, through the readout network (sa_readout).
//
// Operating sequence (b = bw_i, n = inner dimension, cycle 0 = first load):
//   * vertical converter c: load Y[k][c] in cycle c + k*b for k = 0..n-1,
//     then zero in cycles c + n*b (flush) and c + (n+1)*b (close);
//   * horizontal converter r: load X[r][k] in cycle b + r + k*b, k = 0..n-1;
//   * rd_en_i high for one cycle in cycle (n+1)*b + 1 or later; result_o then
//     gives the MAC at readout-path position p one cycle after enable plus p.
// The skew of the inputs matches the skew of the array, and the diagonal
// timing of the read enable matches both, so no extra drain time is needed:
// a whole product takes about (n+1)*b + ROWS*COLS cycles.
// rst_i (synchronous, active high) clears every register, including the
// accumulators; it is applied before each new matrix product.
//
// Follows the published array: converters on both edges with the stated bit
// orders, pipeline registers between MACs, per-row and per-column valid
// signals, a run-time operand width, a global reset, a read enable and a single
// result output. MAC_VARIANT selects the Booth MAC (default, as in the
// published implementations) or the SBMwC MAC. Toggle generation in the
// converters, the flush/close loads and the exact input schedule are this
// design's choices.
module bitSerialSA
  import bitsmm_pkg::*;
#(
  parameter int unsigned  ROWS        = 16,
  parameter int unsigned  COLS        = 64,
  parameter int unsigned  W           = MAX_W,
  parameter int unsigned  ACC_W       = ACC_W_DEF,
  parameter mac_variant_e MAC_VARIANT = MAC_BOOTH
) (
  input  logic             clk,
  input  logic             rst_i,
  input  logic [BW_W-1:0]  bw_i,                 // run-time operand width, 1..W
  input  logic [W-1:0]     v_data_i  [COLS],     // multiplicands, one per column
  input  logic             v_valid_i [COLS],
  input  logic [W-1:0]     h_data_i  [ROWS],     // multipliers, one per row
  input  logic             h_valid_i [ROWS],
  input  logic             rd_en_i,              // read_output_enable
  output logic [ACC_W-1:0] result_o
);

  // serial bits and toggles as seen at each MAC
  logic             mc_bit [ROWS][COLS];
  logic             vt_bit [ROWS][COLS];
  logic             ml_bit [ROWS][COLS];
  logic [ACC_W-1:0] acc    [ROWS][COLS];

  // vertical converters and column pipelines
  for (genvar c = 0; c < COLS; c++) begin : g_col
    p2s #(.W(W), .MSB_FIRST(1'b1)) u_p2s_v (
      .clk, .rst_i, .valid_i(v_valid_i[c]), .data_i(v_data_i[c]), .bw_i,
      .bit_o(mc_bit[0][c]), .tog_o(vt_bit[0][c])
    );
    for (genvar r = 1; r < ROWS; r++) begin : g_vpipe
      always_ff @(posedge clk) begin
        if (rst_i) begin
          mc_bit[r][c] <= 1'b0;
          vt_bit[r][c] <= 1'b0;
        end else begin
          mc_bit[r][c] <= mc_bit[r-1][c];
          vt_bit[r][c] <= vt_bit[r-1][c];
        end
      end
    end
  end

  // horizontal converters and row pipelines
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic unused_tog;
    p2s #(.W(W), .MSB_FIRST(1'b0)) u_p2s_h (
      .clk, .rst_i, .valid_i(h_valid_i[r]), .data_i(h_data_i[r]), .bw_i,
      .bit_o(ml_bit[r][0]), .tog_o(unused_tog)
    );
    for (genvar c = 1; c < COLS; c++) begin : g_hpipe
      always_ff @(posedge clk) begin
        if (rst_i) ml_bit[r][c] <= 1'b0;
        else       ml_bit[r][c] <= ml_bit[r][c-1];
      end
    end
  end

  // MAC grid
  for (genvar r = 0; r < ROWS; r++) begin : g_mr
    for (genvar c = 0; c < COLS; c++) begin : g_mc
      if (MAC_VARIANT == MAC_BOOTH) begin : g_booth
        bitSerialMAC_booth #(.W(W), .ACC_W(ACC_W)) u_mac (
          .clk, .rst_i, .v_t_i(vt_bit[r][c]), .mc_i(mc_bit[r][c]),
          .ml_i(ml_bit[r][c]), .result_o(acc[r][c])
        );
      end else begin : g_sbmwc
        bitSerialMAC_sbmwc #(.W(W), .ACC_W(ACC_W)) u_mac (
          .clk, .rst_i, .v_t_i(vt_bit[r][c]), .mc_i(mc_bit[r][c]),
          .ml_i(ml_bit[r][c]), .result_o(acc[r][c])
        );
      end
    end
  end

  sa_readout #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_readout (
    .clk, .rst_i, .rd_en_i, .acc_i(acc), .result_o
  );

endmodule
