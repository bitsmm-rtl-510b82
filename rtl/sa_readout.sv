// sa_readout -- output network of the systolic array: one accumulator per cycle.
//
// A one-cycle read enable (rd_en_i) moves through the array along a snake
// path, which zig-zags over the anti-diagonals of the grid (see bitsmm_pkg).
// It is passed from MAC to MAC along the path, through a flip-flop wherever
// the path moves on to the next anti-diagonal (ROWS+COLS-2 flip-flops), so it
// reaches every MAC of anti-diagonal d = r + c in cycle d after rd_en_i.
// The data travel the same path in the opposite direction, towards MAC (0,0)
// and the output register. Each
// MAC on the path except the last has a 2-input multiplexer that forwards the
// MAC's accumulator while its enable is high and otherwise passes on what
// arrives from further along the path. Between two MACs of the same
// anti-diagonal, which are enabled in the same cycle, sits a pipeline
// register; between diagonals the link is combinational. That makes
// (ROWS-1)(COLS-1) internal registers plus the output register and
// ROWS*COLS-1 multiplexers.
//
// rd_en_i must be a single-cycle pulse (asserted below), and the next pulse
// must wait until the previous drain is complete (ROWS*COLS cycles), or the
// two drains overwrite each other on the chain.
//
// Timing: if rd_en_i is high in cycle t, result_o holds the accumulator of the
// p-th MAC of the path in cycle t+1+p, p = 0 .. ROWS*COLS-1.
//
// The path shape, the register and multiplexer counts and the one-value-per-
// cycle behaviour follow the published network; placing the registers between
// MACs of the same diagonal and the diagonal-wise enable timing are how this
// design meets those counts.
module sa_readout
  import bitsmm_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 64,
  parameter int unsigned ACC_W = ACC_W_DEF
) (
  input  logic             clk,
  input  logic             rst_i,
  input  logic             rd_en_i,
  input  logic [ACC_W-1:0] acc_i [ROWS][COLS],
  output logic [ACC_W-1:0] result_o
);

  localparam int unsigned N     = ROWS * COLS;

  // Read enable, walking the path from position 0 onwards: it is registered
  // where the path steps to the next anti-diagonal and passed on directly
  // between MACs of the same diagonal. The last MAC, which has no
  // multiplexer, needs no enable.
  for (genvar p = 0; p < N - 1; p++) begin : g_en
    logic en;
    if (p == 0) begin : g_first
      assign en = rd_en_i;
    end else if (zz_row(ROWS, COLS, p) + zz_col(ROWS, COLS, p) ==
                 zz_row(ROWS, COLS, p - 1) + zz_col(ROWS, COLS, p - 1)) begin : g_same
      assign en = g_en[p-1].en;
    end else begin : g_next
      always_ff @(posedge clk) begin
        if (rst_i) en <= 1'b0;
        else       en <= g_en[p-1].en;
      end
    end
  end

  // One generate block per path position p. node is the value leaving
  // position p towards the output, link_in the value arriving from p+1
  // (through a pipeline register when p and p+1 share an anti-diagonal).
  for (genvar p = N - 1; p >= 0; p--) begin : g_path
    localparam int unsigned R = zz_row(ROWS, COLS, p);
    localparam int unsigned C = zz_col(ROWS, COLS, p);
    localparam int unsigned D = R + C;
    logic [ACC_W-1:0] node;

    if (p == N - 1) begin : g_last
      assign node = acc_i[R][C];      // end of the path: no multiplexer
    end else begin : g_mux
      localparam int unsigned DN = zz_row(ROWS, COLS, p + 1) + zz_col(ROWS, COLS, p + 1);
      logic [ACC_W-1:0] link_in;
      if (DN == D) begin : g_reg
        always_ff @(posedge clk) begin
          if (rst_i) link_in <= '0;
          else       link_in <= g_path[p+1].node;
        end
      end else begin : g_wire
        assign link_in = g_path[p+1].node;
      end
      assign node = g_en[p].en ? acc_i[R][C] : link_in;
    end
  end

  // a read enable is a one-cycle pulse
  a_rd_en_pulse: assert property (@(posedge clk) disable iff (rst_i) rd_en_i |=> !rd_en_i)
    else $error("rd_en_i held for more than one cycle");

  always_ff @(posedge clk) begin
    if (rst_i) result_o <= '0;
    else       result_o <= g_path[0].node;
  end

endmodule
