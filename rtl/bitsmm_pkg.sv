// bitsmm_pkg -- constants, types and elaboration-time helpers shared by the
// bit-serial matrix multiplication array.
//
// MAX_W is the largest operand width the hardware is built for (16 bits, as
// in the published implementations); the width actually used is chosen at run
// time, from 1 to MAX_W. ACC_W_DEF, the default accumulator and result width, is this
// design's own choice: 2*MAX_W bits hold one full-width signed product and
// 10 guard bits hold dot products of up to 1024 terms without overflow.
//
// The readout path visits the MACs in zig-zag order over the anti-diagonals
// (r + c = d) of the grid: odd diagonals are walked with the row index rising,
// even diagonals with it falling, starting at MAC (0,0) and ending at MAC
// (ROWS-1, COLS-1). zz_row()/zz_col() return the grid position of the p-th
// MAC on that path; the array and its testbenches both use them.
package bitsmm_pkg;

  localparam int unsigned MAX_W = 16;            // compile-time operand width limit
  localparam int unsigned BW_W  = $clog2(MAX_W + 1); // width of the run-time width field
  localparam int unsigned ACC_W_DEF = 2 * MAX_W + 10; // default accumulator / result width

  // The two MAC architectures; Booth is the default one.
  typedef enum logic {
    MAC_BOOTH = 1'b0,
    MAC_SBMWC = 1'b1
  } mac_variant_e;

  // Anti-diagonal index of grid position (r, c).
  function automatic int unsigned zz_diag(int unsigned r, int unsigned c);
    return r + c;
  endfunction

  // Row of the p-th MAC on the zig-zag readout path of a rows x cols grid.
  function automatic int unsigned zz_row(int unsigned rows, int unsigned cols, int unsigned p);
    int unsigned n;
    int unsigned rmin, rmax;
    n = 0;
    for (int unsigned d = 0; d < rows + cols - 1; d++) begin
      rmin = (d + 1 > cols) ? d + 1 - cols : 0;
      rmax = (d < rows - 1) ? d : rows - 1;
      if (p < n + (rmax - rmin + 1)) begin
        if (d % 2 == 1) return rmin + (p - n);
        else            return rmax - (p - n);
      end
      n += rmax - rmin + 1;
    end
    return 0;
  endfunction

  // Column of the p-th MAC on the zig-zag readout path.
  function automatic int unsigned zz_col(int unsigned rows, int unsigned cols, int unsigned p);
    int unsigned n;
    int unsigned rmin, rmax;
    n = 0;
    for (int unsigned d = 0; d < rows + cols - 1; d++) begin
      rmin = (d + 1 > cols) ? d + 1 - cols : 0;
      rmax = (d < rows - 1) ? d : rows - 1;
      if (p < n + (rmax - rmin + 1)) begin
        if (d % 2 == 1) return d - (rmin + (p - n));
        else            return d - (rmax - (p - n));
      end
      n += rmax - rmin + 1;
    end
    return 0;
  endfunction

endpackage
