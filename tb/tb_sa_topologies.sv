// tb_sa_topologies -- runs the array at the paper's smaller configurations.
//
// Random matrix products (see sa_harness) on a 4-row x 16-column array of
// Booth MACs, the same size with SBMwC MACs, and an 8-row x 32-column Booth
// array, covering every run-time width 1..16. The 16 x 64 configuration is
// run by tb_bitSerialSA_full.
module tb_sa_topologies;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;
  int   w0, w1, w2, s0, s1, s2, r0, r1, r2, n0, n1, n2;
  int   checks, failures;

  sa_harness #(.ROWS(4), .COLS(16), .VARIANT(bitsmm_pkg::MAC_BOOTH), .TESTS(20)) h_16x4 (
    .done(d0), .checks(c0), .failures(f0), .n_width_switch(w0), .n_submatrix(s0),
    .n_readout(r0), .n_negative(n0));
  sa_harness #(.ROWS(4), .COLS(16), .VARIANT(bitsmm_pkg::MAC_SBMWC), .TESTS(20)) h_16x4s (
    .done(d1), .checks(c1), .failures(f1), .n_width_switch(w1), .n_submatrix(s1),
    .n_readout(r1), .n_negative(n1));
  sa_harness #(.ROWS(8), .COLS(32), .VARIANT(bitsmm_pkg::MAC_BOOTH), .TESTS(17)) h_32x8 (
    .done(d2), .checks(c2), .failures(f2), .n_width_switch(w2), .n_submatrix(s2),
    .n_readout(r2), .n_negative(n2));

  initial begin
    #100_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (d0 === 1'b1 && d1 === 1'b1 && d2 === 1'b1);
    checks   = c0 + c1 + c2 + 3;
    failures = f0 + f1 + f2;
    $display("readouts: 16x4=%0d 16x4 sbmwc=%0d 32x8=%0d", r0, r1, r2);
    if (r0 != 20) failures++;
    if (r1 != 20) failures++;
    if (r2 != 17) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
