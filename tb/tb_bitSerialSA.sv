// tb_bitSerialSA -- end-to-end testbench of the bit-serial systolic array.
//
// Runs random matrix products through a 4 x 6 array of Booth MACs and a
// 3 x 5 array of SBMwC MACs (see sa_harness for what each test does), over
// every run-time width 1..16, with inner dimensions 1..12 and with sub-blocks
// of the array. It counts a failure for any mechanism that was never
// exercised: run-time width switching, partial-array use, full readout and
// negative results.
module tb_bitSerialSA;

  logic done_b, done_s;
  int   chk_b, chk_s, fail_b, fail_s;
  int   ws_b, ws_s, sub_b, sub_s, ro_b, ro_s, neg_b, neg_s;
  int   checks, failures;

  sa_harness #(.ROWS(4), .COLS(6), .VARIANT(bitsmm_pkg::MAC_BOOTH), .TESTS(40)) h_booth (
    .done(done_b), .checks(chk_b), .failures(fail_b), .n_width_switch(ws_b),
    .n_submatrix(sub_b), .n_readout(ro_b), .n_negative(neg_b)
  );
  sa_harness #(.ROWS(3), .COLS(5), .VARIANT(bitsmm_pkg::MAC_SBMWC), .TESTS(40)) h_sbmwc (
    .done(done_s), .checks(chk_s), .failures(fail_s), .n_width_switch(ws_s),
    .n_submatrix(sub_s), .n_readout(ro_s), .n_negative(neg_s)
  );

  initial begin
    #100_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk_b + chk_s, fail_b + fail_s + 1);
    $finish;
  end

  initial begin
    #1;
    wait (done_b === 1'b1 && done_s === 1'b1);
    checks   = chk_b + chk_s + 8;
    failures = fail_b + fail_s;
    $display("booth: width switches=%0d partial=%0d readouts=%0d negative=%0d",
             ws_b, sub_b, ro_b, neg_b);
    $display("sbmwc: width switches=%0d partial=%0d readouts=%0d negative=%0d",
             ws_s, sub_s, ro_s, neg_s);
    if (ws_b  == 0) failures++;
    if (ws_s  == 0) failures++;
    if (sub_b == 0) failures++;
    if (sub_s == 0) failures++;
    if (ro_b  != 40) failures++;
    if (ro_s  != 40) failures++;
    if (neg_b == 0) failures++;
    if (neg_s == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
