// tb_squire_workers: end-to-end runs of the Squire top at the other worker
// counts the paper evaluates, 4, 8 and 32 (16, the default, is tb_squire).
//
// Three squire_run instances work side by side, each with its own top, worker
// models, L2 model, clock and host program. The bench waits until all three
// report done, adds up their checks and failures and prints the result line.
// The 4-worker size is the one drawn in the paper's block diagram; 32 gives
// the widest arbiter (64 requesters) and the longest token ring.
module tb_squire_workers;

  logic done4, done8, done32;
  int   chk4, chk8, chk32, fail4, fail8, fail32;

  squire_run #(.NW(4))  u_w4  (.done(done4),  .checks(chk4),  .failures(fail4));
  squire_run #(.NW(8))  u_w8  (.done(done8),  .checks(chk8),  .failures(fail8));
  squire_run #(.NW(32)) u_w32 (.done(done32), .checks(chk32), .failures(fail32));

  int checks, failures;

  initial begin
    #5ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk4 + chk8 + chk32, fail4 + fail8 + fail32 + 1);
    $finish;
  end

  initial begin
    wait (done4 && done8 && done32);
    checks   = chk4 + chk8 + chk32 + 1;
    failures = fail4 + fail8 + fail32;
    // each run must have done real work
    if (chk4 < 100 || chk8 < 100 || chk32 < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
