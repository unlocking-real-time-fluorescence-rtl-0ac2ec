// tb_fli_accel_seq2seq -- the full-size Seq2Seq network on a few lanes.
//
// Runs the deep model of the paper at its real network size: two GRU layers
// of 128 units in encoder and decoder, 70 time gates, 297,345 weight words.
// The paper runs it with 64 parallel pixels; to keep the simulation short this
// uses 8 lanes and one pixel group, which changes only how many pixels share
// the weight stream, not the schedule of one pixel (about 20.9 M cycles).
// Every SDF sample and lifetime is compared with the reference model and the
// schedule length with the cycle formula (see fli_e2e_run).
module tb_fli_accel_seq2seq;
  logic d;
  int c, f;

  fli_e2e_run #(.LANES(8), .GROUPS(1), .H(128), .LAYERS(2), .T(70), .WMAG(12), .SEED(5), .RUNS(1)) u_run (
    .done(d), .checks(c), .failures(f));

  initial begin
    #1 wait (d);
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    #400000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c + 1, f + 1);
    $finish;
  end
endmodule
