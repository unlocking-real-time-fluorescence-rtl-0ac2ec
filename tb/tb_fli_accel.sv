// tb_fli_accel -- end-to-end test of the accelerator at reduced sizes.
//
// Two configurations run side by side: a single-layer network (the
// Seq2SeqLite structure) and a two-layer network (the Seq2Seq structure),
// each with several lanes and two pixel groups. See fli_e2e_run for what is
// checked. Watchdog: 2,000,000 ns.
module tb_fli_accel;
  logic d1, d2;
  int c1, c2, f1, f2;

  fli_e2e_run #(.LANES(4), .GROUPS(2), .H(8), .LAYERS(1), .T(12), .SEED(11)) u_lite (
    .done(d1), .checks(c1), .failures(f1));
  fli_e2e_run #(.LANES(3), .GROUPS(2), .H(6), .LAYERS(2), .T(8), .SEED(23)) u_deep (
    .done(d2), .checks(c2), .failures(f2));

  initial begin
    #1 wait (d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
    $finish;
  end

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2 + 1, f1 + f2 + 1);
    $finish;
  end
endmodule
