// tb_act_unit -- checks sigmoid and tanh against the reference arithmetic.
//
// Sweeps the accumulator input over [-32768, 32768) (+-8.0) in steps of 3,
// plus random values over the full 24-bit range and the segment breakpoints,
// and compares both outputs with fli_ref_pkg. Spot checks: sigmoid(0) = 64,
// tanh(0) = 0, saturation at +-127/-128. Combinational block: no latency.
module tb_act_unit;
  import fli_pkg::*;
  import fli_ref_pkg::*;
  acc_t x;
  q8_t  s, th;
  int checks = 0, failures = 0;
  int edges[11] = '{-20480, -9728, -4096, 4095, 4096, 9727, 9728, 20479, 20480, -8388608, 8388607};

  act_unit dut (.x, .sig_o(s), .tanh_o(th));

  task automatic try(input int v);
    x = acc_t'(v);
    #1;
    checks += 2;
    if (int'(s) != ref_sig(longint'(x)) || int'(th) != ref_tanh(longint'(x))) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d sig=%0d/%0d tanh=%0d/%0d", x, s, ref_sig(longint'(x)),
                                  th, ref_tanh(longint'(x)));
    end
  endtask

  task automatic expect_eq(input int v, input int es, input int et);
    try(v);
    checks++;
    if (int'(s) != es || int'(th) != et) begin
      failures++;
      $display("FAIL spot x=%0d sig=%0d (exp %0d) tanh=%0d (exp %0d)", v, s, es, th, et);
    end
  endtask

  initial begin
    for (int v = -32768; v < 32768; v += 3) try(v);
    foreach (edges[i]) try(edges[i]);
    repeat (2000) try(int'($urandom) >>> 8);
    expect_eq(0, 64, 0);
    expect_eq(1000000, 127, 127);
    expect_eq(-1000000, 0, -128);
    expect_eq(4096, 96, 96);      // PLAN: sigmoid(1) = 0.75, tanh(1) = 2 sigmoid(2) - 1 = 0.75
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
