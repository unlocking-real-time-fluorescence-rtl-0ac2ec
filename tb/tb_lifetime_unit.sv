// tb_lifetime_unit -- trapezoidal lifetime of several pixel groups.
//
// GROUPS = 3, GATE_DT = 40. Pushes interleaved SDF sequences (70 samples per
// group, as the decoder does: gate outer, group inner): a mono-exponential
// decay, a random decaying sequence and an all-negative one (S_max <= 0,
// expected lifetime 0). A second pass restarts the groups with new data via
// 'first'. A third pass makes every group non-positive. Each lifetime is
// compared with fli_ref_pkg::ref_tau; done must arrive within GROUPS * 52
// cycles of start, and after the same number of cycles in every pass (the
// latency may not depend on the data, because all lanes must finish together).
module tb_lifetime_unit;
  import fli_pkg::*;
  import fli_ref_pkg::*;
  localparam int G = 3, T = 70, DT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, first = 0, start = 0, busy, done;
  logic [7:0] grp = '0;
  y_t y = '0;
  logic [1:0] rd_grp = '0;
  logic [TAU_W-1:0] tau;
  int checks = 0, failures = 0;
  int seq [G][];
  int lat0 = -1;

  lifetime_unit #(.GROUPS(G), .GATE_DT(DT)) dut (
    .clk, .rst_n, .push, .grp, .first, .y, .start, .busy, .done, .rd_grp, .tau_o(tau));

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic pass(input int variant);
    int n;
    for (int g = 0; g < G; g++) begin
      seq[g] = new[T];
      for (int t = 0; t < T; t++) begin
        case (g)
          0: seq[g][t] = (variant == 2) ? -t : int'(8000.0 * $exp(-real'(t) / (variant ? 7.0 : 12.0)));
          1: seq[g][t] = (variant == 2) ? -5 : (t < 3) ? 1000 * t : 6000 / (t - 1) + int'($urandom % 200) - 100;
          default: seq[g][t] = -100 - t;
        endcase
      end
    end
    for (int t = 0; t < T; t++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk); push = 1; grp = 8'(g); first = (t == 0); y = y_t'(seq[g][t]);
      end
    @(negedge clk); push = 0; start = 1;
    @(negedge clk); start = 0;
    n = 0;
    while (!done) begin @(posedge clk); n++; end
    chk(n <= G * 52, $sformatf("post-processing took %0d cycles", n));
    if (lat0 < 0) lat0 = n;
    chk(n == lat0, $sformatf("latency %0d differs from first pass %0d", n, lat0));
    @(negedge clk);
    for (int g = 0; g < G; g++) begin
      rd_grp = 2'(g); #1;
      chk(longint'(tau) == ref_tau(DT, seq[g]),
          $sformatf("group %0d tau %0d expected %0d", g, tau, ref_tau(DT, seq[g])));
    end
    chk(tau == 0, "S_max <= 0 must give zero lifetime");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    pass(0);
    pass(1);
    pass(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
