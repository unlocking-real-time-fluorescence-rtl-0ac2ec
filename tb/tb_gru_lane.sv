// tb_gru_lane -- one DSP lane running a complete two-layer network.
//
// H = 4, LAYERS = 2, T = 5, GROUPS = 2. Random weights and TPSFs are loaded;
// the testbench itself plays the controller: it clears the hidden state and
// feeds the command stream of fli_ref_pkg::gen_schedule one command per
// cycle, presenting each weight one cycle after its command as the constant
// memory would. Afterwards every SDF sample of both pixels is read back and
// compared with the reference model, then the lifetime unit is started and
// both lifetimes are compared. Run twice with new data.
module tb_gru_lane;
  import fli_pkg::*;
  import fli_ref_pkg::*;
  localparam int H = 4, L = 2, T = 5, G = 2, DT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  lane_cmd_t cmd = '0;
  q8_t w = '0, x_wdata = '0;
  logic x_we = 0, pp_start = 0, pp_done;
  logic [ADDR_W-1:0] x_waddr = '0, y_raddr = '0;
  y_t y_rdata;
  logic tau_grp = 0;
  logic [TAU_W-1:0] tau;
  int checks = 0, failures = 0;
  lane_cmd_t eq[$];
  int ea[$];
  byte cw[];
  byte xs[G][];

  gru_lane #(.H(H), .LAYERS(L), .T(T), .GROUPS(G), .GATE_DT(DT)) dut (
    .clk, .rst_n, .cmd, .w, .x_we, .x_waddr, .x_wdata, .y_raddr, .y_rdata,
    .pp_start, .pp_done, .tau_grp, .tau);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic run(input int r);
    int y[];
    int n;
    foreach (cw[i]) cw[i] = byte'(int'($urandom % 128) - 64);
    for (int g = 0; g < G; g++) begin
      xs[g] = new[T];
      foreach (xs[g][t]) xs[g][t] = byte'($urandom % 128);
    end
    for (int g = 0; g < G; g++)
      for (int t = 0; t < T; t++) begin
        @(negedge clk); x_we = 1; x_waddr = ADDR_W'(g * T + t); x_wdata = xs[g][t];
      end
    @(negedge clk); x_we = 0;
    for (int i = 0; i < L * G * H; i++) begin
      cmd = '0; cmd.op = OP_CLR; cmd.sh_addr = ADDR_W'(i);
      @(negedge clk);
    end
    foreach (eq[i]) begin
      cmd = eq[i];
      @(posedge clk); #1 w = cw[ea[i]];
      @(negedge clk);
    end
    cmd = '0;
    repeat (2) @(negedge clk);
    for (int g = 0; g < G; g++) begin
      run_pixel(H, L, T, cw, xs[g], y);
      for (int t = 0; t < T; t++) begin
        y_raddr = ADDR_W'(g * T + t); @(negedge clk);
        chk(int'(y_rdata) == y[t], $sformatf("run %0d group %0d gate %0d: y %0d expected %0d",
                                             r, g, t, y_rdata, y[t]));
      end
    end
    pp_start = 1; @(negedge clk); pp_start = 0;
    n = 0;
    while (!pp_done && n < 500) begin @(posedge clk); n++; end
    chk(pp_done, "lifetime unit finished");
    @(negedge clk);
    for (int g = 0; g < G; g++) begin
      run_pixel(H, L, T, cw, xs[g], y);
      tau_grp = g[0]; #1;
      chk(longint'(tau) == ref_tau(DT, y), $sformatf("run %0d group %0d tau %0d expected %0d",
                                                   r, g, tau, ref_tau(DT, y)));
    end
  endtask

  initial begin
    gen_schedule(H, L, T, G, eq, ea);
    cw = new[cmem_words(H, L)];
    repeat (2) @(negedge clk); rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
