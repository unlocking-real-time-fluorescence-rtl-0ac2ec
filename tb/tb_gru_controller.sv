// tb_gru_controller -- cycle-by-cycle check of the static schedule.
//
// H = 4, LAYERS = 2, T = 3, GROUPS = 2. After start the controller must issue
// LAYERS*GROUPS*H clear commands, then exactly the command and weight-address
// stream of fli_ref_pkg::gen_schedule (one per cycle, no bubbles), then idle
// commands while it drains, pulse pp_start once, wait for pp_done (driven
// here 7 cycles later) and pulse done. busy and phase are checked along the
// way. The run is done twice to check that the controller restarts cleanly.
module tb_gru_controller;
  import fli_pkg::*;
  import fli_ref_pkg::*;
  localparam int H = 4, L = 2, T = 3, G = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, pp_start, pp_done = 0;
  lane_cmd_t cmd;
  logic [CMEM_AW-1:0] cmem_raddr;
  logic [1:0] phase;
  logic [7:0] grp;
  int checks = 0, failures = 0;
  lane_cmd_t eq[$];
  int ea[$];

  gru_controller #(.H(H), .LAYERS(L), .T(T), .GROUPS(G)) dut (
    .clk, .rst_n, .start, .busy, .done, .cmd, .cmem_raddr, .pp_start, .pp_done,
    .phase_o(phase), .grp_o(grp));

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic run();
    int n;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    chk(busy, "busy after start");
    for (int i = 0; i < L * G * H; i++) begin
      chk(cmd.op == OP_CLR && cmd.sh_addr == ADDR_W'(i) && phase == 2'd0,
          $sformatf("clear %0d: op %0d addr %0d", i, cmd.op, cmd.sh_addr));
      @(negedge clk);
    end
    foreach (eq[i]) begin
      chk(cmd == eq[i] && cmem_raddr == CMEM_AW'(ea[i]),
          $sformatf("cycle %0d: op %0d src %0d sh %0d dm %0d pb %0d a %0d, expected op %0d src %0d sh %0d dm %0d pb %0d a %0d",
                    i, cmd.op, cmd.src, cmd.sh_addr, cmd.dm_addr, cmd.pb_addr, cmem_raddr,
                    eq[i].op, eq[i].src, eq[i].sh_addr, eq[i].dm_addr, eq[i].pb_addr, ea[i]));
      chk(phase == ((i < T * G * 3 * H * ((2 + 1 + H) + (L - 1) * (2 + 2 * H))) ? 2'd1 : 2'd2),
          $sformatf("phase %0d at cycle %0d", phase, i));
      @(negedge clk);
    end
    n = 0;
    while (!pp_start && n < 10) begin
      chk(cmd.op == OP_NOP && phase == 2'd3, "drain must issue no command");
      @(negedge clk); n++;
    end
    chk(pp_start, "pp_start pulse");
    chk(n == 3, $sformatf("pp_start %0d cycles after the last row", n));
    @(negedge clk);
    chk(!pp_start, "pp_start is one cycle");
    repeat (6) begin chk(!done && busy, "waits for pp_done"); @(negedge clk); end
    pp_done = 1; @(negedge clk); pp_done = 0;
    chk(done && !busy, "done pulse after pp_done");
    @(negedge clk);
    chk(!done, "done is one cycle");
  endtask

  initial begin
    gen_schedule(H, L, T, G, eq, ea);
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!busy && cmd.op == OP_NOP, "idle after reset");
    run();
    run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
