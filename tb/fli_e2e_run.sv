// fli_e2e_run -- end-to-end run of the accelerator at a chosen size.
//
// Loads random 8-bit weights and decaying random TPSFs for every pixel, runs
// the array RUNS times (a second run with new inputs checks that the hidden
// state is cleared between runs), and compares every SDF sample and every
// lifetime with the software reference in fli_ref_pkg. It also checks when
// the encoder/decoder schedule ends against the cycle formula and counts how
// often each mechanism of the design happened (state clear, encoder steps,
// encoder-to-decoder hand-off, decoder steps, pixel-group switches,
// post-processing, saturated and linear activations); one that never
// happened counts as a failure. The number of sigmoid and tanh gate vectors
// per pixel is checked against 4*LAYERS*T and 2*LAYERS*T. Reports through
// done / checks / failures.
module fli_e2e_run
  import fli_pkg::*;
  import fli_ref_pkg::*;
#(
  parameter int LANES  = 4,
  parameter int GROUPS = 2,
  parameter int H      = 8,
  parameter int LAYERS = 1,
  parameter int T      = 10,
  parameter int WMAG   = 64,
  parameter int SEED   = 1,
  parameter int RUNS   = 2
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int NPIX   = LANES * GROUPS;
  localparam int PIX_W  = (NPIX > 1) ? $clog2(NPIX) : 1;
  localparam int GATE_W = (T > 1) ? $clog2(T) : 1;
  localparam int DT     = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmem_we = 0, px_we = 0, start = 0, busy, dn;
  logic [CMEM_AW-1:0] cmem_waddr = '0;
  q8_t cmem_wdata = '0, px_data = '0;
  logic [PIX_W-1:0] px_pixel = '0, rd_pixel = '0;
  logic [GATE_W-1:0] px_gate = '0, rd_gate = '0;
  y_t rd_sdf;
  logic [TAU_W-1:0] rd_tau;
  logic [1:0] phase;
  logic [7:0] cur_group;

  fli_accel #(.LANES(LANES), .GROUPS(GROUPS), .H(H), .LAYERS(LAYERS), .T(T), .GATE_DT(DT)) dut (
    .clk, .rst_n, .cmem_we, .cmem_waddr, .cmem_wdata, .px_we, .px_pixel, .px_gate, .px_data,
    .start, .busy, .done(dn), .rd_pixel, .rd_gate, .rd_sdf, .rd_tau, .phase, .cur_group
  );

  // ---- mechanism counters -------------------------------------------------------
  int n_clear, n_enc, n_dec, n_handoff, n_grpsw, n_pp, n_sat, n_lin;
  int n_sig, n_tanh;   // gate rows finished with a sigmoid / with a tanh
  logic [1:0] phase_q; logic [7:0] grp_q;
  acc_t acc0;
  lane_op_e op0;
  assign acc0 = dut.g_lane[0].u_lane.acc;
  assign op0  = dut.g_lane[0].u_lane.cq.op;
  lane_op_e op_issue;
  assign op_issue = dut.cmd.op;
  longint cyc = 0, c_start = 0, c_post = 0, c_done = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (start) c_start <= cyc;
    if (phase == 2'd3 && phase_q != 2'd3) c_post <= cyc;
    if (dn) c_done <= cyc;
    phase_q <= phase; grp_q <= cur_group;
    if (busy && phase == 2'd0) n_clear++;
    if (phase == 2'd1 && op_issue == OP_FIN_C) n_enc++;
    if (phase == 2'd2 && op_issue == OP_FIN_Y) n_dec++;
    if (op_issue == OP_FIN_Z || op_issue == OP_FIN_R) n_sig++;
    if (op_issue == OP_FIN_C) n_tanh++;
    if (phase_q == 2'd1 && phase == 2'd2) n_handoff++;
    if (phase != 2'd0 && phase != 2'd3 && grp_q != cur_group) n_grpsw++;
    if (dut.pp_start) n_pp++;
    if (op0 == OP_FIN_Z || op0 == OP_FIN_R || op0 == OP_FIN_C) begin
      if (acc0 >= 20480 || acc0 <= -20480) n_sat++; else n_lin++;
    end
  end

  function automatic int rows_cycles();
    int s = 0;
    for (int l = 0; l < LAYERS; l++) begin
      s += 3 * H * (2 + ((l == 0) ? 1 : H) + H);   // encoder
      s += 3 * H * (2 + ((l == 0) ? 0 : H) + H);   // decoder
    end
    s += 2 + H;                                    // dense
    return s * T * GROUPS;
  endfunction

  byte cw[];
  byte xs[NPIX][];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [L%0d H%0d] %s", LAYERS, H, what);
    end
  endtask

  task automatic one_run(input int run);
    int y[];
    longint exp_tau;
    // TPSFs: rising edge then a decay with noise, Q1.7
    for (int p = 0; p < NPIX; p++) begin
      int pk = 1 + ($urandom % 3);
      int amp = 40 + ($urandom % 80);
      xs[p] = new[T];
      for (int t = 0; t < T; t++) begin
        int v = (t < pk) ? (amp * (t + 1)) / (pk + 1) : (amp * 8) / (8 + 3 * (t - pk));
        v += int'($urandom % 9) - 4;
        if (p == 0 && run == 1) v = 0;   // an empty pixel
        xs[p][t] = byte'((v < 0) ? 0 : (v > 127 ? 127 : v));
      end
    end
    for (int p = 0; p < NPIX; p++)
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        px_we = 1; px_pixel = PIX_W'(p); px_gate = GATE_W'(t); px_data = xs[p][t];
      end
    @(negedge clk); px_we = 0;
    start = 1;
    @(negedge clk); start = 0;
    while (!dn) @(posedge clk);
    @(negedge clk);
    check(c_post - c_start == longint'(LAYERS * GROUPS * H + rows_cycles() + 1),
          $sformatf("schedule length %0d expected %0d", c_post - c_start,
                    LAYERS * GROUPS * H + rows_cycles() + 1));
    check(c_done - c_post <= longint'(GROUPS * 55 + 8),
          $sformatf("post-processing took %0d cycles", c_done - c_post));
    @(negedge clk);
    for (int p = 0; p < NPIX; p++) begin
      run_pixel(H, LAYERS, T, cw, xs[p], y);
      for (int t = 0; t < T; t++) begin
        rd_pixel = PIX_W'(p); rd_gate = GATE_W'(t);
        @(negedge clk);
        check(int'(rd_sdf) == y[t], $sformatf("run %0d pixel %0d gate %0d sdf %0d expected %0d",
                                             run, p, t, rd_sdf, y[t]));
      end
      exp_tau = ref_tau(DT, y);
      check(longint'(rd_tau) == exp_tau,
            $sformatf("run %0d pixel %0d tau %0d expected %0d", run, p, rd_tau, exp_tau));
    end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    n_clear = 0; n_enc = 0; n_dec = 0; n_handoff = 0; n_grpsw = 0; n_pp = 0; n_sat = 0; n_lin = 0;
    n_sig = 0; n_tanh = 0;
    void'($urandom(SEED));
    cw = new[cmem_words(H, LAYERS)];
    foreach (cw[i]) begin
      // mostly small weights, a few large ones to drive activations into saturation
      if ($urandom % 16 == 0) cw[i] = byte'(int'($urandom % 256) - 128);
      else                    cw[i] = byte'(int'($urandom % (2 * WMAG)) - WMAG);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (cw[i]) begin
      @(negedge clk);
      cmem_we = 1; cmem_waddr = CMEM_AW'(i); cmem_wdata = cw[i];
    end
    @(negedge clk); cmem_we = 0;
    for (int r = 0; r < RUNS; r++) one_run(r);
    check(n_clear == RUNS * LAYERS * GROUPS * H, $sformatf("state clear cycles %0d", n_clear));
    check(n_enc == RUNS * T * GROUPS * LAYERS * H, $sformatf("encoder state updates %0d", n_enc));
    check(n_dec == RUNS * T * GROUPS, $sformatf("decoder outputs %0d", n_dec));
    check(n_handoff == RUNS, $sformatf("encoder-decoder hand-offs %0d", n_handoff));
    check(GROUPS == 1 || n_grpsw > 0, "pixel-group switch never happened");
    check(n_pp == RUNS, $sformatf("post-processing starts %0d", n_pp));
    // Per pixel and run, 4*LAYERS*T sigmoid vectors and 2*LAYERS*T tanh vectors
    // (280 and 140 for the one-layer network at T = 70, 560 and 280 for two layers).
    check(n_sig == RUNS * GROUPS * H * 4 * LAYERS * T, $sformatf("sigmoid rows %0d", n_sig));
    check(n_tanh == RUNS * GROUPS * H * 2 * LAYERS * T, $sformatf("tanh rows %0d", n_tanh));
    check(n_sat > 0, "no saturated activation");
    check(n_lin > 0, "no linear-region activation");
    $display("[LANES=%0d GROUPS=%0d H=%0d LAYERS=%0d T=%0d] clear=%0d enc=%0d dec=%0d handoff=%0d grp_switch=%0d pp=%0d sat=%0d lin=%0d sigmoid/pixel=%0d tanh/pixel=%0d",
             LANES, GROUPS, H, LAYERS, T, n_clear, n_enc, n_dec, n_handoff, n_grpsw, n_pp, n_sat, n_lin,
             n_sig / (RUNS * GROUPS * H), n_tanh / (RUNS * GROUPS * H));
    done = 1;
  end
endmodule
