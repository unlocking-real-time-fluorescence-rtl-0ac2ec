// tb_fli_accel_full -- one complete run of the accelerator at its default size.
//
// 128 lanes x 2 pixel groups = 256 pixels, 32-unit single-layer network
// (Seq2SeqLite), 70 time gates. Loads random 8-bit weights and decaying
// random TPSFs, runs the array once, compares all 256 x 70 SDF samples and
// 256 lifetimes with the software reference (fli_ref_pkg) and checks that the
// encoder/decoder schedule takes the expected 932,185 cycles from start to the
// post-processing phase (64 clear + 932,120 GRU-row cycles + 1; see
// rows_cycles). It also counts 280 sigmoid and 140 tanh gate vectors per
// pixel, the operation counts listed for this network. Watchdog: 1,200,000 cycles.
module tb_fli_accel_full;
  import fli_pkg::*;
  import fli_ref_pkg::*;

  localparam int LANES = 128, GROUPS = 2, H = 32, LAYERS = 1, T = 70, DT = 40;
  localparam int NPIX = LANES * GROUPS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmem_we = 0, px_we = 0, start = 0, busy, dn;
  logic [CMEM_AW-1:0] cmem_waddr = '0;
  q8_t cmem_wdata = '0, px_data = '0;
  logic [7:0] px_pixel = '0, rd_pixel = '0;
  logic [6:0] px_gate = '0, rd_gate = '0;
  y_t rd_sdf;
  logic [TAU_W-1:0] rd_tau;
  logic [1:0] phase;
  logic [7:0] cur_group;

  fli_accel dut (
    .clk, .rst_n, .cmem_we, .cmem_waddr, .cmem_wdata, .px_we, .px_pixel, .px_gate, .px_data,
    .start, .busy, .done(dn), .rd_pixel, .rd_gate, .rd_sdf, .rd_tau, .phase, .cur_group
  );

  int checks = 0, failures = 0;
  longint cyc = 0, c_start = 0, c_post = 0, c_done = 0;
  logic [1:0] phase_q = '0;
  int n_enc = 0, n_dec = 0, n_grpsw = 0, n_nonzero_tau = 0, n_sig = 0, n_tanh = 0;
  logic [7:0] grp_q = '0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (start) c_start <= cyc;
    if (phase == 2'd3 && phase_q != 2'd3) c_post <= cyc;
    if (dn) c_done <= cyc;
    if (phase == 2'd1 && dut.cmd.op == OP_FIN_C) n_enc++;
    if (phase == 2'd2 && dut.cmd.op == OP_FIN_Y) n_dec++;
    if (dut.cmd.op == OP_FIN_Z || dut.cmd.op == OP_FIN_R) n_sig++;
    if (dut.cmd.op == OP_FIN_C) n_tanh++;
    if (phase inside {2'd1, 2'd2} && grp_q != cur_group) n_grpsw++;
    phase_q <= phase; grp_q <= cur_group;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic int rows_cycles();
    return T * GROUPS * (3 * H * (2 + 1 + H) + 3 * H * (2 + H) + 2 + H);
  endfunction

  byte cw[];
  byte xs[NPIX][];

  initial begin
    int y[];
    longint et;
    void'($urandom(7));
    cw = new[cmem_words(H, LAYERS)];
    foreach (cw[i]) begin
      if ($urandom % 16 == 0) cw[i] = byte'(int'($urandom % 256) - 128);
      else                    cw[i] = byte'(int'($urandom % 96) - 48);
    end
    for (int p = 0; p < NPIX; p++) begin
      int pk = 2 + ($urandom % 6);
      int amp = 40 + ($urandom % 80);
      xs[p] = new[T];
      for (int t = 0; t < T; t++) begin
        int v = (t < pk) ? (amp * (t + 1)) / (pk + 1) : (amp * 16) / (16 + 3 * (t - pk));
        v += int'($urandom % 9) - 4;
        xs[p][t] = byte'((v < 0) ? 0 : (v > 127 ? 127 : v));
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (cw[i]) begin
      @(negedge clk); cmem_we = 1; cmem_waddr = CMEM_AW'(i); cmem_wdata = cw[i];
    end
    @(negedge clk); cmem_we = 0;
    for (int p = 0; p < NPIX; p++)
      for (int t = 0; t < T; t++) begin
        @(negedge clk); px_we = 1; px_pixel = 8'(p); px_gate = 7'(t); px_data = xs[p][t];
      end
    @(negedge clk); px_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!dn) @(posedge clk);
    @(negedge clk);
    check(c_post - c_start == longint'(LAYERS * GROUPS * H + rows_cycles() + 1),
          $sformatf("schedule length %0d expected %0d", c_post - c_start,
                    LAYERS * GROUPS * H + rows_cycles() + 1));
    check(c_done - c_post <= longint'(GROUPS * 55 + 8),
          $sformatf("post-processing took %0d cycles", c_done - c_post));
    check(n_enc == T * GROUPS * H, $sformatf("encoder state updates %0d", n_enc));
    check(n_dec == T * GROUPS, $sformatf("decoder outputs %0d", n_dec));
    // per pixel: 280 sigmoid and 140 tanh gate vectors, the Seq2SeqLite counts
    check(n_sig == 280 * GROUPS * H, $sformatf("sigmoid vectors per pixel %0d", n_sig / (GROUPS * H)));
    check(n_tanh == 140 * GROUPS * H, $sformatf("tanh vectors per pixel %0d", n_tanh / (GROUPS * H)));
    check(n_grpsw > 0, "no pixel-group switch");
    for (int p = 0; p < NPIX; p++) begin
      run_pixel(H, LAYERS, T, cw, xs[p], y);
      for (int t = 0; t < T; t++) begin
        rd_pixel = 8'(p); rd_gate = 7'(t);
        @(negedge clk);
        check(int'(rd_sdf) == y[t], $sformatf("pixel %0d gate %0d sdf %0d expected %0d",
                                             p, t, rd_sdf, y[t]));
      end
      et = ref_tau(DT, y);
      if (et != 0) n_nonzero_tau++;
      check(longint'(rd_tau) == et, $sformatf("pixel %0d tau %0d expected %0d", p, rd_tau, et));
    end
    check(n_nonzero_tau > 0, "every lifetime was zero");
    $display("run: %0d cycles start to done, %0d pixels with non-zero lifetime",
             c_done - c_start, n_nonzero_tau);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
