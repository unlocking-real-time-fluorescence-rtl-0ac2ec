// fli_accel -- real-time fluorescence-lifetime accelerator, top level.
//
// Turns time-gated camera data into lifetimes. Every pixel's TPSF (T time
// gates) runs through a GRU sequence-to-sequence network: the encoder reads
// the TPSF, its final hidden state seeds the decoder, which produces the
// deconvolved SDF sequence y_1..y_T through a dense layer; a trapezoidal
// integral of the SDF normalised by its maximum gives the lifetime tau.
// Pixels are independent, so LANES lanes work on LANES pixels at once with one
// broadcast weight stream, and each lane serves GROUPS pixels in turn:
// LANES * GROUPS pixels per run (default 128 * 2 = 256, the paper's best
// Seq2SeqLite configuration).
//
// Default network: the 32-unit single-layer Seq2SeqLite model, T = 70 gates.
// H = 128, LAYERS = 2 gives the full Seq2Seq model.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//   cmem_*  load one weight word per cycle (layout in fli_pkg), while idle
//   px_*    load TPSF sample px_gate of pixel px_pixel (Q1.7), while idle
//   start   pulse to run all pixels; busy high during the run; done pulses at the end
//   rd_*    rd_sdf (SDF sample) and rd_tau (lifetime, TAU_FRAC fraction bits,
//           in the unit of GATE_DT) of pixel rd_pixel, one cycle after the address
//   phase / cur_group report the schedule position (monitoring only)
// Pixel p lives in lane p % LANES, group p / LANES.
//
// Run time: LAYERS*GROUPS*H + T*GROUPS*(sum of enc rows + sum of dec rows
// + 2 + H) + about GROUPS*50 cycles, rows costing 2 + IN + H cycles each
// (932,184 cycles to the end of the decoder and about 932,300 in all
// for the defaults; see gru_controller).
module fli_accel
  import fli_pkg::*;
#(
  parameter int LANES   = 128,
  parameter int GROUPS  = 2,
  parameter int H       = 32,
  parameter int LAYERS  = 1,
  parameter int T       = 70,
  parameter int GATE_DT = 40,
  localparam int NPIX   = LANES * GROUPS,
  localparam int PIX_W  = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int GATE_W = (T > 1) ? $clog2(T) : 1,
  localparam int GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int LW     = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmem_we,
  input  logic [CMEM_AW-1:0]  cmem_waddr,
  input  q8_t                 cmem_wdata,
  input  logic                px_we,
  input  logic [PIX_W-1:0]    px_pixel,
  input  logic [GATE_W-1:0]   px_gate,
  input  q8_t                 px_data,
  input  logic                start,
  output logic                busy,
  output logic                done,
  input  logic [PIX_W-1:0]    rd_pixel,
  input  logic [GATE_W-1:0]   rd_gate,
  output y_t                  rd_sdf,
  output logic [TAU_W-1:0]    rd_tau,
  output logic [1:0]          phase,
  output logic [7:0]          cur_group
);
  lane_cmd_t          cmd;
  logic [CMEM_AW-1:0] cmem_raddr;
  q8_t                w;
  logic               pp_start;
  logic [LANES-1:0]   pp_done;

  gru_controller #(.H(H), .LAYERS(LAYERS), .T(T), .GROUPS(GROUPS)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .cmd, .cmem_raddr,
    .pp_start, .pp_done(&pp_done), .phase_o(phase), .grp_o(cur_group)
  );

  constant_memory #(.DEPTH(cmem_depth(H, LAYERS))) u_cmem (
    .clk, .we(cmem_we), .waddr(cmem_waddr), .wdata(cmem_wdata),
    .raddr(cmem_raddr), .rdata(w)
  );

  // pixel -> (lane, group)
  logic [LW-1:0] px_lane, rd_lane, rd_lane_q;
  logic [GW-1:0] px_grp,  rd_grp,  rd_grp_q;
  always_comb begin
    px_lane = LW'(px_pixel % LANES);
    px_grp  = GW'(px_pixel / LANES);
    rd_lane = LW'(rd_pixel % LANES);
    rd_grp  = GW'(rd_pixel / LANES);
  end

  y_t               lane_sdf [LANES];
  logic [TAU_W-1:0] lane_tau [LANES];
  logic [ADDR_W-1:0] y_raddr;
  assign y_raddr = ADDR_W'(rd_grp * T + rd_gate);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    gru_lane #(.H(H), .LAYERS(LAYERS), .T(T), .GROUPS(GROUPS), .GATE_DT(GATE_DT)) u_lane (
      .clk, .rst_n, .cmd, .w,
      .x_we(px_we && px_lane == LW'(i)),
      .x_waddr(ADDR_W'(px_grp * T + px_gate)),
      .x_wdata(px_data),
      .y_raddr, .y_rdata(lane_sdf[i]),
      .pp_start, .pp_done(pp_done[i]),
      .tau_grp(rd_grp_q), .tau(lane_tau[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rd_lane_q <= '0; rd_grp_q <= '0; end
    else begin rd_lane_q <= rd_lane; rd_grp_q <= rd_grp; end
  end
  assign rd_sdf = lane_sdf[rd_lane_q];
  assign rd_tau = lane_tau[rd_lane_q];

  // the lanes' lifetime units have a fixed latency and finish together
  a_lanes_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      (|pp_done) |-> (&pp_done));

  // host loads only while the array is idle
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (cmem_we || px_we) |-> !busy);
endmodule
