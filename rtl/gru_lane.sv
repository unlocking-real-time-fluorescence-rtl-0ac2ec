// gru_lane -- one DSP lane: GRU cell arithmetic for the pixels it serves.
//
// A lane owns GROUPS pixels (pixel = group * LANES + lane index at the top).
// Every lane receives the same command and the same weight word each cycle,
// so all lanes work through the same step of the same GRU equation in lock
// step, each on its own pixel: this is the pixel-level parallelism of the
// design. Groups are served one after the other by the controller.
//
// Per row j of a gate the controller issues BIAS, one MAC per input element
// (W x), one MAC per hidden element (U h or U (r.h)) and one FIN command. The
// lane keeps a 24-bit accumulator and, on FIN, applies:
//   FIN_Z : z_j  = sigmoid(acc)                  -> data memory, bank Z
//   FIN_R : rh_j = sigmoid(acc) * h_j            -> data memory, bank RH
//   FIN_C : h_j  = ((1 - z_j) h_j + z_j tanh(acc)) -> shared memory (in place)
//   FIN_Y : y    = acc (dense output, 16 bit)    -> pixel buffer and lifetime unit
// CLR writes a zero hidden-state word (the encoder's zero initial state).
// Because z and r of all rows are computed before any candidate row, h can be
// overwritten in place row by row.
//
// Timing: a command is issued at cycle c with the addresses of the operands
// it needs; the lane's memories and the constant memory answer at c+1, where
// the lane registers the command and executes it. Writes land at c+1.
// Products are truncated (arithmetic shift right) back to Q1.7.
//
// The GRU equations (reset gate applied before U_h) are the paper's; the
// command set, the number formats and the per-lane memory banks are this
// design's choices. Besides the accumulator multiplier the lane has small
// multipliers for r*h and for the state update.
module gru_lane
  import fli_pkg::*;
#(
  parameter int H       = 32,
  parameter int LAYERS  = 1,
  parameter int T       = 70,
  parameter int GROUPS  = 2,
  parameter int GATE_DT = 40,
  localparam int GW = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  lane_cmd_t          cmd,        // issued this cycle
  input  q8_t                w,          // weight for the command issued last cycle
  // TPSF load / SDF read-back
  input  logic               x_we,
  input  logic [ADDR_W-1:0]  x_waddr,
  input  q8_t                x_wdata,
  input  logic [ADDR_W-1:0]  y_raddr,
  output y_t                 y_rdata,
  // lifetime post-processing
  input  logic               pp_start,
  output logic               pp_done,
  input  logic [GW-1:0]      tau_grp,
  output logic [TAU_W-1:0]   tau
);
  lane_cmd_t cq;
  acc_t      acc;
  q8_t       sh_rdata, z_rdata, rh_rdata, x_rdata;
  q8_t       opnd, sig_v, tanh_v;
  logic signed [2*DATA_W-1:0] prod;

  // registered command (aligned with read data)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cq <= '0;
    else        cq <= cmd;
  end

  // ---- memories --------------------------------------------------------------
  logic sh_we;  q8_t sh_wdata;
  logic dz_we, drh_we; q8_t dm_wdata;
  logic y_we;   y_t  y_wdata;

  shared_memory #(.H(H), .LAYERS(LAYERS), .GROUPS(GROUPS)) u_shared (
    .clk, .we(sh_we), .waddr(cq.sh_addr), .wdata(sh_wdata),
    .raddr(cmd.sh_addr), .rdata(sh_rdata)
  );

  data_memory #(.H(H)) u_data (
    .clk, .we_z(dz_we), .we_rh(drh_we), .waddr(cq.dm_addr), .wdata(dm_wdata),
    .raddr(cmd.dm_addr), .rdata_z(z_rdata), .rdata_rh(rh_rdata)
  );

  pixel_buffer #(.T(T), .GROUPS(GROUPS)) u_pix (
    .clk,
    .x_we, .x_waddr, .x_wdata, .x_raddr(cmd.pb_addr), .x_rdata,
    .y_we, .y_waddr(cq.pb_addr), .y_wdata, .y_raddr, .y_rdata
  );

  act_unit u_act (.x(acc), .sig_o(sig_v), .tanh_o(tanh_v));

  // ---- datapath --------------------------------------------------------------
  logic signed [2*DATA_W:0]   rh_prod;
  logic signed [2*DATA_W+2:0] upd;

  always_comb begin
    unique case (cq.src)
      SRC_X:   opnd = x_rdata;
      SRC_H:   opnd = sh_rdata;
      SRC_RH:  opnd = rh_rdata;
      default: opnd = '0;
    endcase
    prod     = w * opnd;
    rh_prod  = (2*DATA_W+1)'(sig_v * sh_rdata);
    // (1 - z) h + z hc, with 1.0 = 128
    upd      = (2*DATA_W+3)'((($signed({1'b0, 8'd128}) - z_rdata) * sh_rdata)
                              + (z_rdata * tanh_v));

    sh_we    = (cq.op == OP_CLR) || (cq.op == OP_FIN_C);
    sh_wdata = (cq.op == OP_CLR) ? q8_t'(0) : q8_t'(upd >>> ACT_FRAC);
    dz_we    = (cq.op == OP_FIN_Z);
    drh_we   = (cq.op == OP_FIN_R);
    dm_wdata = (cq.op == OP_FIN_Z) ? sig_v : q8_t'(rh_prod >>> ACT_FRAC);
    y_we     = (cq.op == OP_FIN_Y);
    if ((acc >>> (ACC_FRAC - Y_FRAC)) > acc_t'(32767))       y_wdata = y_t'(32767);
    else if ((acc >>> (ACC_FRAC - Y_FRAC)) < acc_t'(-32768)) y_wdata = y_t'(-32768);
    else                                                    y_wdata = y_t'(acc >>> (ACC_FRAC - Y_FRAC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else begin
      unique case (cq.op)
        OP_BIAS: acc <= acc_t'(w) <<< (ACC_FRAC - W_FRAC);
        OP_MAC:  acc <= acc + acc_t'(prod);
        default: acc <= acc;
      endcase
    end
  end

  lifetime_unit #(.GROUPS(GROUPS), .GATE_DT(GATE_DT)) u_life (
    .clk, .rst_n, .push(y_we), .grp(cq.grp), .first(cq.first), .y(y_wdata),
    .start(pp_start), .busy(), .done(pp_done), .rd_grp(tau_grp), .tau_o(tau)
  );
endmodule
