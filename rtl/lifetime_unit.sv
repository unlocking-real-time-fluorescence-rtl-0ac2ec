// lifetime_unit -- trapezoidal fluorescence-lifetime post-processing.
//
// For each pixel the lane serves, computes from the decoded SDF samples S_k
//   tau = (1 / S_max) * sum_{k=2..T} dt * (S_k + S_{k-1}) / 2
// with equal gate spacing dt = GATE_DT (in whatever time unit the caller
// uses; tau comes out in the same unit, with TAU_FRAC = 8 fraction bits).
//
// Accumulation is on line: every decoder output (push, grp, first, y) updates
// that group's running trapezoid sum sum(S_k + S_{k-1}), its running maximum
// and its previous sample; first marks the first gate and restarts the group.
// A pulse on start then normalises each group in turn with one sequential
// divider: tau = (GATE_DT * sum << TAU_FRAC) / (2 * S_max). A pixel whose
// S_max <= 0 or whose sum is negative gets tau = 0; it still goes through the
// divider, so the latency is fixed at GROUPS * (NW + 3) cycles from start to
// the done pulse whatever the data. All lanes therefore finish in the same
// cycle, which the top relies on. tau of group rd_grp is readable
// combinationally at any time.
//
// The trapezoidal formula and the use of the maximum as S_max follow the
// paper; on-line accumulation, the divider and the zero guard are this
// design's choices.
module lifetime_unit
  import fli_pkg::*;
#(
  parameter int GROUPS  = 2,
  parameter int GATE_DT = 40,
  localparam int GW = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push,
  input  logic [7:0]        grp,
  input  logic              first,
  input  y_t                y,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [GW-1:0]     rd_grp,
  output logic [TAU_W-1:0]  tau_o
);
  localparam int SUM_W = 32;
  localparam int NW    = 48;
  localparam int DW    = Y_W + 1;

  logic signed [SUM_W-1:0] sum_q  [GROUPS];
  y_t                      smax_q [GROUPS];
  y_t                      prev_q [GROUPS];
  logic [TAU_W-1:0]        tau_q  [GROUPS];

  typedef enum logic [1:0] {L_IDLE, L_ISSUE, L_WAIT} lstate_e;
  lstate_e            st;
  logic [GW-1:0]      g;
  logic               div_start, div_busy, div_done;
  logic [NW-1:0]      div_num, div_quo;
  logic [DW-1:0]      div_den;
  logic               skip;
  logic signed [NW-1:0] num_s;

  always_comb begin
    num_s     = NW'(GATE_DT) * NW'(sum_q[g]);
    div_num   = NW'(num_s <<< TAU_FRAC);
    div_den   = DW'({smax_q[g], 1'b0});
    skip      = (smax_q[g] <= 0) || (sum_q[g] < 0);
    div_start = (st == L_ISSUE);
  end

  divider #(.NW(NW), .DW(DW)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo)
  );

  // on-line trapezoid accumulation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < GROUPS; i++) begin
        sum_q[i] <= '0; smax_q[i] <= '0; prev_q[i] <= '0;
      end
    end else if (push && int'(grp) < GROUPS) begin
      if (first) begin
        sum_q[grp[GW-1:0]]  <= '0;
        smax_q[grp[GW-1:0]] <= y;
      end else begin
        sum_q[grp[GW-1:0]]  <= sum_q[grp[GW-1:0]] + SUM_W'(prev_q[grp[GW-1:0]]) + SUM_W'(y);
        if (y > smax_q[grp[GW-1:0]]) smax_q[grp[GW-1:0]] <= y;
      end
      prev_q[grp[GW-1:0]] <= y;
    end
  end

  // normalisation sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; g <= '0; done <= 1'b0;
      for (int i = 0; i < GROUPS; i++) tau_q[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        L_IDLE:  if (start) begin st <= L_ISSUE; g <= '0; end
        L_ISSUE: st <= L_WAIT;
        L_WAIT: if (div_done) begin
          if (skip)                               tau_q[g] <= '0;
          else if (div_quo > NW'({TAU_W{1'b1}})) tau_q[g] <= '1;
          else                                    tau_q[g] <= TAU_W'(div_quo);
          if (int'(g) == GROUPS - 1) begin st <= L_IDLE; done <= 1'b1; end
          else begin g <= g + 1'b1; st <= L_ISSUE; end
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  assign busy  = (st != L_IDLE);
  assign tau_o = tau_q[rd_grp];
endmodule
