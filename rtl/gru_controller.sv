// gru_controller -- static schedule of the encoder, decoder and post-processing.
//
// Walks Algorithm 1 of the sequence-to-sequence model for all pixel groups and
// issues one lane command (and one constant-memory read) per cycle, with no
// bubbles:
//
//   CLEAR     : zero every hidden-state word (h_0 = 0)           LAYERS*GROUPS*H cycles
//   ENCODER   : for t, for group, for layer, for gate z, r, h, for row j:
//                 BIAS, IN x MAC (W), H x MAC (U), FIN
//   DECODER   : same with zero input to layer 0 (its W MACs are skipped),
//               then per group the dense row: BIAS, H x MAC (W_o), FIN_Y
//   DRAIN     : 2 cycles for the last writes
//   POST      : start the lifetime units, wait for pp_done
//
// A row costs 2 + IN + H cycles, IN = 1 (encoder layer 0), 0 (decoder layer 0)
// or H (deeper layers). The decoder starts from the hidden state the encoder
// left in shared memory. start is sampled in IDLE; busy is high from the cycle
// after start until done, a one-cycle pulse at the end. phase_o and grp_o
// expose the schedule position for monitoring.
//
// The paper computes its schedule off line with a discrete-event scheduler
// and gives neither the schedule nor its format; this fixed loop nest with
// the pixel group as the loop just inside time is this design's choice.
module gru_controller
  import fli_pkg::*;
#(
  parameter int H      = 32,
  parameter int LAYERS = 1,
  parameter int T      = 70,
  parameter int GROUPS = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output lane_cmd_t           cmd,
  output logic [CMEM_AW-1:0]  cmem_raddr,
  output logic                pp_start,
  input  logic                pp_done,
  output logic [1:0]          phase_o,   // 0 idle/clear, 1 encoder, 2 decoder, 3 post
  output logic [7:0]          grp_o
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN, S_POST, S_WAIT} state_e;
  typedef enum logic [1:0] {ST_BIAS, ST_IN, ST_REC, ST_FIN} stage_e;
  localparam int GATE_DENSE = 3;

  state_e      st;
  stage_e      stage;
  logic        ph;                   // 0 encoder, 1 decoder
  int unsigned t, g, l, gate, j, k, clr;
  int unsigned drain;

  // ---- combinational decode of the current position ---------------------------
  logic [31:0] in_n, rlen, rowbase, hbase, inbase;
  always_comb begin
    in_n    = (l == 0) ? (ph ? 0 : 1) : H;
    rlen    = unsigned'(row_len(int'(l), H));
    rowbase = unsigned'(cell_base(int'(ph), int'(l), H, LAYERS)) + gate * H * rlen + j * rlen;
    hbase   = (((gate == GATE_DENSE) ? (LAYERS - 1) : l) * GROUPS + g) * H;
    inbase  = ((l - 1) * GROUPS + g) * H;

    cmd        = '0;
    cmem_raddr = '0;
    if (st == S_CLEAR) begin
      cmd.op      = OP_CLR;
      cmd.sh_addr = ADDR_W'(clr);
    end else if (st == S_RUN) begin
      cmd.grp     = 8'(g);
      cmd.first   = (t == 0);
      cmd.pb_addr = ADDR_W'(g * T + t);
      if (gate == GATE_DENSE) begin
        unique case (stage)
          ST_BIAS: begin
            cmd.op = OP_BIAS;
            cmem_raddr = CMEM_AW'(dense_base(H, LAYERS));
          end
          ST_FIN:  cmd.op = OP_FIN_Y;
          default: begin
            cmd.op = OP_MAC; cmd.src = SRC_H;
            cmd.sh_addr = ADDR_W'(hbase + k);
            cmem_raddr  = CMEM_AW'(dense_base(H, LAYERS) + 1 + k);
          end
        endcase
      end else begin
        unique case (stage)
          ST_BIAS: begin
            cmd.op = OP_BIAS;
            cmem_raddr = CMEM_AW'(rowbase);
          end
          ST_IN: begin
            cmd.op = OP_MAC;
            cmd.src = (l == 0) ? SRC_X : SRC_H;
            if (l != 0) cmd.sh_addr = ADDR_W'(inbase + k);
            cmem_raddr  = CMEM_AW'(rowbase + 1 + k);
          end
          ST_REC: begin
            cmd.op = OP_MAC;
            cmd.src = (gate == 2) ? SRC_RH : SRC_H;
            cmd.sh_addr = ADDR_W'(hbase + k);
            cmd.dm_addr = ADDR_W'(k);
            cmem_raddr  = CMEM_AW'(rowbase + 1 + unsigned'(in_dim(int'(l), H)) + k);
          end
          default: begin
            cmd.op = (gate == 0) ? OP_FIN_Z : (gate == 1) ? OP_FIN_R : OP_FIN_C;
            cmd.sh_addr = ADDR_W'(hbase + j);
            cmd.dm_addr = ADDR_W'(j);
          end
        endcase
      end
    end
  end

  // ---- sequencing -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; stage <= ST_BIAS; ph <= 1'b0;
      t <= 0; g <= 0; l <= 0; gate <= 0; j <= 0; k <= 0; clr <= 0; drain <= 0;
      done <= 1'b0; pp_start <= 1'b0;
    end else begin
      done     <= 1'b0;
      pp_start <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_CLEAR; clr <= 0;
        end
        S_CLEAR: begin
          if (clr == LAYERS * GROUPS * H - 1) begin
            st <= S_RUN; stage <= ST_BIAS; ph <= 1'b0;
            t <= 0; g <= 0; l <= 0; gate <= 0; j <= 0; k <= 0;
          end else clr <= clr + 1;
        end
        S_RUN: begin
          unique case (stage)
            ST_BIAS: begin
              k <= 0;
              stage <= (gate != GATE_DENSE && in_n != 0) ? ST_IN : ST_REC;
            end
            ST_IN: begin
              if (k == in_n - 1) begin k <= 0; stage <= ST_REC; end
              else k <= k + 1;
            end
            ST_REC: begin
              if (k == H - 1) begin k <= 0; stage <= ST_FIN; end
              else k <= k + 1;
            end
            default: begin   // ST_FIN: advance to the next row
              stage <= ST_BIAS;
              if (gate != GATE_DENSE && j != H - 1) j <= j + 1;
              else if (gate < 2) begin j <= 0; gate <= gate + 1; end
              else if (gate == 2 && l != LAYERS - 1) begin j <= 0; gate <= 0; l <= l + 1; end
              else if (gate == 2 && ph) begin j <= 0; gate <= GATE_DENSE; end
              else begin
                // next pixel group / time gate / phase
                j <= 0; gate <= 0; l <= 0;
                if (g != GROUPS - 1) g <= g + 1;
                else begin
                  g <= 0;
                  if (t != T - 1) t <= t + 1;
                  else begin
                    t <= 0;
                    if (!ph) ph <= 1'b1;
                    else begin st <= S_DRAIN; drain <= 0; end
                  end
                end
              end
            end
          endcase
        end
        S_DRAIN: begin
          if (drain == 1) begin st <= S_POST; end
          drain <= drain + 1;
        end
        S_POST: begin
          pp_start <= 1'b1;
          st <= S_WAIT;
        end
        S_WAIT: if (pp_done) begin
          st <= S_IDLE; done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy  = (st != S_IDLE);
    grp_o = 8'(g);
    unique case (st)
      S_RUN:                   phase_o = ph ? 2'd2 : 2'd1;
      S_DRAIN, S_POST, S_WAIT: phase_o = 2'd3;
      default:                 phase_o = 2'd0;
    endcase
  end

  // the schedule never leaves the weight memory or the hidden-state region
  a_cmem_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      cmem_raddr < CMEM_AW'(cmem_depth(H, LAYERS)));
  a_sh_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      cmd.sh_addr < ADDR_W'(H * LAYERS * GROUPS));
endmodule
