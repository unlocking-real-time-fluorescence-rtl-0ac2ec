// divider -- sequential unsigned restoring divider.
//
// quo = num / den (integer quotient). A pulse on start loads the operands;
// one quotient bit is produced per cycle, so done pulses NW + 1 cycles after
// start. den = 0 yields an all-ones quotient. Used by the lifetime unit for
// the 1 / S_max normalisation of the trapezoidal integral.
module divider #(
  parameter int NW = 40,
  parameter int DW = 18
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);
  logic [NW-1:0]   q;
  logic [DW:0]     rem;
  logic [DW-1:0]   d;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]     trial;

  always_comb trial = {rem[DW-1:0], q[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; rem <= '0; d <= '0; cnt <= '0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; q <= num; rem <= '0; d <= den; cnt <= '0;
      end else if (busy) begin
        if (trial >= {1'b0, d}) begin
          rem <= trial - {1'b0, d};
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[NW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == NW - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (trial >= {1'b0, d}) ? {q[NW-2:0], 1'b1} : {q[NW-2:0], 1'b0};
        end
      end
    end
  end
endmodule
