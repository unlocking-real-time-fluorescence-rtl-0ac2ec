// data_memory -- intermediate-result store of one lane.
//
// Two banks of H words caching the gate results of the GRU cell being
// computed: bank Z holds the update gate z_j, bank RH holds r_j * h_j (reset
// gate applied to the previous hidden state), which the candidate-state
// product U_h (r (.) h) reads back. Both banks share the read address, are
// read in the same cycle (data valid the cycle after raddr), and have their
// own write enables.
//
// The paper names this region "data memory" (intermediate gate activations
// and candidate values); the two-bank split is this design's choice and
// matches the two data-memory BRAMs per DSP of the paper's evaluation
// (256 data-memory BRAMs for 128 DSPs).
module data_memory
  import fli_pkg::*;
#(
  parameter int H = 32
) (
  input  logic               clk,
  input  logic               we_z,
  input  logic               we_rh,
  input  logic [ADDR_W-1:0]  waddr,
  input  q8_t                wdata,
  input  logic [ADDR_W-1:0]  raddr,
  output q8_t                rdata_z,
  output q8_t                rdata_rh
);
  q8_t z_mem  [H];
  q8_t rh_mem [H];

  always_ff @(posedge clk) begin
    if (we_z  && waddr < ADDR_W'(H)) z_mem[waddr]  <= wdata;
    if (we_rh && waddr < ADDR_W'(H)) rh_mem[waddr] <= wdata;
    rdata_z  <= (raddr < ADDR_W'(H)) ? z_mem[raddr]  : '0;
    rdata_rh <= (raddr < ADDR_W'(H)) ? rh_mem[raddr] : '0;
  end
endmodule
