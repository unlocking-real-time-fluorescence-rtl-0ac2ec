// shared_memory -- hidden-state store of one lane.
//
// Holds the hidden state vectors h of every GRU layer for every pixel group
// the lane serves: word (layer * GROUPS + group) * H + unit. The encoder
// writes h_t here; because the decoder's initial state is the encoder's final
// state, the decoder simply continues on the same words, so no copy is needed
// for the encoder-to-decoder hand-off.
//
// One synchronous read port (data the cycle after raddr) and one write port.
// A read and a write to the same word in one cycle return the old value.
//
// The paper names this region "shared memory" and sizes it by h vectors of H
// words; splitting it into one bank per lane is this design's choice.
module shared_memory
  import fli_pkg::*;
#(
  parameter int H      = 32,
  parameter int LAYERS = 1,
  parameter int GROUPS = 2,
  localparam int DEPTH = H * LAYERS * GROUPS
) (
  input  logic               clk,
  input  logic               we,
  input  logic [ADDR_W-1:0]  waddr,
  input  q8_t                wdata,
  input  logic [ADDR_W-1:0]  raddr,
  output q8_t                rdata
);
  q8_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < ADDR_W'(DEPTH)) mem[waddr] <= wdata;
    rdata <= (raddr < ADDR_W'(DEPTH)) ? mem[raddr] : '0;
  end
endmodule
