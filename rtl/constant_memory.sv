// constant_memory -- weight store of the GRU accelerator.
//
// Holds every learned parameter of the network: W, U and b of each gate of
// every encoder and decoder GRU cell, and the dense output layer, as 8-bit Q2.5
// words in the layout given in fli_pkg. The host loads it through the write
// port before a run; during a run the controller reads one word per cycle and
// the word is broadcast to all lanes, so every lane (each serving different
// pixels) applies the same weight in the same cycle.
//
// Timing: synchronous read, rdata is valid the cycle after raddr. Read and
// write may happen in the same cycle at different addresses.
//
// The paper keeps the weights in a dedicated "constant memory" region of block
// RAM (128 BRAMs in its evaluation). One wide broadcast read port is this
// design's choice; the default depth is that of the 32-unit, single-layer
// model (6561 words).
module constant_memory
  import fli_pkg::*;
#(
  parameter int DEPTH = cmem_depth(32, 1)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [CMEM_AW-1:0]   waddr,
  input  q8_t                  wdata,
  input  logic [CMEM_AW-1:0]   raddr,
  output q8_t                  rdata
);
  q8_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < CMEM_AW'(DEPTH)) mem[waddr] <= wdata;
    rdata <= (raddr < CMEM_AW'(DEPTH)) ? mem[raddr] : '0;
  end
endmodule
