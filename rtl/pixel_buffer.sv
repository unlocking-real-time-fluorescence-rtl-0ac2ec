// pixel_buffer -- TPSF input and SDF output samples of the pixels one lane serves.
//
// Input side: the camera interface writes TPSF sample x_t of pixel group g at
// word g * T + t (8-bit Q1.7); the lane reads it at the same address during
// the encoder. Output side: the lane writes the network output y_t (16-bit,
// 8 fraction bits) at word g * T + t during the decoder; the host reads it
// back. All reads are synchronous (data the cycle after the address).
//
// The paper does not describe how frames reach the network or how results
// leave it; this buffer is this design's choice.
module pixel_buffer
  import fli_pkg::*;
#(
  parameter int T      = 70,
  parameter int GROUPS = 2,
  localparam int DEPTH = T * GROUPS
) (
  input  logic               clk,
  // TPSF in
  input  logic               x_we,
  input  logic [ADDR_W-1:0]  x_waddr,
  input  q8_t                x_wdata,
  input  logic [ADDR_W-1:0]  x_raddr,
  output q8_t                x_rdata,
  // SDF out
  input  logic               y_we,
  input  logic [ADDR_W-1:0]  y_waddr,
  input  y_t                 y_wdata,
  input  logic [ADDR_W-1:0]  y_raddr,
  output y_t                 y_rdata
);
  q8_t x_mem [DEPTH];
  y_t  y_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (x_we && x_waddr < ADDR_W'(DEPTH)) x_mem[x_waddr] <= x_wdata;
    if (y_we && y_waddr < ADDR_W'(DEPTH)) y_mem[y_waddr] <= y_wdata;
    x_rdata <= (x_raddr < ADDR_W'(DEPTH)) ? x_mem[x_raddr] : '0;
    y_rdata <= (y_raddr < ADDR_W'(DEPTH)) ? y_mem[y_raddr] : '0;
  end
endmodule
