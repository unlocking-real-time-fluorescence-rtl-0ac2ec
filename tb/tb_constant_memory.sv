// tb_constant_memory -- write/read-back test of the weight store.
//
// Fills all DEPTH words (default size, 6561) with random bytes, reads every
// word back checking the one-cycle read latency (rdata must still show the
// previous word in the cycle the address changes and the new one after it),
// checks that a write and a read of different words can share a cycle and
// that an address beyond DEPTH reads as zero and does not alias.
module tb_constant_memory;
  import fli_pkg::*;
  localparam int DEPTH = cmem_depth(32, 1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [CMEM_AW-1:0] waddr = '0, raddr = '0;
  q8_t wdata = '0, rdata;
  byte model [DEPTH];
  int checks = 0, failures = 0;

  constant_memory dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = CMEM_AW'(i); model[i] = byte'($urandom); wdata = model[i];
    end
    @(negedge clk); we = 0;
    raddr = 0;
    @(negedge clk);
    for (int i = 1; i < DEPTH; i++) begin
      raddr = CMEM_AW'(i);
      #1 chk(rdata == model[i-1], $sformatf("latency at %0d", i));
      @(negedge clk);
      chk(rdata == model[i], $sformatf("word %0d: %0d expected %0d", i, rdata, model[i]));
    end
    // simultaneous write and read of different words
    we = 1; waddr = 5; wdata = 8'h5a; raddr = 7;
    @(negedge clk); we = 0;
    chk(rdata == model[7], "read during write");
    raddr = 5; @(negedge clk);
    chk(rdata == 8'h5a, "written word");
    // out of range
    we = 1; waddr = CMEM_AW'(DEPTH); wdata = 8'h11; @(negedge clk); we = 0;
    raddr = CMEM_AW'(DEPTH); @(negedge clk);
    chk(rdata == 0, "out of range read");
    raddr = 0; @(negedge clk);
    chk(rdata == model[0], "out of range write aliased");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
