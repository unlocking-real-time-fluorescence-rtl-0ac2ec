// tb_data_memory -- test of the two intermediate-result banks (Z and RH).
//
// H = 32. Writes different random data into the Z bank and the RH bank with
// their separate enables, reads both banks in the same cycle (one-cycle
// latency) and checks that a write to one bank leaves the other unchanged.
module tb_data_memory;
  import fli_pkg::*;
  localparam int H = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we_z = 0, we_rh = 0;
  logic [ADDR_W-1:0] waddr = '0, raddr = '0;
  q8_t wdata = '0, rdata_z, rdata_rh;
  byte mz [H], mrh [H];
  int checks = 0, failures = 0;

  data_memory #(.H(H)) dut (.clk, .we_z, .we_rh, .waddr, .wdata, .raddr, .rdata_z, .rdata_rh);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    for (int i = 0; i < H; i++) begin
      @(negedge clk); we_z = 1; we_rh = 0; waddr = ADDR_W'(i); mz[i] = byte'($urandom); wdata = mz[i];
      @(negedge clk); we_z = 0; we_rh = 1; mrh[i] = byte'($urandom); wdata = mrh[i];
    end
    @(negedge clk); we_rh = 0;
    for (int i = 0; i < H; i++) begin
      raddr = ADDR_W'(i); @(negedge clk);
      chk(rdata_z == mz[i], $sformatf("z word %0d", i));
      chk(rdata_rh == mrh[i], $sformatf("rh word %0d", i));
    end
    // write z only at word 3
    we_z = 1; waddr = 3; wdata = ~mz[3]; mz[3] = ~mz[3];
    @(negedge clk); we_z = 0; raddr = 3; @(negedge clk);
    chk(rdata_z == mz[3], "z rewrite");
    chk(rdata_rh == mrh[3], "rh untouched by z write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
