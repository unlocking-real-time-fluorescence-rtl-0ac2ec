// tb_shared_memory -- write/read-back test of a lane's hidden-state bank.
//
// Uses H = 8, LAYERS = 2, GROUPS = 3 (48 words). Writes a random value to each
// word, reads all back (one-cycle latency), checks that a same-cycle read of
// the word being written returns the old value, and that writes to one
// layer/group region leave the others unchanged.
module tb_shared_memory;
  import fli_pkg::*;
  localparam int H = 8, L = 2, G = 3, D = H * L * G;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [ADDR_W-1:0] waddr = '0, raddr = '0;
  q8_t wdata = '0, rdata;
  byte model [D];
  int checks = 0, failures = 0;

  shared_memory #(.H(H), .LAYERS(L), .GROUPS(G)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = ADDR_W'(i); model[i] = byte'($urandom); wdata = model[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < D; i++) begin
      raddr = ADDR_W'(i); @(negedge clk);
      chk(rdata == model[i], $sformatf("word %0d", i));
    end
    // read-during-write returns old data, new data afterwards
    we = 1; waddr = 9; wdata = ~model[9]; raddr = 9;
    @(negedge clk); we = 0;
    chk(rdata == model[9], "read during write must return old word");
    model[9] = ~model[9];
    @(negedge clk);
    chk(rdata == model[9], "new word after write");
    // overwrite region (layer 1, group 2) and verify the rest is intact
    for (int k = 0; k < H; k++) begin
      @(negedge clk); we = 1; waddr = ADDR_W'((1 * G + 2) * H + k); model[(1 * G + 2) * H + k] = 8'(k); wdata = 8'(k);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < D; i++) begin
      raddr = ADDR_W'(i); @(negedge clk);
      chk(rdata == model[i], $sformatf("after region write, word %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
