// tb_simd_mem: writes random words to random addresses of a 64-word bank
// and checks every read against a model array.
module tb_simd_mem;
  import flexpe_pkg::*;

  logic clk = 0, we;
  logic [5:0] waddr, raddr;
  word_t wdata, rdata, model [64];
  int checks = 0, failures = 0;

  simd_mem #(.DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 6'($urandom); wdata = $urandom;
      raddr = 6'($urandom);
      #1;
      checks++;
      if (rdata != model[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", raddr, rdata, model[raddr]);
      end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
