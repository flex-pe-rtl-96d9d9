// tb_exp_fifo: random push/pop against a queue model of the FIFO.
// Checks data order, empty and full flags, with DEPTH = 16.
module tb_exp_fifo;
  import flexpe_pkg::*;

  logic clk = 0, rst_n = 0, push, pop, empty, full;
  word_t wdata, rdata;
  word_t q[$];
  int checks = 0, failures = 0;

  exp_fifo #(.DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    push = 0; pop = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks += 2;
      if (empty != (q.size() == 0)) failures++;
      if (full != (q.size() == 16)) failures++;
      push = ($urandom % 2 == 0) && (q.size() < 16) || (i % 200 < 20 && q.size() < 16);
      pop  = ($urandom % 3 == 0) && (q.size() > 0) && !(i % 200 < 20);
      wdata = $urandom;
      if (pop) begin
        checks++;
        if (rdata != q[0]) begin
          failures++;
          if (failures < 10) $display("FAIL pop got %h exp %h", rdata, q[0]);
        end
        void'(q.pop_front());
      end
      if (push) q.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
