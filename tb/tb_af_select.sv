// tb_af_select: self-check of the AF glue between the CORDIC chains.
// Drives cosh/sinh words directly and checks, lane by lane with integer
// arithmetic: tanh selects (X, Y) = (cosh, sinh); sigmoid selects
// (1 + e^x, e^x) with e^x = sinh + cosh; MAC passes X, Y, Z in rotation
// mode; ReLU passes Z; softmax pass 0 accumulates the scaled e^x and pushes
// it into the FIFO (result dropped), pass 1 pops the FIFO in order with the
// accumulated sum as the denominator.
module tb_af_select;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0, valid, sm_phase, sm_first, drop, fifo_empty, fifo_full;
  prec_e prec;
  op_e op;
  af_e af;
  logic [4:0] sm_shift;
  word_t hx, hy, hz, lin_x, lin_y, lin_z;
  cmode_e lin_mode;
  int checks = 0, failures = 0;

  af_select dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // lane-wise a + b (mod 2^n)
  function automatic word_t addw(int n, word_t a, word_t b);
    word_t r;
    r = '0;
    for (int l = 0; l < 32 / n; l++) r = lane_set(r, n, l, lane_get(a, n, l) + lane_get(b, n, l));
    return r;
  endfunction

  function automatic word_t shw(int n, word_t a, int s);
    word_t r;
    r = '0;
    for (int l = 0; l < 32 / n; l++) r = lane_set(r, n, l, lane_get(a, n, l) >>> s);
    return r;
  endfunction

  initial begin
    word_t ex [8], sum;
    int n;
    valid = 0; sm_phase = 0; sm_first = 0; sm_shift = '0; prec = PREC16; op = OP_AF; af = AF_TANH;
    hx = '0; hy = '0; hz = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      prec = prec_e'(p);
      n = nbits(p);
      for (int i = 0; i < 30; i++) begin
        @(negedge clk);
        valid = 1; hx = $urandom & 32'h3333_3333; hy = $urandom & 32'h3333_3333; hz = $urandom;
        op = OP_AF; af = AF_TANH; #1;
        chk(lin_x == hx && lin_y == hy && lin_z == '0 && lin_mode == CM_LIN_VEC && !drop, "tanh select");
        af = AF_SIGMOID; #1;
        chk(lin_y == addw(n, hx, hy) && lin_x == addw(n, addw(n, hx, hy), one_word(prec)) && lin_mode == CM_LIN_VEC, "sigmoid select");
        af = AF_RELU; #1;
        chk(lin_z == hz && lin_mode == CM_PASS && !drop, "relu pass");
        op = OP_MAC; #1;
        chk(lin_x == hx && lin_y == hy && lin_z == hz && lin_mode == CM_LIN_ROT, "mac pass");
      end
      // softmax: 8 elements, shift 2
      valid = 0; op = OP_AF; af = AF_SOFTMAX; sm_shift = 5'd2;
      sum = '0;
      for (int j = 0; j < 8; j++) begin
        @(negedge clk);
        hx = $urandom & 32'h1111_1111; hy = $urandom & 32'h1111_1111;
        sm_phase = 0; sm_first = (j == 0); valid = 1; #1;
        ex[j] = shw(n, addw(n, hx, hy), 2);
        sum = addw(n, sum, ex[j]);
        chk(drop, "softmax pass 0 drops");
      end
      for (int j = 0; j < 8; j++) begin
        @(negedge clk);
        sm_phase = 1; sm_first = 0; valid = 1; #1;
        chk(lin_y == ex[j] && lin_x == sum && !drop && lin_mode == CM_LIN_VEC, "softmax pass 1 num/denom");
      end
      @(negedge clk);
      valid = 0; #1;
      chk(fifo_empty, "fifo empty after softmax");
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
