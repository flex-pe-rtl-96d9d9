// af_select: the glue between the hyperbolic and the linear CORDIC.
//
// Implements the middle of the paper's Fig. 4(a) for one SIMD word:
//  * adder 1 forms e^x = sinh x + cosh x from the hyperbolic outputs;
//  * adder 2 adds e^x to either the constant 1 (sigmoid: 1 + e^x) or its own
//    registered output (softmax: running sum of e^x), the "Sig/Soft" mux;
//  * the Num mux picks sinh x (tanh), e^x (sigmoid) or the FIFO output
//    (softmax), the Denom mux picks cosh x (tanh) or adder 2 (sigmoid) or
//    the running sum (softmax);
//  * in MAC mode the operands pass straight to the linear stages.
// The linear stages then run vectoring with X = Denom, Y = Num, Z = 0 so
// that Z converges to Num/Denom, or rotation (MAC) with X, Y, Z as given.
//
// Softmax takes two passes of the same vector: pass 0 (sm_phase = 0)
// pushes e^x into the FIFO and accumulates the sum, sm_first restarting the
// sum; pass 1 pops one numerator per token. To keep the sum of a vector in
// the data format's range, both the FIFO entry and the sum use
// e^x >> sm_shift (a shifter of the same kind as the CORDIC stages); the
// quotient is unchanged by this common scaling. The scaling is this
// design's choice; the paper only states that inputs are normalised.
// Combinational apart from the running-sum register and the FIFO.
//
// Lint note: rst_n is both the asynchronous reset and the assertions'
// disable-iff condition, which the linter reports as a mixed use.
module af_select
  import flexpe_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid,      // a token leaves the hyperbolic stages
  input  prec_e       prec,
  input  op_e         op,
  input  af_e         af,
  input  logic        sm_phase,
  input  logic        sm_first,
  input  logic [4:0]  sm_shift,
  input  word_t       hx,         // cosh x (AF) or MAC operand X
  input  word_t       hy,         // sinh x (AF) or MAC accumulator Y
  input  word_t       hz,         // MAC weight Z
  output word_t       lin_x,
  output word_t       lin_y,
  output word_t       lin_z,
  output cmode_e      lin_mode,
  output logic        drop,       // softmax pass-0 token: no result
  output logic        fifo_empty,
  output logic        fifo_full
);

  word_t ex, ex_s, add2_a, add2_b, add2, acc, fifo_q;
  logic  is_soft, push, pop;

  simd_addsub u_add1 (.prec, .a(hy), .b(hx), .sub('0), .sum(ex));
  simd_lbs    u_scl  (.prec, .din(ex), .sh(sm_shift), .rne(1'b0), .dout(ex_s));

  assign is_soft   = (op == OP_AF) && (af == AF_SOFTMAX);
  assign add2_a = is_soft ? ex_s : ex;
  assign add2_b = (af == AF_SOFTMAX) ? (sm_first ? '0 : acc) : one_word(prec);
  simd_addsub u_add2 (.prec, .a(add2_a), .b(add2_b), .sub('0), .sum(add2));

  assign push = valid && is_soft && !sm_phase;
  assign pop  = valid && is_soft &&  sm_phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (push) acc <= add2;
  end

  exp_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push, .wdata(ex_s), .pop, .rdata(fifo_q),
    .empty(fifo_empty), .full(fifo_full)
  );

  always_comb begin
    drop     = 1'b0;
    lin_z    = '0;
    lin_mode = CM_LIN_VEC;
    lin_x    = hx;
    lin_y    = hy;
    if (op == OP_MAC) begin
      lin_mode = CM_LIN_ROT;
      lin_z    = hz;
    end else begin
      case (af)
        AF_TANH:    begin lin_y = hy;     lin_x = hx;   end
        AF_SIGMOID: begin lin_y = ex;     lin_x = add2; end
        AF_SOFTMAX: begin lin_y = fifo_q; lin_x = acc;  drop = !sm_phase; end
        default:    begin lin_mode = CM_PASS; lin_z = hz; end  // ReLU: result rides in Z
      endcase
    end
  end

endmodule
