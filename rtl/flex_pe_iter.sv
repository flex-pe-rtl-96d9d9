// flex_pe_iter: iterative SIMD Flex-PE (configurable AF and MAC).
//
// The area-saving form of the Flex-PE: one SIMD CORDIC stage with X, Y, Z
// feedback registers is reused for every iteration, first in hyperbolic
// rotation (cosh, sinh), then in linear vectoring (division) or, for MAC,
// linear rotation. A small FSM counts the iterations (the paper states the
// iterative mode is driven by an FSM; its states are this design's own):
//   IDLE -start-> HYP (hyp_iters) -> GLUE -> LIN (lin_iters) -> DONE -> IDLE
//   MAC:  IDLE -> LIN -> DONE        ReLU: IDLE -> DONE
// GLUE forms e^x = sinh + cosh and 1 + e^x with two SIMD adders and loads
// X = Denom, Y = Num, Z = 0 (tanh: cosh, sinh; sigmoid: 1 + e^x, e^x).
// Functions: sigmoid, tanh, ReLU (as in the paper's iterative config-AF)
// and MAC y + x*z. Softmax is not offered here; selecting it is flagged by
// an assertion and returns 0.
//
// Interface: start is accepted when ready; done pulses for one cycle with
// result. Cycles from start to done: MAC lin_iters+1, sigmoid/tanh
// hyp_iters+lin_iters+2, ReLU 1 (iteration counts from flexpe_pkg:
// 4/4, 4/5, 4/5, 8/10 for 4/8/16/32 bit).
//
// Lint note: rst_n is both the asynchronous reset and the assertions'
// disable-iff condition, which the linter reports as a mixed use.
module flex_pe_iter
  import flexpe_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  prec_e    prec,
  input  op_e      op,
  input  af_e      af,
  input  logic     rne,
  input  word_t    x_in,     // MAC: operand;     AF: X0 = 1/Kh
  input  word_t    y_in,     // MAC: accumulator; AF: Y0 = 0
  input  word_t    z_in,     // MAC: weight;      AF: input x
  output logic     ready,
  output logic     done,
  output word_t    result
);

  typedef enum logic [2:0] {S_IDLE, S_HYP, S_GLUE, S_LIN, S_DONE} state_e;

  state_e     st;
  prec_e      p_q;
  op_e        op_q;
  af_e        af_q;
  logic       rne_q;
  logic [4:0] k;
  word_t      x, y, z, res_q;
  word_t      xo, yo, zo, ex, ex1;
  cmode_e     md;
  logic [4:0] it;

  always_comb begin
    md = CM_PASS;
    it = 5'd1;
    if (st == S_HYP) begin
      md = CM_HYP_ROT;
      it = hyp_shift(int'(k));
    end else if (st == S_LIN) begin
      md = (op_q == OP_MAC) ? CM_LIN_ROT : CM_LIN_VEC;
      it = k + 5'd1;
    end
  end

  cordic_stage u_st (.prec(p_q), .mode(md), .iter(it), .rne(rne_q),
                     .x_in(x), .y_in(y), .z_in(z), .x_out(xo), .y_out(yo), .z_out(zo));
  simd_addsub u_ex  (.prec(p_q), .a(y), .b(x), .sub('0), .sum(ex));
  simd_addsub u_ex1 (.prec(p_q), .a(ex), .b(one_word(p_q)), .sub('0), .sum(ex1));

  assign ready  = (st == S_IDLE);
  assign done   = (st == S_DONE);
  assign result = res_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      k     <= '0;
      p_q   <= PREC32;
      op_q  <= OP_AF;
      af_q  <= AF_RELU;
      rne_q <= 1'b0;
      x     <= '0;
      y     <= '0;
      z     <= '0;
      res_q <= '0;
    end else begin
      case (st)
        S_IDLE: if (start) begin
          p_q   <= prec;
          op_q  <= op;
          af_q  <= af;
          rne_q <= rne;
          x     <= x_in;
          y     <= y_in;
          z     <= z_in;
          k     <= '0;
          if (op == OP_MAC)        st <= S_LIN;
          else if (af == AF_RELU) begin
            res_q <= relu_word(prec, z_in);
            st    <= S_DONE;
          end else if (af == AF_SOFTMAX) begin
            res_q <= '0;
            st    <= S_DONE;
          end else                 st <= S_HYP;
        end
        S_HYP: begin
          x <= xo;
          y <= yo;
          z <= zo;
          k <= k + 5'd1;
          if (int'(k) == hyp_iters(p_q) - 1) st <= S_GLUE;
        end
        S_GLUE: begin
          if (af_q == AF_SIGMOID) begin
            x <= ex1;
            y <= ex;
          end
          z <= '0;
          k <= '0;
          st <= S_LIN;
        end
        S_LIN: begin
          x <= xo;
          y <= yo;
          z <= zo;
          k <= k + 5'd1;
          if (int'(k) == lin_iters(p_q) - 1) begin
            res_q <= (op_q == OP_MAC) ? yo : zo;
            st    <= S_DONE;
          end
        end
        default: st <= S_IDLE;   // S_DONE
      endcase
    end
  end

  a_no_softmax: assert property (@(posedge clk) disable iff (!rst_n)
    !(start && ready && op == OP_AF && af == AF_SOFTMAX));

endmodule
