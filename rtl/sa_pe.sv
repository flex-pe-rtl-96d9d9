// sa_pe: processing engine of the SIMD systolic array.
//
// The PE of the paper's Fig. 1(b): a weight buffer and an input-feature
// buffer that forward their words to the next PE, a multiply-add that
// updates the accumulate register, and an activation function on the
// result. Here the multiply-add and the activation are one iterative Flex-PE
// (CORDIC linear rotation for MAC, hyperbolic + linear vectoring for the
// AF), as the paper proposes for the area-efficient systolic array.
// The array is output stationary: each PE keeps its own sum.
//
// Controls (from the control engine, all PEs at once):
//   clear  zero the accumulator
//   step   latch w_in / x_in into the buffers; when w_vin is set also start
//          acc += x_in * w_in (x in data format, w in angle format)
//   act    start the activation on the accumulator; its input is 2*acc,
//          i.e. the accumulator re-read in angle format
// busy stays high while the Flex-PE iterates; the next step or act must
// wait for it to fall. act_out holds the last activation result (angle
// format), acc the raw sum (data format). Each 32-bit word holds 8/4/2/1
// SIMD lanes that are computed independently.
//
// Lint note: rst_n is both the asynchronous reset and the assertions'
// disable-iff condition, which the linter reports as a mixed use.
module sa_pe
  import flexpe_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  prec_e  prec,
  input  af_e    af,
  input  logic   rne,
  input  logic   clear,
  input  logic   step,
  input  logic   act,
  input  word_t  w_in,
  input  logic   w_vin,
  input  word_t  x_in,
  output word_t  w_out,
  output logic   w_vout,
  output word_t  x_out,
  output word_t  acc,
  output word_t  act_out,
  output logic   busy
);

  logic   ready, done, mac_q, start;
  word_t  result, acc2, cx, cy, cz;
  op_e    cop;

  simd_addsub u_dbl (.prec, .a(acc), .b(acc), .sub('0), .sum(acc2));

  assign start = (step && w_vin) || act;
  always_comb begin
    if (act) begin
      cop = OP_AF;
      cx  = x0_word(prec);
      cy  = '0;
      cz  = acc2;
    end else begin
      cop = OP_MAC;
      cx  = x_in;
      cy  = acc;
      cz  = w_in;
    end
  end

  flex_pe_iter u_core (
    .clk, .rst_n, .start, .prec, .op(cop), .af, .rne,
    .x_in(cx), .y_in(cy), .z_in(cz), .ready, .done, .result
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_out   <= '0;
      w_vout  <= 1'b0;
      x_out   <= '0;
      acc     <= '0;
      act_out <= '0;
      mac_q   <= 1'b0;
    end else begin
      if (step) begin
        w_out  <= w_in;
        w_vout <= w_vin;
        x_out  <= x_in;
      end
      if (start) mac_q <= !act;
      if (clear) acc <= '0;
      else if (done && mac_q) acc <= result;
      if (done && !mac_q) act_out <= result;
    end
  end

  assign busy = !ready || done;

  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready);

endmodule
