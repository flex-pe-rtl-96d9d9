// exp_fifo: the FIFO that holds e^x values between the two softmax passes.
//
// Synchronous first-in first-out buffer of 32-bit SIMD words (the "FIFO" of
// the paper's Fig. 4(a), drawn as e^x1 ... e^xn). During the first softmax
// pass every exponential is pushed; during the second pass they are popped
// in the same order as numerators while the accumulated sum is the
// denominator. The paper gives no depth; DEPTH bounds the softmax vector
// length. pop data is valid in the same cycle as pop (show-ahead).
// Pushing when full or popping when empty is an error and is asserted.
//
// Lint note: rst_n is both the asynchronous reset and the assertions'
// disable-iff condition, which the linter may report as a mixed use.
module exp_fifo
  import flexpe_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  word_t  wdata,
  input  logic   pop,
  output word_t  rdata,
  output logic   empty,
  output logic   full
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t             mem [DEPTH];
  logic [AW-1:0]     wp, rp;
  logic [AW:0]       count;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign rdata = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wdata;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
