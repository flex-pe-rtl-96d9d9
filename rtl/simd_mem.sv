// simd_mem: one bank of on-chip SIMD word memory.
//
// DEPTH x 32-bit storage with one synchronous write port and one
// asynchronous read port, written as an array so that synthesis may map it
// to block RAM or registers. The accelerator builds its weight, input-
// feature and output memories from banks of this kind (one bank per array
// row or column, so that every row and column is addressed on its own).
// No reset: contents are undefined until written. The per-row and
// per-column banking follows the multi-addressable memories of the source
// SoC diagram; the depth (64 words for weights and inputs) and the port
// arrangement are this design's own choices.
module simd_mem
  import flexpe_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  word_t                     wdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output word_t                     rdata
);

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
