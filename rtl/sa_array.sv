// sa_array: ROWS x COLS mesh of sa_pe processing engines.
//
// Weights enter at the left edge, one stream per row, and move one PE to
// the right per step; input features enter at the bottom edge, one stream
// per column, and move one PE up per step (arrows of the paper's Fig. 1(b)).
// With row r's weights delayed by r steps and column c's inputs by c steps
// at the edges, PE(r,c) accumulates sum_k W[r][k] * X[k][c]. A valid bit
// travels with each weight so that padding steps do no MAC: a CORDIC
// multiply by zero is not exactly zero. All PEs share the control strobes
// and the precision/AF settings; busy is the OR of the PEs' busy flags.
// Results are read in parallel from every PE (acc and act_out).
//
// Lint note: rst_n is passed to the PEs, where it is both the asynchronous
// reset and the assertions' disable-iff condition (reported as a mixed use).
module sa_array
  import flexpe_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  prec_e  prec,
  input  af_e    af,
  input  logic   rne,
  input  logic   clear,
  input  logic   step,
  input  logic   act,
  input  word_t  w_left   [ROWS],
  input  logic   wv_left  [ROWS],
  input  word_t  x_bottom [COLS],
  output word_t  acc      [ROWS][COLS],
  output word_t  act_out  [ROWS][COLS],
  output logic   busy
);

  word_t w_o  [ROWS][COLS];
  logic  wv_o [ROWS][COLS];
  word_t x_o  [ROWS][COLS];
  logic  b    [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      word_t wi, xi;
      logic  wvi;
      if (c == 0) begin : g_wl
        assign wi = w_left[r];
        assign wvi = wv_left[r];
      end else begin : g_wn
        assign wi = w_o[r][c-1];
        assign wvi = wv_o[r][c-1];
      end
      if (r == 0) begin : g_xb
        assign xi = x_bottom[c];
      end else begin : g_xn
        assign xi = x_o[r-1][c];
      end
      sa_pe u_pe (
        .clk, .rst_n, .prec, .af, .rne, .clear, .step, .act,
        .w_in(wi), .w_vin(wvi), .x_in(xi),
        .w_out(w_o[r][c]), .w_vout(wv_o[r][c]), .x_out(x_o[r][c]),
        .acc(acc[r][c]), .act_out(act_out[r][c]), .busy(b[r][c])
      );
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        busy |= b[r][c];
  end

endmodule
