// flexpe_accel: SIMD multi-precision systolic accelerator built on Flex-PE.
//
// Top level of the accelerator of the paper's Fig. 1(b): a ROWS x COLS
// output-stationary systolic array of iterative Flex-PE engines, the
// multi-addressable weight memory (one bank per array row), the input-
// feature memory (one bank per column), the output memory (one bank per
// row), the control engine, and a pipelined Flex-PE that computes softmax
// over the rows of a result. Every array word is a 32-bit SIMD word:
// 8x4, 4x8, 2x16 or 1x32-bit lanes chosen at run time.
//
// Host port: a plain word-addressed register/memory port standing in for
// the AXI slave through which the paper's RISC-V host and DMA reach the
// accelerator (that host, its AXI interconnect and DMA are not part of this
// RTL). Writes take effect on the clock edge; host_rdata is registered and
// valid the cycle after the address. Address map (host_addr[15:12]):
//   0x0  control engine registers (see sa_ctrl)
//   0x1  weight memory   W[r][k] at r*KMAX + k
//   0x2  input memory    X[k][c] at c*KMAX + k
//   0x3  output memory   OUT[r][c] at r*COLS + c (read only)
// irq pulses when a run ends.
//
// Lint notes: rst_n is both the asynchronous reset and the assertions'
// disable-iff condition, which the linter reports as a mixed use. The pipelined
// Flex-PE's fifo_full and tm_active outputs are observation points for
// simulation and are not mapped into a register.
module flexpe_accel
  import flexpe_pkg::*;
#(
  parameter int unsigned ROWS       = 8,
  parameter int unsigned COLS       = 8,
  parameter int unsigned KMAX       = 64,
  parameter int unsigned HYP_STAGES = 8,
  parameter int unsigned LIN_STAGES = 10,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         host_we,
  input  logic [15:0]  host_addr,
  input  logic [31:0]  host_wdata,
  output logic [31:0]  host_rdata,
  output logic         irq
);

  localparam int unsigned KW = $clog2(KMAX);
  localparam int unsigned CW = $clog2(COLS);

  logic [3:0]  region;
  logic [11:0] off;
  assign region = host_addr[15:12];
  assign off    = host_addr[11:0];

  // ---------------------------------------------------------- memories
  logic [KW-1:0] w_raddr [ROWS];
  word_t         w_rdata [ROWS];
  logic [KW-1:0] x_raddr [COLS];
  word_t         x_rdata [COLS];
  logic          o_we    [ROWS];
  logic [CW-1:0] o_waddr [ROWS];
  word_t         o_wdata [ROWS];
  word_t         o_rdata [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_wmem
    simd_mem #(.DEPTH(KMAX)) u_w (
      .clk, .we(host_we && region == 4'h1 && int'(off) / KMAX == r),
      .waddr(KW'(off % KMAX)), .wdata(host_wdata),
      .raddr(w_raddr[r]), .rdata(w_rdata[r])
    );
    simd_mem #(.DEPTH(COLS)) u_o (
      .clk, .we(o_we[r]), .waddr(o_waddr[r]), .wdata(o_wdata[r]),
      .raddr(CW'(off % COLS)), .rdata(o_rdata[r])
    );
  end
  for (genvar c = 0; c < COLS; c++) begin : g_xmem
    simd_mem #(.DEPTH(KMAX)) u_x (
      .clk, .we(host_we && region == 4'h2 && int'(off) / KMAX == c),
      .waddr(KW'(off % KMAX)), .wdata(host_wdata),
      .raddr(x_raddr[c]), .rdata(x_rdata[c])
    );
  end

  // ------------------------------------------------------ control engine
  prec_e    prec;
  af_e      af;
  logic     rne, clear, step, act, arr_busy, pe_busy, pe_full, pe_tm;
  word_t    w_left [ROWS];
  logic     wv_left [ROWS];
  word_t    x_bottom [COLS];
  word_t    acc [ROWS][COLS];
  word_t    act_out [ROWS][COLS];
  pe_cfg_t  pe_cfg;
  logic     pe_valid [2], pe_out_valid [2];
  word_t    pe_x [2], pe_y [2], pe_z [2], pe_out_data [2];
  word_t    reg_rdata;
  logic     done_now;

  sa_ctrl #(.ROWS(ROWS), .COLS(COLS), .KMAX(KMAX)) u_ctrl (
    .clk, .rst_n,
    .reg_we(host_we && region == 4'h0), .reg_addr(off[2:0]), .reg_wdata(host_wdata),
    .reg_rdata, .run_done(done_now),
    .w_raddr, .w_rdata, .x_raddr, .x_rdata, .o_we, .o_waddr, .o_wdata,
    .prec, .af, .rne, .clear, .step, .act, .w_left, .wv_left, .x_bottom,
    .acc, .act_out, .arr_busy,
    .pe_cfg, .pe_valid, .pe_x, .pe_y, .pe_z, .pe_out_valid, .pe_out_data, .pe_busy
  );

  // ------------------------------------------------------- systolic array
  sa_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .prec, .af, .rne, .clear, .step, .act,
    .w_left, .wv_left, .x_bottom, .acc, .act_out, .busy(arr_busy)
  );

  // --------------------------------------------- pipelined Flex-PE (softmax)
  flex_pe_pipe #(.HYP_STAGES(HYP_STAGES), .LIN_STAGES(LIN_STAGES), .FIFO_DEPTH(FIFO_DEPTH)) u_pipe (
    .clk, .rst_n, .cfg(pe_cfg), .in_valid(pe_valid), .in_x(pe_x), .in_y(pe_y), .in_z(pe_z),
    .out_valid(pe_out_valid), .out_data(pe_out_data), .busy(pe_busy),
    .fifo_full(pe_full), .tm_active(pe_tm)
  );

  // ------------------------------------------------------------ host read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rdata <= '0;
    end else begin
      case (region)
        4'h0:    host_rdata <= reg_rdata;
        4'h3:    host_rdata <= o_rdata[(int'(off) / COLS) % ROWS];
        default: host_rdata <= '0;
      endcase
    end
  end

  // irq: rising edge of the done flag
  logic done_prev;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_prev <= 1'b0;
    else        done_prev <= done_now;
  end
  assign irq = done_now && !done_prev;

endmodule
