// sa_ctrl: control engine of the SIMD systolic accelerator.
//
// Holds the configuration and status registers, runs the FSM that sequences
// a layer, generates the memory addresses and drives the control strobes
// of the array and of the pipelined Flex-PE (the "Control Engine" of the
// paper's Fig. 1(b): configuration registers, status registers, FSM
// controller, address generation scheme, control signals). The paper names
// these parts only; the sequence below is this design's own.
//
// One run computes OUT[r][c] = AF( sum_k W[r][k] * X[k][c] ), k < klen:
//   CLEAR  zero all accumulators
//   BEAT   klen+ROWS+COLS-2 steps; at step t row r reads W[r][t-r] and
//          column c reads X[t-c][c] (skewed feed), then waits for the PEs
//   ACT    sigmoid / tanh / ReLU inside every PE (if enabled)
//   OUT    copy results to the output memory, one word per cycle
//   SOFT   softmax over each output row with the pipelined Flex-PE: pass 0
//          streams the row's COLS sums, pass 1 streams them again and the
//          quotients are written back. Below 32 bits two rows run at once,
//          one per time-multiplexed group.
// Register map (word addresses, reg_addr):
//   0 CTRL    write 1 to bit 0: start
//   1 CFG     [1:0] prec, [3:2] af, [4] af_en, [9:5] sm_shift, [10] rne
//   2 KLEN    number of products per output (1..KMAX)
//   3 STATUS  [0] busy, [1] done (read only)
//   4 CYCLES  clock cycles of the last run (read only)
//
// Lint note: only CFG bits [10:0] are defined; the upper write-data bits
// are reserved and ignored.
module sa_ctrl
  import flexpe_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8,
  parameter int unsigned KMAX = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  // register port
  input  logic        reg_we,
  input  logic [2:0]  reg_addr,
  input  word_t       reg_wdata,
  output word_t       reg_rdata,
  output logic        run_done,
  // memory reads (address generation)
  output logic [$clog2(KMAX)-1:0] w_raddr [ROWS],
  input  word_t                   w_rdata [ROWS],
  output logic [$clog2(KMAX)-1:0] x_raddr [COLS],
  input  word_t                   x_rdata [COLS],
  // output memory writes, one bank per row
  output logic                    o_we    [ROWS],
  output logic [$clog2(COLS)-1:0] o_waddr [ROWS],
  output word_t                   o_wdata [ROWS],
  // systolic array
  output prec_e  prec,
  output af_e    af,
  output logic   rne,
  output logic   clear,
  output logic   step,
  output logic   act,
  output word_t  w_left   [ROWS],
  output logic   wv_left  [ROWS],
  output word_t  x_bottom [COLS],
  input  word_t  acc      [ROWS][COLS],
  input  word_t  act_out  [ROWS][COLS],
  input  logic   arr_busy,
  // pipelined Flex-PE
  output pe_cfg_t  pe_cfg,
  output logic     pe_valid [2],
  output word_t    pe_x     [2],
  output word_t    pe_y     [2],
  output word_t    pe_z     [2],
  input  logic     pe_out_valid [2],
  input  word_t    pe_out_data  [2],
  input  logic     pe_busy
);

  localparam int unsigned KW = $clog2(KMAX);
  localparam int unsigned CW = $clog2(COLS);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;

  typedef struct packed {
    logic        rne;
    logic [4:0]  sm_shift;
    logic        af_en;
    af_e         af;
    prec_e       prec;
  } cfg_reg_t;

  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_BEAT, S_BWAIT, S_ACT, S_AWAIT, S_OUT, S_SOFT, S_SDRAIN, S_DONE
  } state_e;

  state_e     st;
  cfg_reg_t   cfg;
  logic [KW:0] klen;
  logic       done_q;
  word_t      cycles, cyc_run;
  int unsigned t;          // beat counter
  int unsigned oi;         // output index / softmax token index
  logic [RW:0] r0;         // first row of a softmax sweep
  logic [CW:0] cnt [2];    // softmax results received per group
  logic       tm;

  assign run_done = done_q;
  assign prec = cfg.prec;
  assign af   = cfg.af;
  assign rne  = cfg.rne;
  assign tm   = (cfg.prec != PREC32);

  // ------------------------------------------------------------ registers
  always_comb begin
    case (reg_addr)
      3'd1:    reg_rdata = word_t'(cfg);
      3'd2:    reg_rdata = word_t'(klen);
      3'd3:    reg_rdata = {30'd0, done_q, st != S_IDLE && st != S_DONE};
      3'd4:    reg_rdata = cycles;
      default: reg_rdata = '0;
    endcase
  end

  // ------------------------------------------------- address generation
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      w_raddr[r] = KW'(t - r);
      wv_left[r] = (t >= r) && (t - r < klen) && (st == S_BEAT);
      w_left[r]  = wv_left[r] ? w_rdata[r] : '0;
    end
    for (int c = 0; c < COLS; c++) begin
      x_raddr[c]  = KW'(t - c);
      x_bottom[c] = ((t >= c) && (t - c < klen)) ? x_rdata[c] : '0;
    end
  end

  assign clear = (st == S_CLEAR);
  assign step  = (st == S_BEAT);
  assign act   = (st == S_ACT);

  // ------------------------------------------------ output memory writes
  word_t sm_in [2];
  for (genvar g = 0; g < 2; g++) begin : g_dbl
    // softmax input: the row's sum re-read in angle format (2x)
    word_t a;
    always_comb begin
      int unsigned rr;
      rr = int'(r0) + g;
      if (rr >= ROWS) rr = ROWS - 1;
      a = acc[rr][oi % COLS];
    end
    simd_addsub u_dbl (.prec(cfg.prec), .a, .b(a), .sub('0), .sum(sm_in[g]));
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      o_we[r]    = 1'b0;
      o_waddr[r] = CW'(oi % COLS);
      o_wdata[r] = '0;
      if (st == S_OUT && (oi / COLS) == r) begin
        o_we[r]    = 1'b1;
        o_wdata[r] = (cfg.af_en && cfg.af != AF_SOFTMAX) ? act_out[r][oi % COLS] : acc[r][oi % COLS];
      end
    end
    // softmax results: group 0 -> row r0 (narrow) ; group 1 -> row r0 (32-bit) or r0+1
    for (int r = 0; r < ROWS; r++) begin
      if (pe_out_valid[0] && tm && r == int'(r0)) begin
        o_we[r]    = 1'b1;
        o_waddr[r] = CW'(cnt[0]);
        o_wdata[r] = pe_out_data[0];
      end
      if (pe_out_valid[1] && r == int'(r0) + (tm ? 1 : 0)) begin
        o_we[r]    = 1'b1;
        o_waddr[r] = CW'(cnt[1]);
        o_wdata[r] = pe_out_data[1];
      end
    end
  end

  // ------------------------------------------- pipelined Flex-PE stream
  always_comb begin
    pe_cfg.prec     = cfg.prec;
    pe_cfg.op       = OP_AF;
    pe_cfg.af       = AF_SOFTMAX;
    pe_cfg.sm_phase = (oi >= COLS);
    pe_cfg.sm_first = (oi == 0);
    pe_cfg.sm_shift = cfg.sm_shift;
    pe_cfg.rne      = cfg.rne;
    for (int g = 0; g < 2; g++) begin
      pe_x[g] = x0_word(cfg.prec);
      pe_y[g] = '0;
      pe_z[g] = sm_in[g];
    end
    pe_valid[0] = (st == S_SOFT);
    pe_valid[1] = (st == S_SOFT) && tm;
  end

  // ------------------------------------------------------------------ FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cfg     <= '0;
      klen    <= (KW+1)'(1);
      done_q  <= 1'b0;
      cycles  <= '0;
      cyc_run <= '0;
      t       <= 0;
      oi      <= 0;
      r0      <= '0;
      cnt[0]  <= '0;
      cnt[1]  <= '0;
    end else begin
      if (st != S_IDLE && st != S_DONE) cyc_run <= cyc_run + 1;
      if (pe_out_valid[0] && tm) cnt[0] <= cnt[0] + 1'b1;
      if (pe_out_valid[1])       cnt[1] <= cnt[1] + 1'b1;
      case (st)
        S_IDLE, S_DONE: begin
          if (reg_we && reg_addr == 3'd1) cfg  <= cfg_reg_t'(reg_wdata[10:0]);
          if (reg_we && reg_addr == 3'd2) klen <= reg_wdata[KW:0];
          if (reg_we && reg_addr == 3'd0 && reg_wdata[0]) begin
            st      <= S_CLEAR;
            done_q  <= 1'b0;
            cyc_run <= '0;
          end
        end
        S_CLEAR: begin
          t  <= 0;
          st <= S_BEAT;
        end
        S_BEAT:  st <= S_BWAIT;
        S_BWAIT: if (!arr_busy) begin
          if (t + 1 == int'(klen) + ROWS + COLS - 2) begin
            st <= (cfg.af_en && cfg.af != AF_SOFTMAX) ? S_ACT : S_OUT;
            oi <= 0;
          end else begin
            t  <= t + 1;
            st <= S_BEAT;
          end
        end
        S_ACT:   st <= S_AWAIT;
        S_AWAIT: if (!arr_busy) st <= S_OUT;
        S_OUT: begin
          if (oi == ROWS * COLS - 1) begin
            oi <= 0;
            r0 <= '0;
            cnt[0] <= '0;
            cnt[1] <= '0;
            st <= (cfg.af_en && cfg.af == AF_SOFTMAX) ? S_SOFT : S_DONE;
          end else oi <= oi + 1;
        end
        S_SOFT: begin
          if (oi == 2 * COLS - 1) st <= S_SDRAIN;
          oi <= oi + 1;
        end
        S_SDRAIN: if (!pe_busy) begin
          oi     <= 0;
          cnt[0] <= '0;
          cnt[1] <= '0;
          if (int'(r0) + (tm ? 2 : 1) >= ROWS) st <= S_DONE;
          else begin
            r0 <= r0 + (tm ? 2 : 1);
            st <= S_SOFT;
          end
        end
        default: st <= S_IDLE;
      endcase
      if ((st == S_OUT && oi == ROWS * COLS - 1 && !(cfg.af_en && cfg.af == AF_SOFTMAX)) ||
          (st == S_SDRAIN && !pe_busy && int'(r0) + (tm ? 2 : 1) >= ROWS)) begin
        done_q <= 1'b1;
        cycles <= cyc_run + 1;
      end
    end
  end

endmodule
