// flex_pe_pipe: pipelined SIMD Flex-PE (configurable AF and MAC).
//
// The pipelined form of the paper's Flex-PE (Fig. 4): a chain of HYP_STAGES
// hyperbolic CORDIC stages, the af_select glue (e^x adders, Num/Denom muxes,
// exponential FIFO), and a chain of LIN_STAGES linear CORDIC stages, every
// stage followed by a register. One 32-bit SIMD word enters per cycle and
// per input group. Functions (sel_af / ctrl_op):
//   tanh    sinh/cosh                 sigmoid  e^x/(1+e^x)
//   softmax e^xi / sum e^xj (2 passes) ReLU     max(0, z) per lane
//   MAC     y + x*z (linear rotation; hyperbolic stages pass)
// AF inputs follow the paper's Fig. 4(a): X0 = 1/Kh, Y0 = 0, Z0 = x.
// AF results are in angle format, MAC results in data format (flexpe_pkg).
//
// Time multiplexing: at 32 bits a word uses all 8 hyperbolic and 10 linear
// stages (iterations 1,2,3,4,4,5,6,7 and 1..10). At 4, 8 and 16 bits only
// 4 hyperbolic and 5 linear iterations are needed, so each chain is cut in
// two halves ("{5,4} | {5,4}" in Fig. 4(b)): group 0 uses the first halves,
// group 1 enters at the middle of each chain, and both groups run in
// parallel, giving 2x8x4, 2x4x8 and 2x2x16 results per cycle. Muxes at the
// middle of each chain select the through path for a 32-bit token and the
// group-1 entry otherwise; each half has its own af_select (FIFO and sum).
// ReLU tokens carry their result in Z through stages set to pass, which is
// the paper's ReLU buffer path.
//
// Latency: 18 cycles at 32 bits (result on out_valid[1]); 9 cycles for both
// groups otherwise (group 0 on out_valid[0], group 1 on out_valid[1]).
// 32-bit and narrower tokens must not share the pipeline: drain it (busy
// low) before switching between the two; an assertion checks this.
//
// Lint notes: the FIFO-empty flags of the two af_select instances are
// not needed (only the full flags are reported out), and rst_n is seen
// both as the asynchronous flop reset and in the assertions' disable iff.
module flex_pe_pipe
  import flexpe_pkg::*;
#(
  parameter int unsigned HYP_STAGES = 8,
  parameter int unsigned LIN_STAGES = 10,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_cfg_t  cfg,
  input  logic     in_valid [2],
  input  word_t    in_x     [2],
  input  word_t    in_y     [2],
  input  word_t    in_z     [2],
  output logic     out_valid [2],
  output word_t    out_data  [2],
  output logic     busy,
  output logic     fifo_full,
  output logic     tm_active   // a time-multiplexed (two-group) token is in flight
);

  localparam int unsigned HH = HYP_STAGES / 2;
  localparam int unsigned LH = LIN_STAGES / 2;

  // ---------------------------------------------------------------- input
  // ReLU: the DeMUX sends Z0 to the "0 / Z0" mux driven by each lane's sign.
  pe_tag_t in_tag [2];
  word_t   in_zr  [2];
  always_comb begin
    for (int g = 0; g < 2; g++) begin
      in_tag[g].valid = in_valid[g] && (g == 0 || cfg.prec != PREC32);
      in_tag[g].drop  = 1'b0;
      in_tag[g].cfg   = cfg;
      in_zr[g] = (cfg.op == OP_AF && cfg.af == AF_RELU) ? relu_word(cfg.prec, in_z[g]) : in_z[g];
    end
  end

  // ------------------------------------------------------ hyperbolic chain
  pe_tag_t ht [HYP_STAGES];
  word_t   hx [HYP_STAGES], hy [HYP_STAGES], hz [HYP_STAGES];

  for (genvar k = 0; k < HYP_STAGES; k++) begin : g_hyp
    pe_tag_t ti;
    word_t   xi, yi, zi, xo, yo, zo;
    cmode_e  md;
    logic [4:0] it;
    if (k == 0) begin : g_in0
      assign ti = in_tag[0];
      assign xi = in_x[0];
      assign yi = in_y[0];
      assign zi = in_zr[0];
    end else if (k == HH) begin : g_mid
      // Through path for a 32-bit token, group-1 entry otherwise.
      logic thru;
      assign thru = ht[k-1].valid && ht[k-1].cfg.prec == PREC32;
      assign ti = thru ? ht[k-1] : in_tag[1];
      assign xi = thru ? hx[k-1] : in_x[1];
      assign yi = thru ? hy[k-1] : in_y[1];
      assign zi = thru ? hz[k-1] : in_zr[1];
    end else begin : g_chain
      assign ti = ht[k-1];
      assign xi = hx[k-1];
      assign yi = hy[k-1];
      assign zi = hz[k-1];
    end
    assign it = (ti.cfg.prec == PREC32) ? hyp_shift(k) : hyp_shift(k % HH);
    assign md = (ti.valid && ti.cfg.op == OP_AF && ti.cfg.af != AF_RELU &&
                 !(ti.cfg.af == AF_SOFTMAX && ti.cfg.sm_phase)) ? CM_HYP_ROT : CM_PASS;
    cordic_stage u_st (.prec(ti.cfg.prec), .mode(md), .iter(it), .rne(ti.cfg.rne),
                       .x_in(xi), .y_in(yi), .z_in(zi), .x_out(xo), .y_out(yo), .z_out(zo));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ht[k] <= '0;
      else        ht[k] <= ti;
    end
    always_ff @(posedge clk) begin
      hx[k] <= xo;
      hy[k] <= yo;
      hz[k] <= zo;
    end
  end

  // -------------------------------------------------------- AF glue (x2)
  // Tap 0: end of the first hyperbolic half (group 0, narrow precisions).
  // Tap 1: end of the chain (32-bit tokens and group 1).
  pe_tag_t tap_t [2];
  word_t   tap_x [2], tap_y [2], tap_z [2];
  word_t   ax [2], ay [2], az [2];
  cmode_e  am [2];
  logic    adrop [2], afull [2], aempty [2];

  always_comb begin
    tap_t[0] = ht[HH-1];
    tap_t[0].valid = ht[HH-1].valid && ht[HH-1].cfg.prec != PREC32;
    tap_x[0] = hx[HH-1]; tap_y[0] = hy[HH-1]; tap_z[0] = hz[HH-1];
    tap_t[1] = ht[HYP_STAGES-1];
    tap_x[1] = hx[HYP_STAGES-1]; tap_y[1] = hy[HYP_STAGES-1]; tap_z[1] = hz[HYP_STAGES-1];
  end

  for (genvar g = 0; g < 2; g++) begin : g_af
    af_select #(.FIFO_DEPTH(FIFO_DEPTH)) u_af (
      .clk, .rst_n, .valid(tap_t[g].valid),
      .prec(tap_t[g].cfg.prec), .op(tap_t[g].cfg.op), .af(tap_t[g].cfg.af),
      .sm_phase(tap_t[g].cfg.sm_phase), .sm_first(tap_t[g].cfg.sm_first),
      .sm_shift(tap_t[g].cfg.sm_shift),
      .hx(tap_x[g]), .hy(tap_y[g]), .hz(tap_z[g]),
      .lin_x(ax[g]), .lin_y(ay[g]), .lin_z(az[g]), .lin_mode(am[g]),
      .drop(adrop[g]), .fifo_empty(aempty[g]), .fifo_full(afull[g])
    );
  end
  assign fifo_full = afull[0] | afull[1];

  // ---------------------------------------------------------- linear chain
  pe_tag_t lt [LIN_STAGES];
  cmode_e  lm [LIN_STAGES];
  word_t   lx [LIN_STAGES], ly [LIN_STAGES], lz [LIN_STAGES];

  for (genvar k = 0; k < LIN_STAGES; k++) begin : g_lin
    pe_tag_t ti;
    cmode_e  mi;
    word_t   xi, yi, zi, xo, yo, zo;
    logic [4:0] it;
    if (k == 0) begin : g_in0
      // Group 0 (narrow) from tap 0, or a 32-bit token from tap 1.
      logic wide;
      assign wide = tap_t[1].valid && tap_t[1].cfg.prec == PREC32;
      always_comb begin
        ti = wide ? tap_t[1] : tap_t[0];
        ti.drop = wide ? adrop[1] : adrop[0];
      end
      assign mi = wide ? am[1] : am[0];
      assign xi = wide ? ax[1] : ax[0];
      assign yi = wide ? ay[1] : ay[0];
      assign zi = wide ? az[1] : az[0];
    end else if (k == LH) begin : g_mid
      logic thru;
      assign thru = lt[k-1].valid && lt[k-1].cfg.prec == PREC32;
      always_comb begin
        ti = thru ? lt[k-1] : tap_t[1];
        if (!thru) begin
          ti.valid = tap_t[1].valid && tap_t[1].cfg.prec != PREC32;
          ti.drop  = adrop[1];
        end
      end
      assign mi = thru ? lm[k-1] : am[1];
      assign xi = thru ? lx[k-1] : ax[1];
      assign yi = thru ? ly[k-1] : ay[1];
      assign zi = thru ? lz[k-1] : az[1];
    end else begin : g_chain
      assign ti = lt[k-1];
      assign mi = lm[k-1];
      assign xi = lx[k-1];
      assign yi = ly[k-1];
      assign zi = lz[k-1];
    end
    assign it = (ti.cfg.prec == PREC32) ? 5'(k + 1) : 5'((k % LH) + 1);
    cordic_stage u_st (.prec(ti.cfg.prec), .mode(ti.valid ? mi : CM_PASS), .iter(it),
                       .rne(ti.cfg.rne), .x_in(xi), .y_in(yi), .z_in(zi),
                       .x_out(xo), .y_out(yo), .z_out(zo));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) lt[k] <= '0;
      else        lt[k] <= ti;
    end
    always_ff @(posedge clk) begin
      lm[k] <= mi;
      lx[k] <= xo;
      ly[k] <= yo;
      lz[k] <= zo;
    end
  end

  // ---------------------------------------------------------------- output
  pe_tag_t ot [2];
  word_t   oy [2], oz [2];
  always_comb begin
    ot[0] = lt[LH-1];
    ot[0].valid = lt[LH-1].valid && lt[LH-1].cfg.prec != PREC32;
    oy[0] = ly[LH-1];
    oz[0] = lz[LH-1];
    ot[1] = lt[LIN_STAGES-1];
    oy[1] = ly[LIN_STAGES-1];
    oz[1] = lz[LIN_STAGES-1];
    for (int g = 0; g < 2; g++) begin
      out_valid[g] = ot[g].valid && !ot[g].drop;
      out_data[g]  = (ot[g].cfg.op == OP_MAC) ? oy[g] : oz[g];
    end
  end

  always_comb begin
    busy = 1'b0;
    tm_active = 1'b0;
    for (int k = 0; k < HYP_STAGES; k++) begin
      busy |= ht[k].valid;
      tm_active |= ht[k].valid && ht[k].cfg.prec != PREC32;
    end
    for (int k = 0; k < LIN_STAGES; k++) begin
      busy |= lt[k].valid;
      tm_active |= lt[k].valid && lt[k].cfg.prec != PREC32;
    end
  end

  // A 32-bit token at a chain middle must not meet a group-1 entry.
  a_no_mix_hyp: assert property (@(posedge clk) disable iff (!rst_n)
    !(ht[HH-1].valid && ht[HH-1].cfg.prec == PREC32 && in_tag[1].valid));
  a_no_mix_lin: assert property (@(posedge clk) disable iff (!rst_n)
    !(tap_t[1].valid && tap_t[1].cfg.prec == PREC32 && tap_t[0].valid));

endmodule
