// tb_flexpe_accel: end-to-end test of the accelerator at its default size
// (8x8 array, 64-word memory banks, 8+10 pipelined CORDIC stages).
// Through the host port it loads W (8xK) and X (Kx8), configures a layer,
// starts it, waits for irq and reads the 8x8 output memory. Layers:
// sigmoid/16-bit, tanh/32-bit, ReLU/8-bit, plain MAC/16-bit, softmax/8-bit
// (two rows at a time in the time-multiplexed pipeline), softmax/32-bit,
// sigmoid/4-bit. Every lane of every output is compared with a real-valued
// reference computed from the same integer inputs. The testbench counts
// how often each mechanism occurred (MAC steps, in-PE activations, each AF,
// softmax passes, time-multiplexed pipeline use, 32-bit pipeline use,
// precision switches, irq) and counts a failure for any that never did.
module tb_flexpe_accel;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  localparam int R = 8, C = 8, KMAX = 64;
  logic clk = 0, rst_n = 0, host_we, irq;
  logic [15:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  int checks = 0, failures = 0;
  word_t W [R][KMAX], X [KMAX][C];

  // mechanism counters
  int n_mac_steps = 0, n_act = 0, n_relu = 0, n_sig = 0, n_tanh = 0, n_soft_tok = 0,
      n_tm_cycles = 0, n_wide_cycles = 0, n_prec_switch = 0, n_irq = 0, n_mac_only = 0;

  flexpe_accel dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dut.step) n_mac_steps++;
    if (dut.act) n_act++;
    if (dut.u_pipe.tm_active) n_tm_cycles++;
    if (dut.u_pipe.busy && !dut.u_pipe.tm_active) n_wide_cycles++;
    if (dut.pe_valid[0]) n_soft_tok++;
    if (irq) n_irq++;
  end

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk);
    host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    host_addr = a;
    @(negedge clk);
    d = host_rdata;
  endtask

  function automatic real tol(int p, int f);
    if (f == 4) return (p == 1) ? 0.12 : 0.05;
    case (p)
      0: return 1.0;
      1: return 0.2;
      2: return 0.1;
      default: return 0.02;
    endcase
  endfunction

  // f: 0 relu 1 sigmoid 2 tanh 3 none (MAC only) 4 softmax
  task automatic layer(int p, int f, int K);
    int n, cyc, t0;
    logic [31:0] d, cfgw;
    real ref_v [R][C][8];
    static int last_p = -1;
    n = nbits(p);
    if (last_p != -1 && last_p != p) n_prec_switch++;
    last_p = p;
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) begin
      for (int l = 0; l < 32 / n; l++)
        W[r][k] = lane_set(W[r][k], n, l, from_real(($urandom % 1601) / 1000.0 - 0.8, n, n - 2));
      wr(16'h1000 + 16'(r * KMAX + k), W[r][k]);
    end
    for (int c = 0; c < C; c++) for (int k = 0; k < K; k++) begin
      for (int l = 0; l < 32 / n; l++)
        X[k][c] = lane_set(X[k][c], n, l, from_real(($urandom % 801) / 2000.0 - 0.2, n, n - 3));
      wr(16'h2000 + 16'(c * KMAX + k), X[k][c]);
    end
    // reference
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int l = 0; l < 32 / n; l++) begin
      real s;
      s = 0.0;
      for (int k = 0; k < K; k++)
        s += to_real(lane_get(W[r][k], n, l), n - 2) * to_real(lane_get(X[k][c], n, l), n - 3);
      case (f)
        0: ref_v[r][c][l] = (s > 0.0) ? s : 0.0;
        1: ref_v[r][c][l] = sigmoid(s);
        2: ref_v[r][c][l] = tanh_r(s);
        default: ref_v[r][c][l] = s;
      endcase
    end
    if (f == 4)
      for (int r = 0; r < R; r++) for (int l = 0; l < 32 / n; l++) begin
        real sum;
        sum = 0.0;
        for (int c = 0; c < C; c++) sum += $exp(ref_v[r][c][l]);
        for (int c = 0; c < C; c++) ref_v[r][c][l] = $exp(ref_v[r][c][l]) / sum;
      end
    cfgw = 32'(p) | (32'((f == 1) ? AF_SIGMOID : (f == 2) ? AF_TANH : (f == 4) ? AF_SOFTMAX : AF_RELU) << 2)
         | (32'(f != 3) << 4) | (32'd3 << 5);
    wr(16'h0001, cfgw);
    wr(16'h0002, 32'(K));
    wr(16'h0000, 32'd1);
    t0 = $time / 10;
    cyc = 0;
    while (!irq && cyc < 200000) begin @(negedge clk); cyc++; end
    rd(16'h0003, d);
    checks++;
    if (d[1] != 1'b1 || d[0] != 1'b0) begin failures++; $display("FAIL status %h", d); end
    rd(16'h0004, d);
    checks++;
    if (d == 0 || int'(d) > cyc + 2) begin failures++; $display("FAIL cycle register %0d (observed %0d)", d, cyc); end
    $display("layer prec=%0d-bit f=%0d K=%0d: %0d cycles", n, f, K, d);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      rd(16'h3000 + 16'(r * C + c), d);
      for (int l = 0; l < 32 / n; l++) begin
        real g;
        g = to_real(lane_get(d, n, l), (f == 3) ? n - 3 : n - 2);
        checks++;
        if (absr(g - ref_v[r][c][l]) > tol(p, f)) begin
          failures++;
          if (failures < 20) $display("FAIL out prec=%0d f=%0d (%0d,%0d) lane %0d got %f exp %f", p, f, r, c, l, g, ref_v[r][c][l]);
        end
      end
    end
    case (f)
      0: n_relu++;
      1: n_sig++;
      2: n_tanh++;
      3: n_mac_only++;
      default: ;
    endcase
  endtask

  initial begin
    host_we = 0; host_addr = '0; host_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    layer(2, 1, 6);   // sigmoid 16-bit
    layer(3, 2, 4);   // tanh 32-bit
    layer(1, 0, 6);   // ReLU 8-bit
    layer(2, 3, 5);   // MAC only 16-bit
    layer(1, 4, 6);   // softmax 8-bit, time-multiplexed
    layer(3, 4, 4);   // softmax 32-bit
    layer(0, 1, 3);   // sigmoid 4-bit
    $display("mechanisms: mac_steps=%0d pe_act=%0d relu=%0d sigmoid=%0d tanh=%0d mac_only=%0d softmax_tokens=%0d tm_cycles=%0d wide_cycles=%0d prec_switches=%0d irq=%0d",
             n_mac_steps, n_act, n_relu, n_sig, n_tanh, n_mac_only, n_soft_tok, n_tm_cycles, n_wide_cycles, n_prec_switch, n_irq);
    if (n_mac_steps == 0 || n_act == 0 || n_relu == 0 || n_sig == 0 || n_tanh == 0 || n_mac_only == 0 ||
        n_soft_tok == 0 || n_tm_cycles == 0 || n_wide_cycles == 0 || n_prec_switch == 0 || n_irq != 7) begin
      failures++;
      $display("FAIL a mechanism did not occur");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
