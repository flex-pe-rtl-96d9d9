// tb_flex_pe_pipe: self-check of the pipelined SIMD Flex-PE.
// Phase A, 32 bits: one token per cycle with the function changing from
// token to token (sigmoid, tanh, ReLU, MAC); results must appear on
// out_valid[1] exactly 18 cycles after issue. Phase B, 16/8/4 bits: both
// time-multiplexed groups issue every cycle; each group's results must
// appear 9 cycles later on its own output. Phase C: softmax over vectors,
// one in 32-bit mode and two in parallel (one per group) in 8-bit mode.
// Every lane is compared with a real-valued reference within a
// per-precision bound; throughput (results per cycle) is counted.
module tb_flex_pe_pipe;
  import flexpe_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  pe_cfg_t cfg;
  logic in_valid [2], out_valid [2];
  word_t in_x [2], in_y [2], in_z [2], out_data [2];
  logic busy, fifo_full, tm_active;
  int checks = 0, failures = 0, cyc = 0;
  int results [2];

  flex_pe_pipe dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct {
    int  t;       // issue cycle
    int  p;       // precision
    int  f;       // 0 relu 1 sigmoid 2 tanh 3 mac 4 softmax
    real e [8];   // expected per lane
  } exp_t;
  exp_t sb [2][$];

  function automatic real tol(int p, int f);
    case (p)
      0: return 1.0;
      1: return (f == 3) ? 0.1 : (f == 2) ? 0.16 : 0.1;
      2: return (f == 3) ? 0.04 : (f == 2) ? 0.1 : 0.06;
      default: return (f == 3) ? 0.002 : 0.012;
    endcase
  endfunction

  // Issue one word on group g (f as above, not softmax).
  task automatic set_token(int g, int p, int f);
    int n;
    exp_t e;
    longint lx, ly, lz;
    n = nbits(p);
    in_valid[g] = 1'b1;
    in_x[g] = x0_word(prec_e'(p)); in_y[g] = '0; in_z[g] = '0;
    e.t = cyc; e.p = p; e.f = f;
    for (int l = 0; l < 32 / n; l++) begin
      if (f == 3) begin
        lx = from_real(($urandom % 2001) / 1000.0 - 1.0, n, n - 3);
        ly = from_real(($urandom % 2001) / 2000.0 - 0.5, n, n - 3);
        lz = from_real(($urandom % 1801) / 1000.0 - 0.9, n, n - 2);
        in_x[g] = lane_set(in_x[g], n, l, lx);
        in_y[g] = lane_set(in_y[g], n, l, ly);
        e.e[l] = to_real(ly, n - 3) + to_real(lx, n - 3) * to_real(lz, n - 2);
      end else begin
        lz = from_real(($urandom % 2001) / 1000.0 - 1.0, n, n - 2);
        case (f)
          0: e.e[l] = (lz > 0) ? to_real(lz, n - 2) : 0.0;
          1: e.e[l] = sigmoid(to_real(lz, n - 2));
          default: e.e[l] = tanh_r(to_real(lz, n - 2));
        endcase
      end
      in_z[g] = lane_set(in_z[g], n, l, lz);
    end
    sb[(p == 3) ? 1 : g].push_back(e);
  endtask

  task automatic cfg_for(int p, int f);
    cfg = '0;
    cfg.prec = prec_e'(p);
    cfg.op = (f == 3) ? OP_MAC : OP_AF;
    cfg.af = (f == 1) ? AF_SIGMOID : (f == 2) ? AF_TANH : (f == 4) ? AF_SOFTMAX : AF_RELU;
  endtask

  task automatic idle();
    in_valid[0] = 0; in_valid[1] = 0;
  endtask

  task automatic drain();
    idle();
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  // Monitor: compare results and latency.
  always @(negedge clk) begin
    for (int g = 0; g < 2; g++) begin
      if (rst_n && out_valid[g]) begin
        exp_t e;
        int n, lat;
        results[g]++;
        if (sb[g].size() == 0) begin
          failures++;
          $display("FAIL unexpected result on group %0d", g);
        end else begin
          e = sb[g].pop_front();
          n = nbits(e.p);
          lat = cyc - e.t;
          checks++;
          if (lat != ((e.p == 3) ? 18 : 9)) begin
            failures++;
            $display("FAIL latency group %0d prec %0d: %0d", g, e.p, lat);
          end
          for (int l = 0; l < 32 / n; l++) begin
            real gv;
            gv = to_real(lane_get(out_data[g], n, l), (e.f == 3) ? n - 3 : n - 2);
            checks++;
            if (absr(gv - e.e[l]) > ((e.f == 4) ? ((e.p == 1) ? 0.1 : 0.05) : tol(e.p, e.f)) || (e.f == 0 && gv != e.e[l])) begin
              failures++;
              if (failures < 20) $display("FAIL g=%0d prec=%0d f=%0d lane=%0d got=%f exp=%f", g, e.p, e.f, l, gv, e.e[l]);
            end
          end
        end
      end
    end
  end

  // Softmax over a vector of len words on the given groups.
  task automatic softmax(int p, int len, int ngroups, int shift);
    int n;
    longint v [2][16][8];
    real s [2][8];
    n = nbits(p);
    for (int g = 0; g < ngroups; g++)
      for (int l = 0; l < 8; l++) begin
        s[g][l] = 0.0;
        for (int j = 0; j < len; j++) begin
          v[g][j][l] = from_real(($urandom % 1601) / 1000.0 - 0.8, n, n - 2);
          s[g][l] += $exp(to_real(v[g][j][l], n - 2));
        end
      end
    for (int ph = 0; ph < 2; ph++)
      for (int j = 0; j < len; j++) begin
        cfg_for(p, 4);
        cfg.sm_phase = ph[0];
        cfg.sm_first = (j == 0) && (ph == 0);
        cfg.sm_shift = 5'(shift);
        for (int g = 0; g < 2; g++) begin
          in_valid[g] = (g < ngroups);
          in_x[g] = x0_word(prec_e'(p)); in_y[g] = '0; in_z[g] = '0;
        end
        for (int gg = 0; gg < ngroups; gg++) begin
          exp_t e;
          int g;
          g = (p == 3) ? 1 : gg;   // 32-bit results leave on output 1
          e.t = cyc; e.p = p; e.f = 4;
          for (int l = 0; l < 32 / n; l++) begin
            in_z[gg] = lane_set(in_z[gg], n, l, v[gg][j][l]);
            e.e[l] = $exp(to_real(v[gg][j][l], n - 2)) / s[gg][l];
          end
          if (ph == 1) sb[g].push_back(e);
        end
        @(negedge clk);
      end
    drain();
  endtask

  initial begin
    cfg = '0; idle();
    for (int g = 0; g < 2; g++) begin in_x[g] = '0; in_y[g] = '0; in_z[g] = '0; results[g] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Phase A: 32-bit, function switching every token.
    for (int i = 0; i < 60; i++) begin
      int f;
      f = $urandom % 4;
      cfg_for(3, f);
      set_token(0, 3, f);
      in_valid[1] = 1'b1;           // ignored at 32 bits
      @(negedge clk);
    end
    drain();
    checks++;
    if (results[1] != 60 || results[0] != 0) begin
      failures++;
      $display("FAIL 32-bit result count %0d/%0d", results[0], results[1]);
    end
    // Phase B: narrow precisions, both groups every cycle.
    for (int p = 2; p >= 0; p--) begin
      int r0, r1, tstart, tend;
      r0 = results[0]; r1 = results[1];
      for (int i = 0; i < 40; i++) begin
        int f;
        f = $urandom % 4;
        cfg_for(p, f);
        set_token(0, p, f);
        set_token(1, p, f);
        @(negedge clk);
      end
      drain();
      checks++;
      if (results[0] - r0 != 40 || results[1] - r1 != 40) begin
        failures++;
        $display("FAIL TM result count prec %0d: %0d %0d", p, results[0] - r0, results[1] - r1);
      end
      $display("prec %0d-bit: %0d lane results per cycle in steady state", nbits(p), 2 * 32 / nbits(p));
    end
    // Phase C: softmax.
    softmax(3, 6, 1, 3);
    softmax(1, 8, 2, 3);
    softmax(2, 5, 2, 3);
    drain();
    checks++;
    if (sb[0].size() != 0 || sb[1].size() != 0) begin
      failures++;
      $display("FAIL missing results %0d %0d", sb[0].size(), sb[1].size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
