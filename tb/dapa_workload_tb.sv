// dapa_workload_tb: runs the activation work of the evaluated Transformers
// through the DAPA unit at its default parameters.
//
// For each network it sets the network's 16-bit format (frac_w), fits and
// loads the GELU and exp tables for that format, then runs
//   * one MLP layer's GELU: tokens x hidden values streamed element-wise;
//   * one attention head's softmax: `tokens` rows of `tokens` scores.
// Every output is compared bit-exactly with a reference evaluation of the
// loaded tables (and, for softmax, of the shifted exp-sum arithmetic); the
// element stream must sustain one result per cycle (n values finish n + 4
// cycles after the first is accepted) and each softmax row must take
// 3n + 48 cycles from its first input to its last output. The error against
// the exact functions is printed per network for information.
//
// Formats are the paper's; token counts and widths are the public model
// configurations: ViT/DeiT 197 tokens (MLP 768/1536/3072 for Tiny/Small/
// Base), Swin 7x7 windows of 49 tokens (first-stage MLP 384 / 512), GPT-2
// 1024-token context (MLP 3072), BERT 128-token GLUE sequences (MLP 3072).
// GELU inputs are drawn from Normal(-0.5, 1) and attention scores from
// Normal(0, 2), the same stand-in distributions the tables are fitted to.
module dapa_workload_tb;
  import dapa_pkg::*;
  import dapa_fit_pkg::*;
  localparam int RK = 40;
  localparam int LAT = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] frac_w = 4'd8;
  logic cfg_we = 1'b0;
  func_e cfg_func = FN_GELU;
  cfg_sel_e cfg_sel = SEL_KNOT;
  logic [3:0] cfg_idx = '0;
  logic signed [15:0] cfg_data = '0;
  mode_e mode = MODE_ACT;
  func_e func = FN_GELU;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic in_ready;
  logic signed [15:0] in_x = '0;
  logic out_valid, out_last;
  logic signed [15:0] out_y;
  logic busy, act_sat, len_overflow, sub_sat, exp_clamp;

  dapa_top dut (.*);

  typedef struct { string name; string fmt; int fq; int tokens; int mlp; } wl_t;
  wl_t wl [10];

  int checks = 0, failures = 0;
  int fq;
  knots_t gk, ek;
  coefs_t ga, gb, ea, eb;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // expected-output queue, checked as results arrive
  int  exp_q [$];
  bit  last_q [$];
  real ideal_q [$];
  real sq_err = 0.0, max_err = 0.0;
  int  n_err = 0;
  longint last_out_cyc = 0, first_out_cyc = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    real e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      if (int'(out_y) != exp_q[0] || out_last !== last_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL y=%0d exp %0d", out_y, exp_q[0]);
      end
      e = real'(out_y) / real'(1 << fq) - ideal_q[0];
      if (e < 0) e = -e;
      sq_err += e * e; n_err++;
      if (e > max_err) max_err = e;
      void'(exp_q.pop_front()); void'(last_q.pop_front()); void'(ideal_q.pop_front());
    end
    if (n_err == 1) first_out_cyc = cyc;
    last_out_cyc = cyc;
  end

  task automatic wr(func_e f, cfg_sel_e s, int idx, int d);
    @(posedge clk);
    cfg_we <= 1'b1; cfg_func <= f; cfg_sel <= s; cfg_idx <= 4'(idx); cfg_data <= 16'(d);
    @(posedge clk);
    cfg_we <= 1'b0;
  endtask

  task automatic load(func_e f, const ref knots_t k, const ref coefs_t a, const ref coefs_t b);
    for (int i = 0; i < NSEG - 1; i++) wr(f, SEL_KNOT, i, k[i]);
    for (int i = 0; i < NSEG; i++) begin wr(f, SEL_SLOPE, i, a[i]); wr(f, SEL_BIAS, i, b[i]); end
  endtask

  task automatic reset_stats();
    sq_err = 0.0; max_err = 0.0; n_err = 0;
  endtask

  task automatic wait_drain();
    while (exp_q.size() != 0) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  // One MLP layer of GELU, streamed back to back.
  task automatic gelu_layer(int n);
    longint t0;
    int x;
    reset_stats();
    mode <= MODE_ACT; func <= FN_GELU;
    for (int i = 0; i < n; i++) begin
      x = qfix(GMU + GSIG * gauss(), fq);
      exp_q.push_back(eval_table(gk, ga, gb, x, fq));
      last_q.push_back(1'b0);
      ideal_q.push_back(gelu(real'(x) / real'(1 << fq)));
      @(posedge clk);
      in_valid <= 1'b1; in_x <= 16'(x); in_last <= 1'b0;
      #1;
      if (i == 0) t0 = cyc;
      checks++;
      if (!in_ready) begin failures++; $display("FAIL element input stalled"); end
    end
    @(posedge clk);
    in_valid <= 1'b0;
    wait_drain();
    checks++;
    // n results, the last one LAT cycles after the last input
    if (last_out_cyc - t0 != longint'(n + LAT)) begin
      failures++;
      $display("FAIL GELU stream of %0d took %0d cycles", n, last_out_cyc - t0);
    end
  endtask

  // One attention head: `rows` rows of n scores.
  task automatic softmax_head(int rows, int n);
    int xs [];
    int e [];
    int xmax, sum, d;
    real tsum;
    longint unsigned r, p;
    longint t0;
    reset_stats();
    xs = new[n];
    e = new[n];
    for (int row = 0; row < rows; row++) begin
      for (int i = 0; i < n; i++) xs[i] = qfix(2.0 * gauss(), fq);
      xmax = xs[0];
      for (int i = 1; i < n; i++) if (xs[i] > xmax) xmax = xs[i];
      sum = 0; tsum = 0.0;
      for (int i = 0; i < n; i++) begin
        d = xs[i] - xmax;
        if (d < -32768) d = -32768;
        e[i] = eval_table(ek, ea, eb, d, fq);
        if (e[i] < 0) e[i] = 0;
        sum += e[i];
        tsum += $exp(real'(xs[i] - xmax) / real'(1 << fq));
      end
      r = (sum == 0) ? ((64'd1 << (RK + 1)) - 1) : (64'd1 << RK) / 64'(sum);
      for (int i = 0; i < n; i++) begin
        p = (64'(e[i]) * r) >> (RK - fq);
        exp_q.push_back((p > 32767) ? 32767 : int'(p));
        last_q.push_back(i == n - 1);
        ideal_q.push_back($exp(real'(xs[i] - xmax) / real'(1 << fq)) / tsum);
      end
      mode <= MODE_SOFTMAX;
      for (int i = 0; i < n; i++) begin
        @(posedge clk);
        in_valid <= 1'b1; in_x <= 16'(xs[i]); in_last <= (i == n - 1);
        #1;
        if (i == 0) t0 = cyc;
        while (!in_ready) begin @(posedge clk); #1; end
      end
      @(posedge clk);
      in_valid <= 1'b0; in_last <= 1'b0;
      wait_drain();
      checks++;
      if (last_out_cyc - t0 != longint'(3 * n + 48)) begin
        failures++;
        $display("FAIL softmax row of %0d took %0d cycles", n, last_out_cyc - t0);
      end
    end
  endtask

  initial begin
    wl[0] = '{"ViT-Tiny",   "Q9.7", 7, 197,  768};
    wl[1] = '{"ViT-Small",  "Q8.8", 8, 197, 1536};
    wl[2] = '{"ViT-Base",   "Q7.7", 7, 197, 3072};
    wl[3] = '{"DeiT-Tiny",  "Q6.9", 9, 197,  768};
    wl[4] = '{"DeiT-Small", "Q6.8", 8, 197, 1536};
    wl[5] = '{"DeiT-Base",  "Q7.5", 5, 197, 3072};
    wl[6] = '{"Swin-Small", "Q7.5", 5,  49,  384};
    wl[7] = '{"Swin-Base",  "Q7.5", 5,  49,  512};
    wl[8] = '{"GPT-2",      "Q7.9", 9, 1024, 3072};
    wl[9] = '{"BERT",       "Q9.4", 4, 128, 3072};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (wl[w]) begin
      real g_rms, g_max;
      fq = wl[w].fq;
      frac_w <= 4'(fq);
      fit(FN_GELU, fq, gk, ga, gb);
      fit(FN_EXP, fq, ek, ea, eb);
      load(FN_GELU, gk, ga, gb);
      load(FN_EXP, ek, ea, eb);
      gelu_layer(wl[w].tokens * wl[w].mlp);
      g_rms = $sqrt(sq_err / n_err); g_max = max_err;
      softmax_head(wl[w].tokens, wl[w].tokens);
      $display("%-10s %s  GELU %0dx%0d: rms err %f max %f | softmax %0dx%0d: rms err %f max %f",
               wl[w].name, wl[w].fmt, wl[w].tokens, wl[w].mlp, g_rms, g_max,
               wl[w].tokens, wl[w].tokens, $sqrt(sq_err / n_err), max_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
