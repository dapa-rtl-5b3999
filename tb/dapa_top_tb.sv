// dapa_top_tb: end-to-end test of the DAPA unit at its default parameters
// (N = 16 segments, Q8.8, MAX_LEN = 1024).
//
// Table generation. The tables are fitted here the way the method prescribes,
// from an assumed pre-activation distribution (this test's choice, standing in
// for one measured on a network):
//   GELU and GELU'  inputs ~ Normal(-0.5, 1.0);
//   exp             softmax inputs x - x_max <= 0 ~ half-normal, sigma 2.5
//                   (dense near 0, where the largest terms of a row are).
// Knots are the quantiles F^-1(n/16), n = 1..15, so every segment holds
// 1/16 of the probability. Each segment's line minimises the density-weighted
// squared error (weighted least squares on 256 points, the outer segments
// limited to [-4, 4] for GELU and [-12, 0] for exp). Knots and coefficients
// are rounded to the format in use (Q8.8, later Q9.7) and written through the configuration port.
//
// Checks, in one in-order scoreboard:
//   * every element-wise result is bit-exact against a reference evaluation of
//     the written tables, and within a tolerance of the true function
//     (tanh-form GELU, its derivative, exp);
//   * every softmax result is bit-exact against a reference of the shifted
//     exp-sum with the same arithmetic, and within 0.02 of the true softmax;
//   * the element-wise latency is 5 cycles;
//   * softmax rows of the sizes of the evaluated workloads: 49 (Swin 7x7
//     window), 128 (BERT sequence), 197 (ViT/DeiT tokens), 1024 (GPT-2
//     context), and 1030 which is cut at 1024;
//   * a second pass in Q9.7 (the ViT-Tiny format) after refitting the tables
//     (softmax bound 0.1 there, see expect_row).
// Mechanisms counted, each must happen: mode switch both ways, per-sample
// function switch, input stall while a softmax row is in progress, element
// saturation, x - x_max saturation, exp clamp to zero, row cut at MAX_LEN,
// number-format switch.
module dapa_top_tb;
  import dapa_pkg::*;
  localparam int unsigned N      = 16;
  localparam int unsigned MAXLEN = 1024;
  localparam int unsigned RK     = 40;
  localparam int unsigned LAT    = 5;
  localparam real         GMU    = -0.5;
  localparam real         GSIG   = 1.0;
  localparam real         ESIG   = 2.5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int FQ = 8;                        // fractional bits in use
  logic [3:0] frac_w = 4'd8;
  logic cfg_we = 1'b0;
  func_e cfg_func = FN_GELU;
  cfg_sel_e cfg_sel = SEL_KNOT;
  logic [$clog2(N)-1:0] cfg_idx = '0;
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

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------------------
  // Real-valued functions
  function automatic real gelu(real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction
  function automatic real dgelu(real x);
    real u = 0.7978845608 * (x + 0.044715 * x * x * x);
    real t = $tanh(u);
    return 0.5 * (1.0 + t) + 0.5 * x * (1.0 - t * t) * 0.7978845608 * (1.0 + 0.134145 * x * x);
  endfunction
  function automatic real fref(func_e f, real x);
    case (f)
      FN_GELU:  return gelu(x);
      FN_DGELU: return dgelu(x);
      default:  return $exp(x);
    endcase
  endfunction
  // standard normal CDF (Abramowitz-Stegun 7.1.26 for erf)
  function automatic real phi(real z);
    real x = (z < 0.0 ? -z : z) / 1.4142135624;
    real t = 1.0 / (1.0 + 0.3275911 * x);
    real y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t
                    - 0.284496736) * t + 0.254829592) * t * $exp(-x * x);
    return (z < 0.0) ? 0.5 * (1.0 - y) : 0.5 * (1.0 + y);
  endfunction
  // density and CDF of the assumed distributions (0: GELU input, 1: exp input)
  function automatic real pdf(int d, real x);
    if (d == 0) return $exp(-0.5 * ((x - GMU) / GSIG) ** 2) / (GSIG * 2.5066282746);
    if (x > 0.0) return 0.0;
    return 2.0 * $exp(-0.5 * (x / ESIG) ** 2) / (ESIG * 2.5066282746);
  endfunction
  function automatic real cdf(int d, real x);
    if (d == 0) return phi((x - GMU) / GSIG);
    if (x > 0.0) return 1.0;
    return 2.0 * phi(x / ESIG);
  endfunction
  function automatic real inv_cdf(int d, real p);
    real lo = -40.0, hi = 5.0;
    for (int i = 0; i < 80; i++) begin
      real mid;
      mid = 0.5 * (lo + hi);
      if (cdf(d, mid) < p) lo = mid; else hi = mid;
    end
    return 0.5 * (lo + hi);
  endfunction
  function automatic int qfix(real v);
    int r = int'($floor(v * real'(1 << FQ) + 0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  // ---------------------------------------------------------------------------
  // Tables as written (integers), and the bit-exact reference evaluation
  int tk [NUM_FUNCS][N-1];
  int ta [NUM_FUNCS][N];
  int tb [NUM_FUNCS][N];

  function automatic int ref_eval(func_e f, int x, output bit s);
    int seg = 0;
    longint p, q;
    for (int i = 0; i < N - 1; i++) if (x > tk[f][i]) seg++;
    p = longint'(x) * longint'(ta[f][seg]);
    q = p / (64'sd1 <<< FQ);
    if (p < 0 && q * (64'sd1 <<< FQ) != p) q--;
    q += tb[f][seg];
    s = 0;
    if (q > 32767) begin q = 32767; s = 1; end
    if (q < -32768) begin q = -32768; s = 1; end
    return int'(q);
  endfunction

  task automatic wr(func_e f, cfg_sel_e s, int idx, int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_func = f; cfg_sel = s; cfg_idx = idx[$clog2(N)-1:0]; cfg_data = 16'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic fit_and_load(func_e f);
    int d = (f == FN_EXP) ? 1 : 0;
    real lo_lim = (f == FN_EXP) ? -12.0 : -4.0;
    real hi_lim = (f == FN_EXP) ? 0.0 : 4.0;
    real k [N+1];
    for (int n = 1; n < N; n++) k[n] = inv_cdf(d, real'(n) / real'(N));
    k[0] = lo_lim; k[N] = hi_lim;
    for (int n = 1; n < N; n++) begin
      tk[f][n-1] = qfix(k[n]);
      wr(f, SEL_KNOT, n - 1, tk[f][n-1]);
    end
    for (int n = 0; n < N; n++) begin
      real lo, hi, sw, sx, sxx, sy, sxy, a, b, det;
      lo = k[n] < lo_lim ? lo_lim : k[n];
      hi = k[n+1] > hi_lim ? hi_lim : k[n+1];
      sw = 0; sx = 0; sxx = 0; sy = 0; sxy = 0;
      for (int i = 0; i < 256; i++) begin
        real x, w, y;
        x = lo + (hi - lo) * (real'(i) + 0.5) / 256.0;
        w = pdf(d, x);
        y = fref(f, x);
        sw += w; sx += w * x; sxx += w * x * x; sy += w * y; sxy += w * x * y;
      end
      det = sw * sxx - sx * sx;
      a = (sw * sxy - sx * sy) / det;
      b = (sxx * sy - sx * sxy) / det;
      ta[f][n] = qfix(a); tb[f][n] = qfix(b);
      wr(f, SEL_SLOPE, n, ta[f][n]);
      wr(f, SEL_BIAS, n, tb[f][n]);
    end
  endtask

  // ---------------------------------------------------------------------------
  // Scoreboard
  typedef struct { int y; bit last; real ideal; real tol; int kind; real one; real x; } exp_t;
  exp_t sb [$];
  real  max_err [4];                 // GELU, EXP, DGELU, softmax
  int   n_out = 0;
  real  dw_num = 0.0, dw_den = 0.0, mse_num = 0.0;  // GELU DWMSE / MSE
  int   mse_cnt = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    real err;
    n_out++;
    checks += 2;
    if (sb.size() == 0) begin
      failures++; $display("FAIL unexpected output %0d", out_y);
    end else begin
      e = sb.pop_front();
      if (int'(out_y) != e.y || out_last !== e.last) begin
        failures++;
        if (failures < 20) $display("FAIL kind %0d: y=%0d last=%0b expected %0d last=%0b", e.kind, out_y, out_last, e.y, e.last);
      end
      err = real'(out_y) / e.one - e.ideal;
      if (err < 0) err = -err;
      if (err > max_err[e.kind]) max_err[e.kind] = err;
      if (e.kind == 0 && e.x >= -4.0 && e.x <= 4.0) begin
        dw_num += pdf(0, e.x) * err * err;
        dw_den += pdf(0, e.x);
        mse_num += err * err;
        mse_cnt++;
      end
      if (err > e.tol) begin
        failures++;
        $display("FAIL accuracy kind %0d: got %f ideal %f (1.0 = %0.0f)", e.kind, real'(out_y) / e.one, e.ideal, e.one);
      end
    end
  end

  // mechanism counters
  int n_act_sat = 0, n_ovf = 0, n_subsat = 0, n_clamp = 0, n_stall = 0;
  int n_to_sm = 0, n_to_act = 0, n_func_sw = 0, n_fmt_sw = 0;
  always @(posedge clk) if (rst_n) begin
    if (act_sat) n_act_sat++;
    if (len_overflow) n_ovf++;
    if (sub_sat) n_subsat++;
    if (exp_clamp) n_clamp++;
  end

  // ---------------------------------------------------------------------------
  // Drivers
  mode_e last_mode = MODE_ACT;
  func_e last_func = FN_GELU;

  task automatic set_mode(mode_e m);
    if (m != last_mode) begin
      if (m == MODE_SOFTMAX) n_to_sm++; else n_to_act++;
    end
    last_mode = m;
    mode = m;
  endtask

  // offer one sample; wait (stall) until it is accepted
  task automatic send(logic signed [15:0] x, bit last);
    @(negedge clk);
    in_valid = 1'b1; in_x = x; in_last = last;
    #1;
    while (!in_ready) begin
      if (mode == MODE_ACT) n_stall++;
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    in_valid = 1'b0; in_last = 1'b0;
  endtask

  task automatic act_sample(func_e f, real xr, real tol);
    exp_t e;
    bit s;
    int xi = qfix(xr);
    if (f != last_func) n_func_sw++;
    last_func = f;
    func = f;
    // Errors are allowed to be larger where the assumed input density is
    // small (beyond two standard deviations): that is where a distribution-
    // aware fit puts its coarse segments.
    if (f != FN_EXP && (xr < GMU - 2.0 * GSIG || xr > GMU + 2.0 * GSIG)) tol = 0.2;
    e.y = ref_eval(f, xi, s); e.last = 0; e.tol = tol; e.x = real'(xi) / real'(1 << FQ);
    e.one = real'(1 << FQ);
    e.ideal = fref(f, real'(xi) / e.one);
    e.kind = (f == FN_GELU) ? 0 : (f == FN_EXP) ? 1 : 2;
    if (s) begin e.ideal = real'(e.y) / e.one; end  // clipped: exact value is out of range
    sb.push_back(e);
    send(16'(xi), 1'b0);
  endtask

  // Expected results of one softmax row (as the hardware will cut it)
  task automatic expect_row(int xs [$]);
    int xmax = xs[0], sum = 0;
    int e [$];
    real tsum = 0.0;
    longint unsigned r;
    foreach (xs[i]) if (xs[i] > xmax) xmax = xs[i];
    foreach (xs[i]) begin
      bit s;
      int d, v;
      d = xs[i] - xmax;
      if (d < -32768) d = -32768;
      v = ref_eval(FN_EXP, d, s);
      if (v < 0) v = 0;
      e.push_back(v);
      sum += v;
      tsum += $exp(real'(xs[i] - xmax) / real'(1 << FQ));
    end
    r = (64'd1 << RK) / 64'(sum);
    foreach (e[i]) begin
      exp_t x;
      longint unsigned p = (64'(e[i]) * r) >> (RK - FQ);
      x.y = (p > 32767) ? 32767 : int'(p);
      x.last = (i == e.size() - 1);
      x.one = real'(1 << FQ);
      x.ideal = $exp(real'(xs[i] - xmax) / x.one) / tsum;
      // With 7 fraction bits the exp table's tail slope rounds to zero and
      // each small term is counted as a few LSBs; a long row's sum then
      // carries that excess, so the Q9.7 pass gets a looser bound.
      x.tol = (FQ >= 8) ? 0.02 : 0.1;
      x.x = 0.0;
      x.kind = 3;
      sb.push_back(x);
    end
  endtask

  task automatic softmax_row(int n, real sigma, bit spread);
    int xs [$];
    int part [$];
    for (int i = 0; i < n; i++) begin
      real g;
      g = 0.0;
      for (int j = 0; j < 12; j++) g += real'($urandom_range(1000000)) / 1000000.0;
      g = (g - 6.0) * sigma;
      if (spread && i == 0) g = 100.0;
      if (spread && i == 1) g = -100.0;
      xs.push_back(qfix(g));
    end
    set_mode(MODE_SOFTMAX);
    for (int i = 0; i < n; i++) begin
      part.push_back(xs[i]);
      if (part.size() == MAXLEN || i == n - 1) begin
        expect_row(part);
        part.delete();
      end
    end
    for (int i = 0; i < n; i++) send(16'(xs[i]), i == n - 1);
  endtask

  // ---------------------------------------------------------------------------
  initial begin
    for (int i = 0; i < 4; i++) max_err[i] = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fit_and_load(FN_GELU);
    fit_and_load(FN_EXP);
    fit_and_load(FN_DGELU);

    // Element-wise latency: one isolated GELU sample
    begin
      int cyc = 0;
      act_sample(FN_GELU, 0.5, 0.08);
      while (!out_valid && cyc < 50) begin @(posedge clk); #1; cyc++; end
      checks++;
      // send() returns 1 time unit after the accepting edge
      if (cyc != LAT - 1) begin failures++; $display("FAIL element latency %0d, expected %0d", cyc + 1, LAT); end
    end

    // GELU sweep over [-4, 4] and a GELU-derivative sweep, interleaved with
    // exp samples so that the function select changes from sample to sample
    for (int i = 0; i <= 512; i++) begin
      real x;
      x = -4.0 + 8.0 * real'(i) / 512.0;
      act_sample(FN_GELU, x, 0.08);
      act_sample(FN_DGELU, x, 0.12);
      if (i % 4 == 0) act_sample(FN_EXP, -12.0 + 1.5 * real'(i) / 64.0, 0.05);
    end

    // softmax rows of workload sizes
    softmax_row(49, 2.0, 0);     // Swin window
    // straight after a row: element-wise input must wait (stall)
    set_mode(MODE_ACT);
    act_sample(FN_GELU, 1.0, 0.08);
    softmax_row(197, 2.0, 0);    // ViT / DeiT tokens
    softmax_row(128, 2.0, 1);    // BERT sequence, with a huge spread
    set_mode(MODE_ACT);
    for (int i = 0; i < 50; i++) act_sample(FN_GELU, -3.0 + 0.1 * real'(i), 0.08);
    softmax_row(1024, 2.0, 0);   // GPT-2 context
    softmax_row(1030, 2.0, 0);   // longer than the buffer: cut at 1024
    set_mode(MODE_ACT);
    act_sample(FN_DGELU, 0.25, 0.12);
    // run-time table rewrite: give the derivative table's top segment a slope
    // of 4.0; a large input then overflows Q8.8 and the result saturates
    wr(FN_DGELU, SEL_SLOPE, N - 1, 4 * 256);
    ta[FN_DGELU][N-1] = 4 * 256;
    act_sample(FN_DGELU, 100.0, 1.0e9);

    // Format switch to Q9.7 (the ViT-Tiny format): wait until idle, refit
    // and reload all tables, then run a GELU sweep and a 197-token row.
    begin
      int w = 0;
      while (sb.size() != 0 && w < 20000) begin @(posedge clk); w++; end
      repeat (10) @(posedge clk);
    end
    FQ = 7; frac_w = 4'd7; n_fmt_sw++;
    fit_and_load(FN_GELU);
    fit_and_load(FN_EXP);
    fit_and_load(FN_DGELU);
    set_mode(MODE_ACT);
    for (int i = 0; i <= 128; i++) act_sample(FN_GELU, -4.0 + 8.0 * real'(i) / 128.0, 0.08);
    softmax_row(197, 2.0, 0);

    // drain
    begin
      int w = 0;
      while (sb.size() != 0 && w < 20000) begin @(posedge clk); w++; end
      repeat (10) @(posedge clk);
    end
    checks++;
    if (sb.size() != 0) begin failures++; $display("FAIL %0d results missing", sb.size()); end

    $display("GELU over [-4,4]: density-weighted MSE %e, plain MSE %e",
             dw_num / dw_den, mse_num / mse_cnt);
    $display("max |error| GELU %f  exp %f  GELU' %f  softmax %f",
             max_err[0], max_err[1], max_err[2], max_err[3]);
    $display("mechanisms: format_switch=%0d to_softmax=%0d to_act=%0d func_switch=%0d stall=%0d act_sat=%0d sub_sat=%0d exp_clamp=%0d row_cut=%0d",
             n_fmt_sw, n_to_sm, n_to_act, n_func_sw, n_stall, n_act_sat, n_subsat, n_clamp, n_ovf);
    checks += 9;
    if (n_fmt_sw == 0)  begin failures++; $display("FAIL no format switch"); end
    if (n_to_sm == 0)   begin failures++; $display("FAIL no switch to softmax mode"); end
    if (n_to_act == 0)  begin failures++; $display("FAIL no switch to element mode"); end
    if (n_func_sw == 0) begin failures++; $display("FAIL no function switch"); end
    if (n_stall == 0)   begin failures++; $display("FAIL no input stall"); end
    if (n_act_sat == 0) begin failures++; $display("FAIL no element saturation"); end
    if (n_subsat == 0)  begin failures++; $display("FAIL no x - x_max saturation"); end
    if (n_clamp == 0)   begin failures++; $display("FAIL no exp clamp"); end
    if (n_ovf != 1)     begin failures++; $display("FAIL row cut seen %0d times", n_ovf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
