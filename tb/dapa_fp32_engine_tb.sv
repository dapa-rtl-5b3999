// dapa_fp32_engine_tb: checks the FP32 DAPA engine end to end.
//
// Three rounds, each loading new random FP32 tables for GELU, exp and the
// GELU derivative through the 32-bit write port: 15 sorted knots of mixed
// sign (random gaps, so some segments are very narrow), and random slopes and
// biases. Then 20000 samples stream in, one per cycle, with a random function
// per sample. x is drawn around the knots, exactly on knots, at +-0, and far
// outside the knot range. The reference finds the segment by comparing x with
// the knots as real numbers and computes round(round(a*x) + b) with
// dapa_fp32_ref_pkg. Every result must match bit-exactly and arrive exactly
// log2(N) + 2 = 6 cycles after its input; every segment of every function
// must be used.
module dapa_fp32_engine_tb;
  import dapa_pkg::*;
  import dapa_fp32_ref_pkg::*;
  localparam int N = 16;
  localparam int LAT = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_we = 1'b0;
  func_e       cfg_func = FN_GELU;
  cfg_sel_e    cfg_sel = SEL_KNOT;
  logic [3:0]  cfg_idx = '0;
  logic [31:0] cfg_data = '0;
  logic        in_valid = 1'b0;
  logic [31:0] in_x = '0;
  func_e       in_func = FN_GELU;
  logic        out_valid, out_ovf;
  logic [31:0] out_y;

  dapa_fp32_engine #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] knot [NUM_FUNCS][N-1];
  logic [31:0] slope [NUM_FUNCS][N];
  logic [31:0] bias [NUM_FUNCS][N];
  int seg_hits [NUM_FUNCS][N];

  logic [31:0] exp_y [$];
  logic        v_pipe [LAT] = '{default: 1'b0};

  always @(posedge clk) begin
    v_pipe[0] <= in_valid;
    for (int i = 1; i < LAT; i++) v_pipe[i] <= v_pipe[i-1];
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== v_pipe[LAT-1]) begin
      failures++; $display("FAIL latency");
    end
    if (out_valid) begin
      logic [31:0] e;
      e = exp_y.pop_front();
      checks++;
      if (out_y !== e || out_ovf !== is_inf(e)) begin
        failures++;
        if (failures < 20) $display("FAIL y=%h expected %h", out_y, e);
      end
    end
  end

  task automatic wr(func_e f, cfg_sel_e s, int idx, logic [31:0] d);
    @(posedge clk);
    cfg_we <= 1'b1; cfg_func <= f; cfg_sel <= s; cfg_idx <= 4'(idx); cfg_data <= d;
    @(posedge clk);
    cfg_we <= 1'b0;
  endtask

  function automatic logic [31:0] rnd_coef();
    logic [31:0] c;
    c[31]    = 1'($urandom);
    c[30:23] = 8'(127 - 8 + int'($urandom_range(0, 12)));
    c[22:0]  = 23'($urandom);
    return c;
  endfunction

  task automatic load_tables();
    real k;
    for (int f = 0; f < NUM_FUNCS; f++) begin
      k = -4.0 - 4.0 * real'($urandom_range(0, 1000)) / 1000.0;
      for (int i = 0; i < N - 1; i++) begin
        // gaps from 1e-3 to 1.2, so narrow and wide segments both occur
        k = k + ((i % 5 == 2) ? 0.001 : 0.05 + 1.15 * real'($urandom_range(0, 1000)) / 1000.0);
        if (k > -1e-3 && k < 1e-3) k = k + 0.002;   // keep knots off zero
        knot[f][i] = r2f(k);
        wr(func_e'(f), SEL_KNOT, i, knot[f][i]);
      end
      for (int i = 0; i < N; i++) begin
        slope[f][i] = rnd_coef();
        bias[f][i]  = rnd_coef();
        wr(func_e'(f), SEL_SLOPE, i, slope[f][i]);
        wr(func_e'(f), SEL_BIAS, i, bias[f][i]);
      end
    end
  endtask

  function automatic int ref_seg(int f, logic [31:0] x);
    int s;
    s = 0;
    for (int i = 0; i < N - 1; i++) if (f2r(x) > f2r(knot[f][i])) s++;
    return s;
  endfunction

  initial begin
    logic [31:0] x;
    int f, s, missing;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 3; round++) begin
      load_tables();
      for (int i = 0; i < 20000; i++) begin
        f = int'($urandom_range(0, NUM_FUNCS - 1));
        case ($urandom_range(0, 5))
          0: x = knot[f][$urandom_range(0, N - 2)];                       // on a knot
          1: x = knot[f][$urandom_range(0, N - 2)] + 32'($urandom_range(0, 4)) - 32'd2;
          2: x = {1'($urandom), 31'd0};                                   // +-0
          3: x = r2f(((real'($urandom_range(0, 2000)) / 1000.0) - 1.0) * 1e4); // far out
          default: x = r2f(-9.0 + 18.0 * real'($urandom_range(0, 100000)) / 100000.0);
        endcase
        s = ref_seg(f, x);
        seg_hits[f][s]++;
        exp_y.push_back(mac_ref(x, slope[f][s], bias[f][s]));
        @(posedge clk);
        in_valid <= 1'b1; in_x <= x; in_func <= func_e'(f);
      end
      @(posedge clk);
      in_valid <= 1'b0;
      repeat (LAT + 2) @(posedge clk);
    end
    missing = 0;
    for (int g = 0; g < NUM_FUNCS; g++)
      for (int i = 0; i < N; i++) if (seg_hits[g][i] == 0) missing++;
    checks++;
    if (missing != 0 || exp_y.size() != 0) begin
      failures++;
      $display("FAIL %0d segments never used, %0d results missing", missing, exp_y.size());
    end
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
