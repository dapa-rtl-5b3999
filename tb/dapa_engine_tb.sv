// dapa_engine_tb: self-checking test of the complete DAPA engine.
// Random sorted knots and random coefficients are written for all three
// function tables through the configuration port; then random samples with
// random function selects stream in, one per cycle with gaps. Each result is
// compared with a reference worked out here: the segment is the number of
// knots strictly below x, and y = sat16(floor(a_n*x / 2^F) + b_n), where F
// (frac_w) changes every cycle and applies in the MAC stage. Results
// must appear exactly log2(N)+1 cycles after their input (5 for N = 16).
// Every segment of every function and the saturation case must occur.
module dapa_engine_tb;
  import dapa_pkg::*;
  localparam int unsigned N   = 16;
  localparam int unsigned LAT = $clog2(N) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] frac_w = 4'd8;
  logic cfg_we = 1'b0;
  func_e cfg_func = FN_GELU;
  cfg_sel_e cfg_sel = SEL_KNOT;
  logic [$clog2(N)-1:0] cfg_idx = '0;
  logic signed [15:0] cfg_data = '0;
  logic in_valid = 1'b0;
  logic signed [15:0] in_x = '0;
  func_e in_func = FN_GELU;
  logic [1:0] in_side = '0;
  logic out_valid, out_sat;
  logic signed [15:0] out_y;
  logic [1:0] out_side;

  dapa_engine #(.N(N), .SIDE_W(2)) dut (.*);

  int checks = 0, failures = 0, nsat = 0;
  int k [NUM_FUNCS][N-1];
  int a [NUM_FUNCS][N];
  int b [NUM_FUNCS][N];
  int hit [NUM_FUNCS][N];
  typedef struct { bit v; int x; func_e f; logic [1:0] side; } exp_t;
  exp_t pipe [LAT+1];

  task automatic wr(func_e f, cfg_sel_e s, int idx, int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_func = f; cfg_sel = s; cfg_idx = idx[$clog2(N)-1:0]; cfg_data = 16'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  function automatic void ref_eval(func_e f, int x, int fw, output int y, output bit s, output int seg);
    longint p;
    longint q;
    seg = 0;
    for (int i = 0; i < N - 1; i++) if (x > k[f][i]) seg++;
    p = longint'(x) * longint'(a[f][seg]);
    q = p / (64'sd1 <<< fw);
    if (p < 0 && q * (64'sd1 <<< fw) != p) q--;
    q += b[f][seg];
    s = 0;
    if (q > 32767) begin q = 32767; s = 1; end
    if (q < -32768) begin q = -32768; s = 1; end
    y = int'(q);
  endfunction

  initial begin
    for (int i = 0; i <= LAT; i++) pipe[i].v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NUM_FUNCS; f++) begin
      int v;
      v = -12000 + int'($urandom_range(2000));
      for (int i = 0; i < N - 1; i++) begin
        v += 1 + $urandom_range(1500);
        k[f][i] = v;
        wr(func_e'(f), SEL_KNOT, i, v);
      end
      for (int i = 0; i < N; i++) begin
        a[f][i] = int'($urandom_range(1024)) - 512;   // slopes in [-2, 2]
        b[f][i] = int'($urandom_range(4096)) - 2048;  // biases in [-8, 8]
        if (f == 1 && i == N - 1) a[f][i] = 16'sh7fff; // makes saturation reachable
        wr(func_e'(f), SEL_SLOPE, i, a[f][i]);
        wr(func_e'(f), SEL_BIAS, i, b[f][i]);
      end
    end
    for (int t = 0; t < 8000; t++) begin
      int y, seg;
      bit s;
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      in_func  = func_e'($urandom_range(NUM_FUNCS - 1));
      if ($urandom_range(1)) in_x = 16'(k[in_func][$urandom_range(N - 2)] + int'($urandom_range(2)) - 1);
      else                   in_x = 16'($urandom);
      in_side = 2'($urandom);
      frac_w = 4'($urandom_range(15));
      ref_eval(in_func, int'(in_x), 8, y, s, seg);
      if (in_valid) hit[in_func][seg]++;
      for (int i = LAT; i > 0; i--) pipe[i] = pipe[i-1];
      pipe[0].v = in_valid; pipe[0].x = int'(in_x); pipe[0].f = in_func; pipe[0].side = in_side;
      // the sample now in the MAC stage uses this cycle's frac_w
      ref_eval(pipe[LAT-1].f, pipe[LAT-1].x, int'(frac_w), y, s, seg);
      s = s & pipe[LAT-1].v;
      @(posedge clk); #1;
      checks++;
      if (out_valid !== pipe[LAT-1].v) begin failures++; $display("FAIL valid/latency t=%0d", t); end
      if (pipe[LAT-1].v) begin
        checks += 3;
        if (int'(out_y) != y) begin
          failures++; $display("FAIL y t=%0d got %0d exp %0d", t, out_y, y);
        end
        if (out_sat !== s) begin failures++; $display("FAIL sat t=%0d", t); end
        if (out_side !== pipe[LAT-1].side) begin failures++; $display("FAIL side t=%0d", t); end
        if (s) nsat++;
      end
    end
    for (int f = 0; f < NUM_FUNCS; f++)
      for (int i = 0; i < N; i++) begin
        checks++;
        if (hit[f][i] == 0) begin failures++; $display("FAIL func %0d segment %0d never used", f, i); end
      end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
