// dapa_softmax_ctrl_tb: self-checking test of the softmax controller.
// The DAPA engine is replaced here by a small pipelined stand-in with the same
// latency that returns round(2^F * exp(x/2^F)) for x >= -8.0 and a small
// negative number below that (as the tail of a linear fit can), so that the
// clamp path is exercised. For random vectors of random length (including
// length 1, a vector that needs the 16-bit saturation of x - x_max, and one
// longer than MAX_LEN) the expected outputs are computed here from the same
// rules: x_max, saturated differences, clamped exps, their sum,
// r = floor(2^40 / sum) and y = floor(e*r / 2^(40-F)), for the formats Q8.8,
// Q9.7 and Q7.9 (F = frac_w). Also checked: out_last on
// the final element only, in_ready low outside the load phase, and the number
// of cycles from the last input to the first output (n + LAT + K + 4).
module dapa_softmax_ctrl_tb;
  localparam int unsigned MAX_LEN = 64;
  localparam int unsigned RK      = 40;
  localparam int unsigned LAT     = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] frac_w = 4'd8;
  int F = 8;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic in_ready;
  logic signed [15:0] in_x = '0;
  logic eng_valid;
  logic signed [15:0] eng_x;
  logic ret_valid;
  logic signed [15:0] ret_y;
  logic out_valid, out_last, busy, len_overflow, sub_sat, exp_clamp;
  logic signed [15:0] out_y;

  dapa_softmax_ctrl #(.MAX_LEN(MAX_LEN), .RK(RK)) dut (.*);

  // ---- engine stand-in -----------------------------------------------------
  function automatic int model_exp(int x);
    real one = real'(1 << F);
    if (x < -8 * (1 << F)) return -3;
    return int'($floor($exp(real'(x) / one) * one + 0.5));
  endfunction

  logic               mv [LAT];
  logic signed [15:0] my [LAT];
  initial for (int i = 0; i < LAT; i++) begin mv[i] = 1'b0; my[i] = '0; end
  always_ff @(posedge clk) begin
    mv[0] <= eng_valid;
    my[0] <= 16'(model_exp(int'(eng_x)));
    for (int i = 1; i < LAT; i++) begin mv[i] <= mv[i-1]; my[i] <= my[i-1]; end
  end
  assign ret_valid = rst_n && mv[LAT-1];
  assign ret_y     = my[LAT-1];

  // ---- checking --------------------------------------------------------------
  int checks = 0, failures = 0;
  int n_ovf = 0, n_subsat = 0, n_clamp = 0;
  always @(posedge clk) begin
    if (len_overflow) n_ovf++;
    if (sub_sat) n_subsat++;
    if (exp_clamp) n_clamp++;
    if (in_ready && (out_valid || eng_valid || ret_valid)) begin
      failures++; $display("FAIL in_ready outside LOAD");
    end
  end

  task automatic run_vector(int n, int kind);
    int xs [];
    int e [];
    int xmax, sum, got, cyc;
    longint unsigned r;
    int exp_n;
    xs = new[n];
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: xs[i] = int'($urandom_range(2048)) - 1024;              // [-4, 4]
        1: xs[i] = (i == 0) ? 30000 : -30000 + int'($urandom_range(100)); // saturating diff
        default: xs[i] = int'($urandom_range(6000)) - 3000;
      endcase
    end
    exp_n = (n > MAX_LEN) ? MAX_LEN : n;
    // reference
    xmax = xs[0];
    for (int i = 1; i < exp_n; i++) if (xs[i] > xmax) xmax = xs[i];
    e = new[exp_n];
    sum = 0;
    for (int i = 0; i < exp_n; i++) begin
      int d;
      d = xs[i] - xmax;
      if (d < -32768) d = -32768;
      e[i] = model_exp(d);
      if (e[i] < 0) e[i] = 0;
      sum += e[i];
    end
    r = (sum == 0) ? ((64'd1 << (RK + 1)) - 1) : (64'd1 << RK) / 64'(sum);
    // drive
    for (int i = 0; i < exp_n; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_x = 16'(xs[i]); in_last = (i == n - 1);
      checks++;
      if (!in_ready) begin failures++; $display("FAIL in_ready low during load"); end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 1'b0; in_last = 1'b0;
    cyc = 1;
    while (!out_valid && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != exp_n + LAT + RK + 4) begin
      failures++; $display("FAIL n=%0d first output after %0d cycles, expected %0d", exp_n, cyc, exp_n + LAT + RK + 4);
    end
    for (int i = 0; i < exp_n; i++) begin
      longint unsigned p;
      int yexp;
      p = (64'(e[i]) * r) >> (RK - F);
      yexp = (p > 32767) ? 32767 : int'(p);
      checks += 3;
      if (!out_valid) begin failures++; $display("FAIL out_valid gap at %0d", i); end
      got = int'(out_y);
      if (got != yexp) begin failures++; $display("FAIL n=%0d i=%0d y=%0d exp %0d", n, i, got, yexp); end
      if (out_last !== (i == exp_n - 1)) begin failures++; $display("FAIL out_last at %0d", i); end
      @(negedge clk);
    end
    checks++;
    if (out_valid) begin failures++; $display("FAIL output longer than vector"); end
    // an overflowing vector leaves its tail unsent: it is simply dropped here
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run_vector(1, 0);
    run_vector(8, 0);
    run_vector(MAX_LEN, 0);
    run_vector(5, 1);
    for (int t = 0; t < 20; t++) begin
      F = (t % 3 == 0) ? 7 : (t % 3 == 1) ? 9 : 8;    // Q9.7, Q7.9, Q8.8
      frac_w = 4'(F);
      run_vector(1 + $urandom_range(MAX_LEN - 1), 2);
    end
    F = 8; frac_w = 4'd8;
    run_vector(MAX_LEN + 3, 0);
    checks += 3;
    if (n_ovf != 1)   begin failures++; $display("FAIL len_overflow seen %0d times", n_ovf); end
    if (n_subsat == 0) begin failures++; $display("FAIL sub_sat never seen"); end
    if (n_clamp == 0)  begin failures++; $display("FAIL exp_clamp never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
