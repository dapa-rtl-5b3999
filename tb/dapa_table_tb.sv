// dapa_table_tb: self-checking test of the knot/coefficient store.
// Checks the reset value, random writes to every function, part and index
// against a shadow copy kept here, and that a write to the non-existent knot
// index N-1 changes nothing.
module dapa_table_tb;
  import dapa_pkg::*;
  localparam int unsigned N = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 cfg_we = 1'b0;
  func_e                cfg_func = FN_GELU;
  cfg_sel_e             cfg_sel = SEL_KNOT;
  logic [$clog2(N)-1:0] cfg_idx = '0;
  logic signed [15:0]   cfg_data = '0;
  logic signed [15:0]   knot  [NUM_FUNCS][N-1];
  logic signed [15:0]   slope [NUM_FUNCS][N];
  logic signed [15:0]   bias  [NUM_FUNCS][N];

  dapa_table #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [15:0] sk [NUM_FUNCS][N];
  logic signed [15:0] sa [NUM_FUNCS][N];
  logic signed [15:0] sb [NUM_FUNCS][N];

  task automatic compare_all(string what);
    for (int f = 0; f < NUM_FUNCS; f++)
      for (int i = 0; i < N; i++) begin
        if (i < N - 1) begin
          checks++;
          if (knot[f][i] !== sk[f][i]) begin
            failures++;
            $display("FAIL %s knot[%0d][%0d]=%0d exp %0d", what, f, i, knot[f][i], sk[f][i]);
          end
        end
        checks += 2;
        if (slope[f][i] !== sa[f][i]) begin failures++; $display("FAIL %s slope[%0d][%0d]", what, f, i); end
        if (bias[f][i]  !== sb[f][i]) begin failures++; $display("FAIL %s bias[%0d][%0d]", what, f, i); end
      end
  endtask

  task automatic wr(func_e f, cfg_sel_e s, int idx, logic signed [15:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_func = f; cfg_sel = s; cfg_idx = idx[$clog2(N)-1:0]; cfg_data = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    for (int f = 0; f < NUM_FUNCS; f++)
      for (int i = 0; i < N; i++) begin sk[f][i] = 0; sa[f][i] = 0; sb[f][i] = 0; end
    repeat (3) @(posedge clk);
    compare_all("reset");
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      int f, s, i;
      logic signed [15:0] d;
      f = $urandom_range(NUM_FUNCS - 1);
      s = $urandom_range(2);
      i = $urandom_range(N - 1);
      d = 16'($urandom);
      wr(func_e'(f), cfg_sel_e'(s), i, d);
      if (s == 0 && i < N - 1) sk[f][i] = d;
      else if (s == 1) sa[f][i] = d;
      else if (s == 2) sb[f][i] = d;
      if (t % 50 == 49) compare_all("random");
    end
    wr(FN_EXP, SEL_KNOT, N - 1, 16'sh1234);   // out of range: ignored
    compare_all("oob");
    // idle cycles with garbage on the bus but no write enable
    @(negedge clk); cfg_data = 16'sh5555; cfg_sel = SEL_BIAS; repeat (3) @(negedge clk);
    compare_all("idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
