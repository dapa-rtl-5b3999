// dapa_segment_finder_tb: self-checking test of the comparator tree and
// encoder. Random sorted knots (with repeats allowed) are set for every
// function; random inputs, many of them exactly on a knot or one LSB off it,
// stream in one per cycle with random function selects. The expected segment
// is the number of knots strictly below x, found here by a linear scan, and
// must appear exactly log2(N) cycles after the input, with x, func and the
// sideband unchanged.
module dapa_segment_finder_tb;
  import dapa_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned L = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic signed [15:0] knot [NUM_FUNCS][N-1];
  logic in_valid = 1'b0;
  logic signed [15:0] in_x = '0;
  func_e in_func = FN_GELU;
  logic [2:0] in_side = '0;
  logic out_valid;
  logic signed [15:0] out_x;
  func_e out_func;
  logic [2:0] out_side;
  logic [L-1:0] out_seg;

  dapa_segment_finder #(.N(N), .SIDE_W(3)) dut (.*);

  int checks = 0, failures = 0;
  typedef struct { bit chk; bit v; logic signed [15:0] x; func_e f; logic [2:0] s; int seg; } exp_t;
  exp_t pipe [L+1];
  int seg_seen [N];

  task automatic new_knots();
    for (int f = 0; f < NUM_FUNCS; f++) begin
      int v;
      v = -20000 + int'($urandom_range(4000));
      for (int i = 0; i < N - 1; i++) begin
        knot[f][i] = 16'(v);
        v += $urandom_range(2500);   // step 0 gives repeated knots
      end
    end
  endtask

  function automatic int ref_seg(func_e f, logic signed [15:0] x);
    int n = 0;
    for (int i = 0; i < N - 1; i++) if (x > knot[f][i]) n++;
    return n;
  endfunction

  initial begin
    new_knots();
    for (int i = 0; i <= L; i++) begin pipe[i].v = 0; pipe[i].chk = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      if (t % 1500 == 1499) begin
        // samples already in the tree were classified with the old knots
        new_knots();
        for (int i = 0; i <= L; i++) pipe[i].chk = 0;
      end
      in_valid = ($urandom_range(5) != 0);
      in_func  = func_e'($urandom_range(NUM_FUNCS - 1));
      case ($urandom_range(3))
        0: in_x = knot[in_func][$urandom_range(N - 2)];
        1: in_x = knot[in_func][$urandom_range(N - 2)] + 16'sd1;
        2: in_x = 16'($urandom);
        default: in_x = 16'(-21000 + int'($urandom_range(42000)));
      endcase
      in_side = 3'($urandom);
      for (int i = L; i > 0; i--) pipe[i] = pipe[i-1];
      pipe[0].chk = 1; pipe[0].v = in_valid; pipe[0].x = in_x; pipe[0].f = in_func;
      pipe[0].s = in_side; pipe[0].seg = ref_seg(in_func, in_x);
      @(posedge clk); #1;
      // pipe[L-1] entered L cycles before this edge's output
      checks++;
      if (out_valid !== pipe[L-1].v) begin failures++; $display("FAIL valid t=%0d", t); end
      if (pipe[L-1].v && pipe[L-1].chk) begin
        checks += 4;
        seg_seen[pipe[L-1].seg]++;
        if (int'(out_seg) != pipe[L-1].seg) begin
          failures++; $display("FAIL seg t=%0d x=%0d got %0d exp %0d", t, pipe[L-1].x, out_seg, pipe[L-1].seg);
        end
        if (out_x !== pipe[L-1].x)    begin failures++; $display("FAIL x t=%0d", t); end
        if (out_func !== pipe[L-1].f) begin failures++; $display("FAIL func t=%0d", t); end
        if (out_side !== pipe[L-1].s) begin failures++; $display("FAIL side t=%0d", t); end
      end
    end
    for (int n = 0; n < N; n++) begin
      checks++;
      if (seg_seen[n] == 0) begin failures++; $display("FAIL segment %0d never selected", n); end
    end
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
