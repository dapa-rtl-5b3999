// dapa_fp32_mac_tb: checks the FP32 multiply-add bit-exactly.
//
// Random operands are drawn over a wide exponent range (products and sums
// from about 2^-60 to 2^60) so that alignment shifts of every size,
// cancellation, carries out of the significand and rounding ties all occur.
// A quarter of the slopes are +-1.5*2^k, which makes half of those
// products exact rounding ties. Directed cases add zeros of both signs, exact cancellation (b = -round(a*x)),
// results that round up to the next power of two, and overflow to infinity.
// Every result is compared with dapa_fp32_ref_pkg::mac_ref, which works on
// doubles; out_ovf must be set exactly when the result is infinite. The
// latency must be exactly two cycles, with a new operand set every cycle.
module dapa_fp32_mac_tb;
  import dapa_fp32_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              in_valid = 1'b0;
  logic [31:0]       in_x = '0, in_a = '0, in_b = '0;
  logic [1:0]        in_side = '0;
  logic              out_valid, out_ovf;
  logic [31:0]       out_y;
  logic [1:0]        out_side;

  dapa_fp32_mac #(.SIDE_W(2)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] exp_y [$];
  logic [1:0]  exp_s [$];
  int n_cancel = 0, n_ovf = 0, n_zero = 0;

  function automatic logic [31:0] rnd_float(int emin, int emax);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(127 + emin + int'($urandom_range(0, emax - emin)));
    f[22:0]  = 23'($urandom);
    // sometimes short significands, to make exact ties and cancellation
    if ($urandom_range(0, 3) == 0) f[22:0] = f[22:0] & 23'h7F0000;
    return f;
  endfunction

  task automatic push(logic [31:0] x, logic [31:0] a, logic [31:0] b);
    logic [1:0] s;
    s = 2'($urandom);
    @(posedge clk);
    in_valid <= 1'b1; in_x <= x; in_a <= a; in_b <= b; in_side <= s;
    exp_y.push_back(mac_ref(x, a, b));
    exp_s.push_back(s);
  endtask

  // output monitor: a result every cycle two edges after its operands
  logic v_d1 = 1'b0, v_d2 = 1'b0;
  always @(posedge clk) begin
    v_d2 <= v_d1; v_d1 <= in_valid;
  end
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== v_d2) begin
      failures++; $display("FAIL latency: out_valid=%b expected %b", out_valid, v_d2);
    end
    if (out_valid) begin
      logic [31:0] e;
      logic [1:0]  es;
      e  = exp_y.pop_front();
      es = exp_s.pop_front();
      checks++;
      if (out_y !== e || out_side !== es || out_ovf !== is_inf(e)) begin
        failures++;
        if (failures < 20) $display("FAIL y=%h expected %h ovf=%b side %0d/%0d", out_y, e, out_ovf, out_side, es);
      end
      if (is_inf(e)) n_ovf++;
      if (e[30:0] == 31'd0) n_zero++;
    end
  end

  initial begin
    logic [31:0] x, a, b, p;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed: zeros
    push(32'h0000_0000, 32'h3f80_0000, 32'h4000_0000);
    push(32'h8000_0000, 32'h3f80_0000, 32'h8000_0000);
    push(32'h3f80_0000, 32'h0000_0000, 32'h0000_0000);
    push(32'h3f80_0000, 32'h3f80_0000, 32'h0000_0000);
    push(32'h0000_0000, 32'h0000_0000, 32'hc040_0000);
    // 1 + 2^-24 (tie to even) and 1.5*(1+2^-23) style carries
    push(32'h3f80_0000, 32'h3f80_0000, 32'h3380_0000);
    push(32'h3f80_0001, 32'h3f80_0001, 32'h0000_0000);
    push(32'h3fff_ffff, 32'h3fff_ffff, 32'h3f80_0000);
    // overflow
    push(32'h7f00_0000, 32'h4100_0000, 32'h3f80_0000);
    push(32'h7f7f_ffff, 32'h3f80_0000, 32'h7f7f_ffff);
    // random stream
    for (int i = 0; i < 60000; i++) begin
      x = rnd_float(-30, 30);
      a = rnd_float(-30, 30);
      // a = +-1.5 * 2^k: a*x is then an exact halfway case for every odd x
      if ($urandom_range(0, 3) == 0) a[22:0] = 23'h40_0000;
      case ($urandom_range(0, 3))
        0: b = rnd_float(-60, 60);
        1: begin  // exact cancellation or near it
          p = r2f(f2r(x) * f2r(a));
          b = {~p[31], p[30:0]};
          if ($urandom_range(0, 1) == 1) b[2:0] = 3'($urandom);
          n_cancel++;
        end
        2: begin  // b close in size to the product
          p = r2f(f2r(x) * f2r(a));
          b = {1'($urandom), 8'(int'(p[30:23]) + int'($urandom_range(0, 6)) - 3), 23'($urandom)};
        end
        default: b = rnd_float(-5, 5);
      endcase
      push(x, a, b);
    end
    @(posedge clk);
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_y.size() != 0 || n_ovf < 2 || n_zero < 5) begin
      failures++;
      $display("FAIL left=%0d overflows=%0d zeros=%0d", exp_y.size(), n_ovf, n_zero);
    end
    $display("cancellation cases %0d, overflows %0d, zero results %0d", n_cancel, n_ovf, n_zero);
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
