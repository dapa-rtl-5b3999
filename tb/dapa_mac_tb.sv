// dapa_mac_tb: self-checking test of the stage-IV multiply-add.
// Streams random and extreme (x, a, b) triples, one per cycle, and compares
// each result, one cycle later, with y = sat16(floor(a*x / 2^F) + b) worked
// out here in 64-bit integer arithmetic, F (frac_w) changing every cycle; also checks the saturation flag and
// that out_valid follows in_valid with a latency of exactly one cycle.
module dapa_mac_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] frac_w = 4'd8;
  logic in_valid = 1'b0;
  logic signed [15:0] in_x = '0, in_a = '0, in_b = '0;
  logic [0:0] in_side = '0;
  logic out_valid, out_sat;
  logic signed [15:0] out_y;
  logic [0:0] out_side;

  dapa_mac #(.SIDE_W(1)) dut (.*);

  int checks = 0, failures = 0, nsat = 0;
  longint exp_y [$];
  bit     exp_s [$];
  bit     exp_v [$];

  function automatic longint floordiv(longint p, int f);
    // floor(p / 2^f) without relying on shift semantics of the simulator
    longint q = p / (64'sd1 <<< f);
    if (p < 0 && q * (64'sd1 <<< f) != p) q = q - 1;
    return q;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      longint r;
      bit s;
      @(negedge clk);
      in_valid = ($urandom_range(7) != 0);
      case ($urandom_range(3))
        0: begin in_x = 16'sh7fff; in_a = 16'sh7fff; in_b = 16'($urandom); end
        1: begin in_x = 16'sh8000; in_a = 16'sh7fff; in_b = 16'($urandom); end
        default: begin
          in_x = 16'($urandom); in_a = 16'($urandom_range(1023)) - 16'sd512; in_b = 16'($urandom);
        end
      endcase
      in_side = 1'($urandom);
      frac_w = 4'($urandom_range(15));
      r = floordiv(longint'(in_x) * longint'(in_a), int'(frac_w)) + longint'(in_b);
      s = 0;
      if (r > 32767) begin r = 32767; s = 1; end
      else if (r < -32768) begin r = -32768; s = 1; end
      exp_y.push_back(r); exp_s.push_back(s & in_valid); exp_v.push_back(in_valid);
      @(posedge clk); #1;
      checks += 2;
      if (out_valid !== exp_v[0]) begin failures++; $display("FAIL valid t=%0d", t); end
      if (exp_v[0]) begin
        checks++;
        if (out_y !== 16'(exp_y[0])) begin
          failures++; $display("FAIL y t=%0d got %0d exp %0d", t, out_y, exp_y[0]);
        end
      end
      if (out_sat !== exp_s[0]) begin failures++; $display("FAIL sat t=%0d", t); end
      if (exp_s[0]) nsat++;
      void'(exp_y.pop_front()); void'(exp_s.pop_front()); void'(exp_v.pop_front());
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
