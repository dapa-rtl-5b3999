// dapa_recip_tb: self-checking test of the reciprocal (divisor-equivalent)
// unit. For random and edge-case divisors it checks q = floor(2^K / d),
// computed here with 64-bit integer division, that busy lasts exactly K+1
// cycles with done one cycle after it falls, and that d = 0 saturates.
module dapa_recip_tb;
  localparam int unsigned DEN_W = 26;
  localparam int unsigned K     = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  logic [DEN_W-1:0] d = '0;
  logic busy, done;
  logic [K:0] q;

  dapa_recip #(.DEN_W(DEN_W), .K(K)) dut (.*);

  int checks = 0, failures = 0;

  task automatic run(logic [DEN_W-1:0] dv);
    int cyc = 0;
    longint unsigned expq;
    @(negedge clk);
    d = dv; start = 1'b1;
    @(negedge clk);
    start = 1'b0; d = '1;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 200) break;
    end
    expq = (dv == 0) ? {(K+1){1'b1}} : (64'd1 << K) / 64'(dv);
    checks++;
    if (64'(q) !== expq) begin failures++; $display("FAIL d=%0d q=%0d exp %0d", dv, q, expq); end
    checks++;
    if (dv != 0 && cyc != K + 1) begin failures++; $display("FAIL d=%0d took %0d cycles", dv, cyc); end
    if (dv == 0 && cyc != 0) begin failures++; $display("FAIL d=0 took %0d cycles", cyc); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(1); run(2); run(3); run(256); run(255); run(257); run('1); run(0);
    for (int i = 0; i < 300; i++) run(DEN_W'($urandom) >> $urandom_range(DEN_W - 1));
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
