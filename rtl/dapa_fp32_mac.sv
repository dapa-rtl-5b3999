// dapa_fp32_mac: y = a*x + b in IEEE-754 single precision, the stage that
// replaces the 16-bit MAC in the FP32 variant of the DAPA engine.
//
// Stage 1 multiplies the two 24-bit significands, normalises the 48-bit
// product and rounds it to nearest, ties to even. Stage 2 aligns the smaller
// of the product and b with a guard, a round and a sticky bit, adds or
// subtracts, renormalises (leading-zero count for cancellation) and rounds
// again to nearest even. So the result is the correctly rounded product,
// then the correctly rounded sum: two roundings, as separate multiply and add
// units give, not a fused multiply-add.
//
// Simplifications, all this design's choices: subnormal inputs are read as
// zero and subnormal results are flushed to zero; a result too large becomes
// infinity with out_ovf set; infinities and NaNs at the input are not handled
// specially (the engine's tables hold finite values and x comes from a
// network layer). An exact zero sum is +0.
//
// Interface: in_valid/in_x/in_a/in_b every cycle, no stall; out_valid/out_y
// two cycles later. in_side travels along unchanged.
//
// From the paper: an FP32 DAPA(16) unit exists (Table 3: 150 ns, 7 DSPs at
// 200 MHz, built with HLS floating-point cores). Its arithmetic is not
// described; the two-stage split above and the rounding details are this
// design's.
module dapa_fp32_mac #(
  parameter int unsigned SIDE_W = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [31:0]       in_x,
  input  logic [31:0]       in_a,
  input  logic [31:0]       in_b,
  input  logic [SIDE_W-1:0] in_side,
  output logic              out_valid,
  output logic [31:0]       out_y,
  output logic              out_ovf,
  output logic [SIDE_W-1:0] out_side
);

  // ---------------- stage 1: product ----------------
  logic        x_zero, a_zero;
  logic [47:0] prod;
  logic signed [10:0] pe;        // unbiased-plus-127 exponent of the product
  logic [22:0] pm;               // fraction before rounding
  logic        pg, ps;           // guard and sticky
  logic        p_inc;
  logic [23:0] pm_r;             // rounded fraction with carry
  logic signed [10:0] pe_r;
  logic [31:0] p_word;
  logic        p_ovf;

  always_comb begin
    x_zero = (in_x[30:23] == 8'd0);
    a_zero = (in_a[30:23] == 8'd0);
    prod   = {1'b1, in_x[22:0]} * {1'b1, in_a[22:0]};
    pe     = 11'(in_x[30:23]) + 11'(in_a[30:23]) - 11'sd127;
    if (prod[47]) begin
      pm = prod[46:24];
      pg = prod[23];
      ps = |prod[22:0];
      pe = pe + 11'sd1;
    end else begin
      pm = prod[45:23];
      pg = prod[22];
      ps = |prod[21:0];
    end
    p_inc = pg & (ps | pm[0]);
    pm_r = {1'b0, pm} + {23'd0, p_inc};
    pe_r = pm_r[23] ? pe + 11'sd1 : pe;
    p_ovf = 1'b0;
    if (x_zero || a_zero || pe_r <= 11'sd0) begin
      p_word = {in_x[31] ^ in_a[31], 31'd0};
    end else if (pe_r >= 11'sd255) begin
      p_word = {in_x[31] ^ in_a[31], 8'hFF, 23'd0};
      p_ovf  = 1'b1;
    end else begin
      p_word = {in_x[31] ^ in_a[31], pe_r[7:0], pm_r[22:0]};
    end
  end

  logic              v1;
  logic [31:0]       p1, b1;
  logic              ovf1;
  logic [SIDE_W-1:0] s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; p1 <= '0; b1 <= '0; ovf1 <= 1'b0; s1 <= '0;
    end else begin
      v1 <= in_valid; p1 <= p_word; b1 <= in_b; ovf1 <= p_ovf; s1 <= in_side;
    end
  end

  // ---------------- stage 2: sum ----------------
  // Significands carry 3 extra low bits: guard, round, sticky.
  logic [31:0] op_l, op_s;
  logic        bg_zero, sm_zero, sub;
  logic [7:0]  d;
  logic [26:0] mb, ms, ms_sh;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic        found, sum_zero;
  logic signed [10:0] se;
  logic [23:0] sm_r;
  logic        sg, srs, s_inc;
  logic [31:0] s_word;
  logic        s_ovf;

  always_comb begin
    if (p1[30:0] >= b1[30:0]) begin
      op_l = p1; op_s = b1;
    end else begin
      op_l = b1; op_s = p1;
    end
    bg_zero   = (op_l[30:23] == 8'd0);
    sm_zero = (op_s[30:23] == 8'd0);
    sub  = op_l[31] ^ op_s[31];
    d    = op_l[30:23] - op_s[30:23];
    mb   = {1'b1, op_l[22:0], 3'b000};
    ms   = sm_zero ? 27'd0 : {1'b1, op_s[22:0], 3'b000};
    if (d >= 8'd27) begin
      ms_sh = {26'd0, |ms};
    end else begin
      ms_sh = ms >> d;
      ms_sh[0] = ms_sh[0] | |(ms & ~(27'h7FF_FFFF << d));
    end
    sum = sub ? {1'b0, mb} - {1'b0, ms_sh} : {1'b0, mb} + {1'b0, ms_sh};
    sum_zero = (sum == 28'd0);
    se  = 11'(op_l[30:23]);
    lz  = 5'd0;
    found = 1'b0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      se  = se + 11'sd1;
    end else begin
      found = 1'b0;
      for (int i = 0; i <= 26; i++) begin
        if (!found && sum[26 - i]) begin
          lz    = 5'(i);
          found = 1'b1;
        end
      end
      sum = sum << lz;
      se  = se - 11'(lz);
    end
    // sum[26] is now the hidden bit
    sg   = sum[2];
    srs  = sum[1] | sum[0];
    s_inc = sg & (srs | sum[3]);
    sm_r = {1'b0, sum[25:3]} + {23'd0, s_inc};
    if (sm_r[23]) se = se + 11'sd1;
    s_ovf = 1'b0;
    if (bg_zero) begin
      s_word = (sm_zero) ? {op_l[31] & op_s[31], 31'd0} : op_s;
    end else if (sm_zero) begin
      s_word = op_l;
    end else if (sum_zero) begin
      s_word = 32'd0;
    end else if (se <= 11'sd0) begin
      s_word = {op_l[31], 31'd0};
    end else if (se >= 11'sd255) begin
      s_word = {op_l[31], 8'hFF, 23'd0};
      s_ovf  = 1'b1;
    end else begin
      s_word = {op_l[31], se[7:0], sm_r[22:0]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_y <= '0; out_ovf <= 1'b0; out_side <= '0;
    end else begin
      out_valid <= v1;
      out_y     <= s_word;
      out_ovf   <= v1 & (ovf1 | s_ovf);
      out_side  <= s1;
    end
  end

endmodule
