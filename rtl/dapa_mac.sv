// dapa_mac: the single multiply-add of the DAPA engine (stage IV),
// y = a_n * x + b_n in 16-bit fixed point.
//
// x, a_n, b_n and y share one format with frac_w fractional bits (a run-time
// setting, 0..15, so one unit serves Q9.7, Q8.8, Q6.9 ... networks alike).
// The 32-bit product carries 2*frac_w fractional bits; it is shifted right by
// frac_w (arithmetic shift, i.e. rounding toward minus infinity), b_n is
// added and the sum is saturated to the 16-bit range. One multiplier, so one
// DSP slice on an FPGA.
//
// Timing: one register stage; a sample entering with in_valid leaves on
// out_* one cycle later, one sample per cycle, with its sideband.
//
// From the paper: the single MAC computing a_n*x + b_n from the selected
// coefficients, in a 16-bit format whose fraction width is chosen per model.
// This design's choices: the shared format for coefficients and data, the
// run-time fraction width, truncating the product, and saturating the result.
module dapa_mac #(
  parameter int unsigned SIDE_W = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [3:0]               frac_w,    // fractional bits of the format
  input  logic                     in_valid,
  input  logic signed [15:0]       in_x,
  input  logic signed [15:0]       in_a,
  input  logic signed [15:0]       in_b,
  input  logic [SIDE_W-1:0]        in_side,
  output logic                     out_valid,
  output logic signed [15:0]       out_y,
  output logic                     out_sat,   // result was clipped
  output logic [SIDE_W-1:0]        out_side
);

  logic signed [31:0] prod;
  logic signed [31:0] sum;
  logic signed [15:0] y;
  logic               sat;

  always_comb begin
    prod = in_x * in_a;
    sum  = (prod >>> frac_w) + 32'(in_b);
    sat  = (sum > 32'sd32767) || (sum < -32'sd32768);
    if (sum > 32'sd32767)       y = 16'sh7fff;
    else if (sum < -32'sd32768) y = 16'sh8000;
    else                        y = sum[15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y     <= '0;
      out_sat   <= 1'b0;
      out_side  <= '0;
    end else begin
      out_valid <= in_valid;
      out_y     <= y;
      out_sat   <= in_valid & sat;
      out_side  <= in_side;
    end
  end

endmodule
