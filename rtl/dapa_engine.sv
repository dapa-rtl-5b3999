// dapa_engine: the DAPA(N) piecewise-linear activation engine, Fix16.
//
// Each input x is classified into one of N segments whose boundaries were
// placed at equal-probability quantiles of the pre-activation distribution,
// and the segment's line is evaluated: y = a_n * x + b_n. The engine is
// reconfigurable: in_func picks, per sample, which table (GELU, exponential
// for softmax, or GELU derivative) is used.
//
// Structure (the paper's drawing shows N = 8; the default here is N = 16):
//   stages 1..log2(N)  dapa_segment_finder: comparator tree and encoder -> n
//   stage  log2(N)+1   coefficient select (a_n, b_n) and dapa_mac
// Knots and coefficients live in dapa_table and are written through the
// cfg_* port.
//
// Timing: fully pipelined, one sample per cycle, no stall. A sample presented
// with in_valid appears on out_valid/out_y LATENCY = log2(N)+1 cycles later
// (5 cycles for N = 16, 4 for the drawn N = 8). in_side is an opaque tag that
// comes out with the sample.
//
// From the paper: the log2(N)-stage tree, the LUT of (a_n, b_n), one MAC, the
// GELU/exp reconfigurability, N = 16 and a 16-bit fixed-point format whose
// split into integer and fraction bits is chosen per model. This design's
// choices: the run-time write port, the per-sample function select, the
// GELU-derivative table and setting the fraction width at run time (frac_w)
// rather than at synthesis.
module dapa_engine
  import dapa_pkg::*;
#(
  parameter int unsigned N      = 16,  // segments
  parameter int unsigned SIDE_W = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // number format: fractional bits of x, knots, coefficients and y; change
  // it only while no sample is in flight
  input  logic [3:0]               frac_w,
  // table configuration
  input  logic                     cfg_we,
  input  func_e                    cfg_func,
  input  cfg_sel_e                 cfg_sel,
  input  logic [$clog2(N)-1:0]     cfg_idx,
  input  logic signed [15:0]       cfg_data,
  // sample stream
  input  logic                     in_valid,
  input  logic signed [15:0]       in_x,
  input  func_e                    in_func,
  input  logic [SIDE_W-1:0]        in_side,
  output logic                     out_valid,
  output logic signed [15:0]       out_y,
  output logic                     out_sat,
  output logic [SIDE_W-1:0]        out_side
);

  localparam int unsigned L       = $clog2(N);

  logic signed [15:0] knot  [NUM_FUNCS][N-1];
  logic signed [15:0] slope [NUM_FUNCS][N];
  logic signed [15:0] bias  [NUM_FUNCS][N];

  dapa_table #(.N(N)) u_table (
    .clk, .rst_n,
    .cfg_we, .cfg_func, .cfg_sel, .cfg_idx, .cfg_data,
    .knot, .slope, .bias
  );

  logic                  seg_valid;
  logic signed [15:0]    seg_x;
  func_e                 seg_func;
  logic [SIDE_W-1:0]     seg_side;
  logic [L-1:0]          seg_n;

  dapa_segment_finder #(.N(N), .SIDE_W(SIDE_W)) u_tree (
    .clk, .rst_n, .knot,
    .in_valid, .in_x, .in_func, .in_side,
    .out_valid (seg_valid),
    .out_x     (seg_x),
    .out_func  (seg_func),
    .out_side  (seg_side),
    .out_seg   (seg_n)
  );

  // Coefficient LUT read for the segment found.
  logic signed [15:0] a_n, b_n;
  assign a_n = slope[seg_func][seg_n];
  assign b_n = bias[seg_func][seg_n];

  dapa_mac #(.SIDE_W(SIDE_W)) u_mac (
    .clk, .rst_n, .frac_w,
    .in_valid (seg_valid),
    .in_x     (seg_x),
    .in_a     (a_n),
    .in_b     (b_n),
    .in_side  (seg_side),
    .out_valid, .out_y, .out_sat, .out_side
  );

endmodule
