// dapa_fp32_engine: the FP32 variant of the reconfigurable DAPA(16) engine.
//
// Same structure as dapa_engine, with single-precision words: the tables
// hold FP32 knots, slopes and biases for GELU, the softmax exponential and
// the GELU derivative; a pipelined comparator tree finds the segment n of
// x; an FP32 multiply-add (dapa_fp32_mac) returns y = a_n*x + b_n.
//
// Comparing floats: the tree (dapa_segment_finder, W = 32) compares signed
// integers. An IEEE-754 word f is mapped to the key
//   f >= 0 : key = f             (sign bit 0, so a positive integer)
//   f <  0 : key = {1, ~f[30:0]} (negative, more negative for larger |f|)
// which orders keys as the floats they stand for. The same map turns a key
// back into the float. Knots are mapped as they leave the table, x on entry,
// and x is mapped back after the tree. -0 sorts just below +0; NaNs are not
// expected.
//
// Interface: the configuration port writes one 32-bit word per cycle
// (function, part, index as in dapa_table). in_valid/in_x/in_func every
// cycle, no stall; out_valid/out_y (and out_ovf for an overflow to infinity)
// exactly log2(N) + 2 = 6 cycles later.
//
// From the paper: an FP32 reconfigurable DAPA(16) unit for GELU or the
// exponential exists next to the Fix16 one (150 ns, 7 DSPs, 1304 FFs at
// 200 MHz in its HLS build). The paper gives only those figures. The key
// mapping, the 2-stage multiply-add, the rounding and the latency are this
// design's choices; its latency is far below the paper's 150 ns because the
// paper's build uses deep HLS floating-point cores.
module dapa_fp32_engine
  import dapa_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // table write port
  input  logic                     cfg_we,
  input  func_e                    cfg_func,
  input  cfg_sel_e                 cfg_sel,
  input  logic [$clog2(N)-1:0]     cfg_idx,
  input  logic [31:0]              cfg_data,
  // sample stream
  input  logic                     in_valid,
  input  logic [31:0]              in_x,
  input  func_e                    in_func,
  output logic                     out_valid,
  output logic [31:0]              out_y,
  output logic                     out_ovf
);

  localparam int unsigned L = $clog2(N);

  function automatic logic [31:0] fkey(logic [31:0] f);
    return f[31] ? {1'b1, ~f[30:0]} : f;
  endfunction

  logic signed [31:0] knot  [NUM_FUNCS][N-1];
  logic signed [31:0] slope [NUM_FUNCS][N];
  logic signed [31:0] bias  [NUM_FUNCS][N];
  logic signed [31:0] kkey  [NUM_FUNCS][N-1];

  dapa_table #(.N(N), .W(32)) u_table (
    .clk, .rst_n,
    .cfg_we, .cfg_func, .cfg_sel, .cfg_idx, .cfg_data(signed'(cfg_data)),
    .knot, .slope, .bias
  );

  always_comb begin
    for (int f = 0; f < NUM_FUNCS; f++)
      for (int i = 0; i < N - 1; i++)
        kkey[f][i] = signed'(fkey(knot[f][i]));
  end

  logic               seg_valid;
  logic signed [31:0] seg_key;
  func_e              seg_func;
  logic [L-1:0]       seg_n;
  logic               unused_side;

  dapa_segment_finder #(.N(N), .W(32), .SIDE_W(1)) u_tree (
    .clk, .rst_n,
    .knot     (kkey),
    .in_valid,
    .in_x     (signed'(fkey(in_x))),
    .in_func,
    .in_side  (1'b0),
    .out_valid(seg_valid),
    .out_x    (seg_key),
    .out_func (seg_func),
    .out_side (unused_side),
    .out_seg  (seg_n)
  );

  logic unused_mac_side;

  dapa_fp32_mac #(.SIDE_W(1)) u_mac (
    .clk, .rst_n,
    .in_valid (seg_valid),
    .in_x     (fkey(seg_key)),
    .in_a     (slope[seg_func][seg_n]),
    .in_b     (bias[seg_func][seg_n]),
    .in_side  (unused_side),
    .out_valid,
    .out_y,
    .out_ovf,
    .out_side (unused_mac_side)
  );

endmodule
