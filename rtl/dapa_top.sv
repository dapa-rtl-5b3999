// dapa_top: a DAPA activation unit for Transformer inference and training.
// One DAPA engine (comparator tree + coefficient LUT + one MAC) serves two
// modes:
//   MODE_ACT      element-wise: each input x returns sigma_hat(x) from the
//                 table chosen by func (GELU, exp or GELU derivative), one
//                 result per cycle after the engine latency (log2(N)+1);
//   MODE_SOFTMAX  each input vector (in_last marks its end) returns its
//                 softmax, computed by dapa_softmax_ctrl around the same
//                 engine's exp table.
// Knots and coefficients are written through the cfg_* port before use.
//
// Interface: in_valid/in_ready handshake on the input; the output has no
// back-pressure. In MODE_ACT in_ready is high whenever no softmax vector is
// in progress. Results leave in input order with out_last marking the final
// element of a softmax vector. Changing mode or func between samples is
// allowed at any time; a softmax vector in progress finishes first.
// Engine samples are tagged (0 = element-wise, 1 = softmax) so each result
// is steered back to its mode.
//
// From the paper: the N = 16 engine, its reconfigurability between GELU and
// the softmax exponential, and the softmax built by adding accumulators and a
// divisor-equivalent unit to the engine. This design's choices: the sharing
// of one engine by both modes, the handshake, the tagging and the status
// outputs.
module dapa_top
  import dapa_pkg::*;
#(
  parameter int unsigned N       = 16,   // segments per function
  parameter int unsigned MAX_LEN = 1024  // longest softmax vector
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // Fix16 format: fractional bits (8 = Q8.8); change only when idle
  input  logic [3:0]               frac_w,
  // table configuration
  input  logic                     cfg_we,
  input  func_e                    cfg_func,
  input  cfg_sel_e                 cfg_sel,
  input  logic [$clog2(N)-1:0]     cfg_idx,
  input  logic signed [15:0]       cfg_data,
  // mode
  input  mode_e                    mode,
  input  func_e                    func,
  // input stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [15:0]       in_x,
  input  logic                     in_last,
  // output stream
  output logic                     out_valid,
  output logic signed [15:0]       out_y,
  output logic                     out_last,
  // status
  output logic                     busy,
  output logic                     act_sat,       // element result clipped
  output logic                     len_overflow,
  output logic                     sub_sat,
  output logic                     exp_clamp
);

  // Softmax controller signals
  logic               sm_in_valid, sm_in_ready;
  logic               sm_eng_valid;
  logic signed [15:0] sm_eng_x;
  logic               sm_ret_valid;
  logic               sm_out_valid, sm_out_last, sm_busy;
  logic signed [15:0] sm_out_y;

  // Engine signals
  logic               e_in_valid;
  logic signed [15:0] e_in_x;
  func_e              e_in_func;
  logic               e_in_tag;
  logic               e_out_valid, e_out_sat, e_out_tag;
  logic signed [15:0] e_out_y;

  logic act_accept;

  assign sm_in_valid = in_valid && (mode == MODE_SOFTMAX);
  assign act_accept  = in_valid && (mode == MODE_ACT) && !sm_busy;
  assign in_ready    = (mode == MODE_SOFTMAX) ? sm_in_ready : !sm_busy;

  // Engine input: the softmax controller has the engine during its EXP
  // phase, and element-wise samples are only accepted while it is idle.
  always_comb begin
    if (sm_eng_valid) begin
      e_in_valid = 1'b1;
      e_in_x     = sm_eng_x;
      e_in_func  = FN_EXP;
      e_in_tag   = 1'b1;
    end else begin
      e_in_valid = act_accept;
      e_in_x     = in_x;
      e_in_func  = func;
      e_in_tag   = 1'b0;
    end
  end

  dapa_engine #(.N(N), .SIDE_W(1)) u_engine (
    .clk, .rst_n, .frac_w,
    .cfg_we, .cfg_func, .cfg_sel, .cfg_idx, .cfg_data,
    .in_valid  (e_in_valid),
    .in_x      (e_in_x),
    .in_func   (e_in_func),
    .in_side   (e_in_tag),
    .out_valid (e_out_valid),
    .out_y     (e_out_y),
    .out_sat   (e_out_sat),
    .out_side  (e_out_tag)
  );

  assign sm_ret_valid = e_out_valid && e_out_tag;

  dapa_softmax_ctrl #(.MAX_LEN(MAX_LEN)) u_softmax (
    .clk, .rst_n, .frac_w,
    .in_valid  (sm_in_valid),
    .in_ready  (sm_in_ready),
    .in_x,
    .in_last,
    .eng_valid (sm_eng_valid),
    .eng_x     (sm_eng_x),
    .ret_valid (sm_ret_valid),
    .ret_y     (e_out_y),
    .out_valid (sm_out_valid),
    .out_y     (sm_out_y),
    .out_last  (sm_out_last),
    .busy      (sm_busy),
    .len_overflow,
    .sub_sat,
    .exp_clamp
  );

  // Output: element-wise results straight from the engine, softmax results
  // from the controller. They never coincide: element-wise samples enter only
  // while no vector is in progress and drain long before NORM begins.
  always_comb begin
    if (sm_out_valid) begin
      out_valid = 1'b1;
      out_y     = sm_out_y;
      out_last  = sm_out_last;
    end else begin
      out_valid = e_out_valid && !e_out_tag;
      out_y     = e_out_y;
      out_last  = 1'b0;
    end
  end

  assign act_sat = e_out_valid && !e_out_tag && e_out_sat;
  assign busy    = sm_busy;

  // The two result sources must never collide.
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(sm_out_valid && e_out_valid && !e_out_tag));

endmodule
