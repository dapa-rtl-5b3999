// dapa_segment_finder: pipelined comparator tree and encoder (stages I..L of
// the DAPA engine, L = log2(N)).
//
// The N-1 sorted knots split the input axis into N segments. The tree is a
// binary search laid out in hardware: level l (l = 0 .. L-1) has 2^l
// comparators, comparator j of level l testing x > k_m with
// m = j*2^(L-l) + 2^(L-l-1). All comparators of a level evaluate in
// parallel; the decisions of the earlier levels (the path prefix) pick which
// one is on the search path. The last level feeds the encoder, which joins
// the prefix and the last decision into the segment index
// S = number of knots below x, so x lies in (k_S, k_(S+1)].
//
// Every level is one register stage. The input word, its function select and
// a free sideband (SIDE_W bits) travel with it, so the stage-IV MAC gets x and
// S of the same sample together, as the X_(i-3)..X_i delay line of the paper's
// drawing does.
//
// Interface: in_valid/in_x/in_func/in_side enter every cycle (no stall); the
// same sample appears on out_* exactly L cycles later. Knots come from
// dapa_table.
//
// From the paper: the log2(N)-level pipelined tree of ">" comparators and the
// encoder. This design's choices: the comparator-to-knot numbering above, the
// encoder also reading the path prefix (the drawing shows only the leaf
// comparator outputs entering it), and ties (x equal to a knot) going to the
// lower segment, which is what a strict ">" gives.
module dapa_segment_finder
  import dapa_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned W      = 16,   // data width (32 in the FP32 engine)
  parameter int unsigned SIDE_W = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [W-1:0]       knot [NUM_FUNCS][N-1],
  input  logic                     in_valid,
  input  logic signed [W-1:0]       in_x,
  input  func_e                    in_func,
  input  logic [SIDE_W-1:0]        in_side,
  output logic                     out_valid,
  output logic signed [W-1:0]       out_x,
  output func_e                    out_func,
  output logic [SIDE_W-1:0]        out_side,
  output logic [$clog2(N)-1:0]     out_seg
);

  localparam int unsigned L = $clog2(N);

  // Pipeline registers after each level. prefix_q[l] holds l+1 valid bits
  // (right-aligned).
  logic                  valid_q  [L];
  logic signed [W-1:0]    x_q      [L];
  func_e                 func_q   [L];
  logic [SIDE_W-1:0]     side_q   [L];
  logic [L-1:0]          prefix_q [L];

  for (genvar l = 0; l < L; l++) begin : g_level
    localparam int unsigned NCMP = 1 << l;
    localparam int unsigned STEP = 1 << (L - l);
    localparam int unsigned HALF = 1 << (L - l - 1);

    logic signed [W-1:0] x_in;
    func_e              f_in;
    logic [L-1:0]       p_in;      // top bit never reaches the encoder
    logic               v_in;
    logic [SIDE_W-1:0]  s_in;
    logic [NCMP-1:0]    gt;        // outputs of this level's comparators
    logic               decision;  // output of the comparator on the path

    if (l == 0) begin : g_first
      assign x_in = in_x;
      assign f_in = in_func;
      assign p_in = '0;
      assign v_in = in_valid;
      assign s_in = in_side;
    end else begin : g_next
      assign x_in = x_q[l-1];
      assign f_in = func_q[l-1];
      assign p_in = prefix_q[l-1];
      assign v_in = valid_q[l-1];
      assign s_in = side_q[l-1];
    end

    // The comparators of this level. Knot k_m sits at array index m-1.
    for (genvar j = 0; j < NCMP; j++) begin : g_cmp
      assign gt[j] = x_in > knot[f_in][j*STEP + HALF - 1];
    end

    if (l == 0) begin : g_dec0
      assign decision = gt[0];
    end else begin : g_decn
      assign decision = gt[p_in[l-1:0]];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        valid_q[l]  <= 1'b0;
        x_q[l]      <= '0;
        func_q[l]   <= FN_GELU;
        side_q[l]   <= '0;
        prefix_q[l] <= '0;
      end else begin
        valid_q[l]  <= v_in;
        x_q[l]      <= x_in;
        func_q[l]   <= f_in;
        side_q[l]   <= s_in;
        // Encoder (last level) and path register (earlier levels): append
        // this level's decision below the prefix.
        prefix_q[l] <= {p_in[L-2:0], decision};
      end
    end
  end

  assign out_valid = valid_q[L-1];
  assign out_x     = x_q[L-1];
  assign out_func  = func_q[L-1];
  assign out_side  = side_q[L-1];
  assign out_seg   = prefix_q[L-1];

endmodule
