// dapa_table: knot and coefficient store of the DAPA engine.
//
// For every function the engine can approximate (GELU, the softmax exponential
// and the GELU derivative) it holds the N-1 segment boundaries ("knots")
// k_1..k_(N-1), sorted ascending, and the N linear coefficients (a_n, b_n) of
// the segments. Segment n covers k_n < x <= k_(n+1), with k_0 = -inf and
// k_N = +inf. The tables are fitted offline from the measured pre-activation
// distribution, so here they are registers written through a simple
// configuration port: one W-bit word (16 bits by default) per cycle, addressed by function,
// table part (knot, slope or bias) and index. All entries are readable in
// parallel, because the comparator tree compares against several knots at
// once and the MAC stage picks one coefficient pair per cycle.
//
// Timing: a write takes effect on the next clock edge. Reset clears the tables
// to zero. The coefficient LUT (a_0..a_7, b_0..b_7 in the paper's N = 8
// drawing) follows the paper; holding the knots as writable registers, the
// write port and the reset value are this design's choices.
module dapa_table
  import dapa_pkg::*;
#(
  parameter int unsigned N = 16,             // segments per function
  parameter int unsigned W = 16              // word width (32 in the FP32 engine)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration write port
  input  logic                     cfg_we,
  input  func_e                    cfg_func,
  input  cfg_sel_e                 cfg_sel,
  input  logic [$clog2(N)-1:0]     cfg_idx,
  input  logic signed [W-1:0]       cfg_data,
  // parallel read side
  output logic signed [W-1:0]       knot  [NUM_FUNCS][N-1],
  output logic signed [W-1:0]       slope [NUM_FUNCS][N],
  output logic signed [W-1:0]       bias  [NUM_FUNCS][N]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < NUM_FUNCS; f++) begin
        for (int i = 0; i < N - 1; i++) knot[f][i] <= '0;
        for (int i = 0; i < N; i++) begin
          slope[f][i] <= '0;
          bias[f][i]  <= '0;
        end
      end
    end else if (cfg_we && (int'(cfg_func) < NUM_FUNCS)) begin
      unique case (cfg_sel)
        SEL_KNOT:  if (int'(cfg_idx) < N - 1) knot[cfg_func][cfg_idx] <= cfg_data;
        SEL_SLOPE: slope[cfg_func][cfg_idx] <= cfg_data;
        SEL_BIAS:  bias[cfg_func][cfg_idx]  <= cfg_data;
        default: ;
      endcase
    end
  end

endmodule
