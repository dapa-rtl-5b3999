// dapa_recip: the divisor-equivalent unit of the softmax - one reciprocal per
// vector, so that normalising each element is a multiplication instead of a
// division.
//
// Computes q = floor(2^K / d) for an unsigned DEN_W-bit divisor d with a
// restoring, one-bit-per-cycle divider whose dividend is the constant 2^K.
// d = 0 returns all ones (saturated).
//
// Interface and timing: pulse start with d valid while not busy; busy is high
// for K+1 cycles and done pulses for one cycle with q valid (q holds its value
// until the next start). Q_W = K+1 bits, enough for d = 1.
//
// From the paper: a "divisor-equivalent unit" completes the softmax; the
// paper does not give its insides. The reciprocal-then-multiply form and the
// serial divider are this design's choices, the simplest that do the job with
// no second DSP-sized divider.
module dapa_recip #(
  parameter int unsigned DEN_W = 26,
  parameter int unsigned K     = 40,
  parameter int unsigned Q_W   = K + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [DEN_W-1:0]     d,
  output logic                 busy,
  output logic                 done,
  output logic [Q_W-1:0]       q
);

  localparam int unsigned CNT_W = $clog2(K + 2);

  logic [DEN_W-1:0] rem;      // always below the divisor
  logic [DEN_W-1:0] den;
  logic [CNT_W-1:0] step;     // dividend bit being brought down, K .. 0

  logic [DEN_W:0]   shifted;
  logic             take;
  logic [DEN_W:0]   diff;

  // Dividend 2^K: bit K is one, all others zero.
  always_comb begin
    shifted = {rem, (step == CNT_W'(K))};
    take    = shifted >= {1'b0, den};
    diff    = shifted - {1'b0, den};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      den  <= '0;
      step <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          if (d == '0) begin
            q    <= '1;
            done <= 1'b1;
          end else begin
            den  <= d;
            rem  <= '0;
            q    <= '0;
            step <= CNT_W'(K);
            busy <= 1'b1;
          end
        end
      end else begin
        rem <= take ? diff[DEN_W-1:0] : shifted[DEN_W-1:0];
        q   <= {q[Q_W-2:0], take};
        if (step == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          step <= step - 1'b1;
        end
      end
    end
  end

endmodule
