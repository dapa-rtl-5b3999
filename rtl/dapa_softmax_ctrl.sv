// dapa_softmax_ctrl: turns the DAPA engine into a complete softmax unit
// (the "DS(16)" configuration), using the shifted exp-sum form
//     softmax(x_i) = exp(x_i - x_max) / sum_j exp(x_j - x_max)
// so that every exponential input is <= 0 and every output is in (0, 1].
// The exponentials come from the engine's exp table; the rest is done here
// with accumulators, a reciprocal unit and one multiplier.
//
// A vector passes through four phases:
//   LOAD  accept elements (in_valid/in_ready, in_last on the final one) into
//         the vector buffer while a running-max register tracks x_max;
//   EXP   stream x_i - x_max (saturated to 16 bits) into the engine, one per
//         cycle; write each returned exp back over x_i in the buffer and add
//         it to the sum accumulator (negative engine results, possible at the
//         far tail of a linear fit, are clamped to zero);
//   DIV   dapa_recip forms r = floor(2^RK / sum);
//   NORM  emit y_i = (e_i * r) >> (RK - frac_w), one per cycle, with out_last
//         on the final element.
// A vector is closed by in_last or by reaching MAX_LEN elements; the second
// case raises len_overflow for one cycle.
//
// Timing for a vector of n elements: n cycles LOAD, n + engine latency cycles
// EXP, RK + 2 cycles DIV, n cycles NORM; in_ready is low outside LOAD. There
// is no output back-pressure.
//
// From the paper: the shifted exp-sum formulation, exp computed by DAPA, and
// "additional accumulators and a divisor-equivalent unit" around the engine.
// This design's choices: the phase sequence, the in-place buffer, MAX_LEN,
// the reciprocal form of the division, clamping and saturation.
module dapa_softmax_ctrl #(
  parameter int unsigned MAX_LEN = 1024, // longest vector held
  parameter int unsigned RK      = 40    // reciprocal scale 2^RK
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [3:0]               frac_w,   // fractional bits; hold per row
  // vector input
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [15:0]       in_x,
  input  logic                     in_last,
  // to / from the DAPA engine (exp table)
  output logic                     eng_valid,
  output logic signed [15:0]       eng_x,
  input  logic                     ret_valid,
  input  logic signed [15:0]       ret_y,
  // result stream
  output logic                     out_valid,
  output logic signed [15:0]       out_y,
  output logic                     out_last,
  // status
  output logic                     busy,
  output logic                     len_overflow, // vector cut at MAX_LEN
  output logic                     sub_sat,      // x - x_max clipped
  output logic                     exp_clamp     // negative exp set to zero
);

  localparam int unsigned IDX_W = $clog2(MAX_LEN);
  localparam int unsigned CNT_W = $clog2(MAX_LEN + 1);
  localparam int unsigned SUM_W = 15 + CNT_W;   // n * (2^15 - 1) fits
  localparam int unsigned Q_W   = RK + 1;
  localparam logic [5:0]  RK_SH = 6'(RK);

  typedef enum logic [1:0] {PH_LOAD, PH_EXP, PH_DIV, PH_NORM} phase_e;
  phase_e phase;

  logic signed [15:0] vbuf [MAX_LEN];
  logic [CNT_W-1:0]   len;       // elements in the vector
  logic [CNT_W-1:0]   issue_cnt; // EXP: next element sent to the engine
  logic [CNT_W-1:0]   ret_cnt;   // EXP: next element returning
  logic [CNT_W-1:0]   out_cnt;   // NORM: next element emitted
  logic signed [15:0] xmax;
  logic [SUM_W-1:0]   sum;

  logic               div_start, div_done;
  logic [Q_W-1:0]     recip;

  dapa_recip #(.DEN_W(SUM_W), .K(RK)) u_recip (
    .clk, .rst_n,
    .start (div_start),
    .d     (sum),
    .busy  (),
    .done  (div_done),
    .q     (recip)
  );

  // ---- EXP phase: difference to the maximum, saturated to 16 bits --------
  logic signed [16:0] diff;
  logic signed [15:0] rd_issue;
  assign rd_issue = vbuf[IDX_W'(issue_cnt)];
  assign diff     = 17'(rd_issue) - 17'(xmax);

  always_comb begin
    eng_valid = (phase == PH_EXP) && (issue_cnt < len);
    if (diff < -17'sd32768) eng_x = 16'sh8000;
    else                    eng_x = diff[15:0];
    sub_sat = eng_valid && (diff < -17'sd32768);
  end

  logic signed [15:0] e_ret;
  assign e_ret     = (ret_y < 0) ? 16'sd0 : ret_y;
  assign exp_clamp = (phase == PH_EXP) && ret_valid && (ret_y < 0);

  // ---- NORM phase: multiply by the reciprocal ----------------------------
  logic signed [15:0]   rd_out;
  logic [16+Q_W-1:0]    nprod;
  logic [16+Q_W-1:0]    nshift;
  assign rd_out = vbuf[IDX_W'(out_cnt)];
  assign nprod  = (16+Q_W)'($unsigned(rd_out)) * (16+Q_W)'(recip);
  assign nshift = nprod >> (RK_SH - 6'(frac_w));

  always_comb begin
    out_valid = (phase == PH_NORM);
    out_last  = (phase == PH_NORM) && (out_cnt == len - 1'b1);
    out_y     = (nshift > (16+Q_W)'(32767)) ? 16'sh7fff : nshift[15:0];
  end

  assign in_ready  = (phase == PH_LOAD);
  assign busy      = (phase != PH_LOAD) || (len != '0);
  assign div_start = (phase == PH_EXP) && (len != '0) && (ret_cnt == len);

  // Vector buffer: written by LOAD (inputs) and EXP (exponentials in place).
  always_ff @(posedge clk) begin
    if (phase == PH_LOAD && in_valid)        vbuf[IDX_W'(len)]     <= in_x;
    else if (phase == PH_EXP && ret_valid)   vbuf[IDX_W'(ret_cnt)] <= e_ret;
  end

  logic load_end;
  assign load_end = in_last || (len == CNT_W'(MAX_LEN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= PH_LOAD;
      len          <= '0;
      issue_cnt    <= '0;
      ret_cnt      <= '0;
      out_cnt      <= '0;
      xmax         <= '0;
      sum          <= '0;
      len_overflow <= 1'b0;
    end else begin
      len_overflow <= 1'b0;
      unique case (phase)
        PH_LOAD: if (in_valid) begin
          xmax <= (len == '0 || in_x > xmax) ? in_x : xmax;
          len  <= len + 1'b1;
          if (load_end) begin
            phase        <= PH_EXP;
            issue_cnt    <= '0;
            ret_cnt      <= '0;
            sum          <= '0;
            len_overflow <= !in_last;
          end
        end
        PH_EXP: begin
          if (eng_valid) issue_cnt <= issue_cnt + 1'b1;
          if (ret_valid) begin
            sum     <= sum + SUM_W'($unsigned(e_ret));
            ret_cnt <= ret_cnt + 1'b1;
          end
          if (div_start) phase <= PH_DIV;
        end
        PH_DIV: if (div_done) begin
          phase   <= PH_NORM;
          out_cnt <= '0;
        end
        PH_NORM: begin
          out_cnt <= out_cnt + 1'b1;
          if (out_last) begin
            phase <= PH_LOAD;
            len   <= '0;
          end
        end
        default: phase <= PH_LOAD;
      endcase
    end
  end

endmodule
