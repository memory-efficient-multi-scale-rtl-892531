// mean_std_unit -- streaming mean and standard deviation of one scale's raw
// responses over the region of interest.
//
// During the first pass every raw response whose pixel lies inside the ROI
// (mask bit set) is accumulated, its square is accumulated, and the pixels
// are counted, since the circular ROI holds an a-priori unknown number of
// pixels. No response is stored. After the last pixel, 'finish' starts the
// end-of-image arithmetic:
//   mean  = sum / N                 (two sequential dividers, in parallel:
//   msq   = sum_sq / N               sum and sum of squares)
//   var   = msq - mean^2           (clamped at zero)
//   sdev  = sqrt(var)
// which is the arrangement of the source's figure (counter, mean divider,
// mean-square divider, multiplier, subtractor, square root). Fixed point:
// r has FRAC fractional bits, squares 2*FRAC, so sqrt(var) again has FRAC.
// The sign of the mean is handled by dividing the magnitude (the quotient is
// truncated toward zero). With N = 0 both results are zero. The sequential
// dividers and square root, and the zero clamp, are this design's choices.
//
// Interface: 'clr' empties the accumulators (start of a frame); a sample is
// taken in each cycle with en & valid & mask. The accumulator stages run on
// every clock, so 'finish' may be given one cycle after the last sample.
// 'done' pulses when mean/sdev are valid; they hold until the next 'finish'.
// Latency from 'finish' to 'done': the sum-of-squares division
// (2*RAW_W + CNT_W cycles) plus the square root (RAW_W cycles) plus 8
// control cycles, 111 cycles for the defaults.
module mean_std_unit
  import msld_pkg::*;
#(
  parameter int unsigned NPIX = NROWS_DEF * NCOLS_DEF   // largest ROI count
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    en,
  input  logic                    valid,
  input  logic                    mask,
  input  logic signed [RAW_W-1:0] r,
  input  logic                    finish,
  output logic                    busy,
  output logic                    done,
  output logic signed [RAW_W-1:0] mean,     // FRAC fractional bits
  output logic        [RAW_W-1:0] sdev,      // FRAC fractional bits
  output logic [$clog2(NPIX+1)-1:0] count
);
  localparam int unsigned CNT_W = $clog2(NPIX + 1);
  localparam int unsigned SQ_W  = 2 * RAW_W;
  localparam int unsigned SUM_W = RAW_W + CNT_W;
  localparam int unsigned SSQ_W = SQ_W + CNT_W;

  typedef enum logic [2:0] {S_IDLE, S_DRAIN, S_DIV, S_MUL, S_SUB, S_SQRT} state_e;
  state_e state;

  // ---- streaming part ------------------------------------------------------
  logic                    s1_take;
  logic signed [RAW_W-1:0] s1_r;
  logic        [SQ_W-1:0]  s1_sq;
  logic signed [SUM_W-1:0] acc_sum;
  logic        [SSQ_W-1:0] acc_sq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_take <= 1'b0;
      s1_r    <= '0;
      s1_sq   <= '0;
      acc_sum <= '0;
      acc_sq  <= '0;
      count   <= '0;
    end else begin
      s1_take <= en && valid && mask && !clr;
      s1_r    <= r;
      s1_sq   <= SQ_W'(r * r);
      if (clr) begin
        acc_sum <= '0;
        acc_sq  <= '0;
        count   <= '0;
      end else if (s1_take) begin
        acc_sum <= acc_sum + SUM_W'(s1_r);
        acc_sq  <= acc_sq + SSQ_W'(s1_sq);
        count   <= count + 1'b1;
      end
    end
  end

  // ---- end-of-image part ---------------------------------------------------
  logic             div_start, sqrt_start;
  logic [SUM_W-1:0] sum_mag;
  logic             sum_neg;
  logic [SUM_W-1:0] q_mean;
  logic [SSQ_W-1:0] q_msq;
  logic             dm_busy, dm_done, dq_busy, dq_done, sq_busy, sq_done;
  logic [RAW_W-1:0] root;
  logic [RAW_W-1:0] mean_mag;
  logic [SQ_W-1:0]  msq, mean_sq, var_q;
  logic             got_m, got_q;

  assign sum_neg = acc_sum[SUM_W-1];
  assign sum_mag = sum_neg ? SUM_W'(-acc_sum) : SUM_W'(acc_sum);

  seq_div #(.NW(SUM_W), .DW(CNT_W)) u_div_mean (
    .clk(clk), .rst_n(rst_n), .start(div_start), .a(sum_mag), .b(count),
    .busy(dm_busy), .done(dm_done), .q(q_mean)
  );
  seq_div #(.NW(SSQ_W), .DW(CNT_W)) u_div_msq (
    .clk(clk), .rst_n(rst_n), .start(div_start), .a(acc_sq), .b(count),
    .busy(dq_busy), .done(dq_done), .q(q_msq)
  );
  seq_isqrt #(.XW(SQ_W)) u_sqrt (
    .clk(clk), .rst_n(rst_n), .start(sqrt_start), .x(var_q),
    .busy(sq_busy), .done(sq_done), .root(root)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      div_start  <= 1'b0;
      sqrt_start <= 1'b0;
      got_m      <= 1'b0;
      got_q      <= 1'b0;
      mean_mag   <= '0;
      msq        <= '0;
      mean_sq    <= '0;
      var_q      <= '0;
      mean       <= '0;
      sdev        <= '0;
      done       <= 1'b0;
    end else begin
      div_start  <= 1'b0;
      sqrt_start <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        S_IDLE: if (finish) state <= S_DRAIN;
        S_DRAIN: begin                       // last sample is in s1 / acc
          if (!s1_take) begin
            if (count == '0) begin
              mean  <= '0;
              sdev   <= '0;
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              div_start <= 1'b1;
              got_m     <= 1'b0;
              got_q     <= 1'b0;
              state     <= S_DIV;
            end
          end
        end
        S_DIV: begin
          if (dm_done) begin
            mean_mag <= RAW_W'(q_mean);
            got_m    <= 1'b1;
          end
          if (dq_done) begin
            msq   <= SQ_W'(q_msq);
            got_q <= 1'b1;
          end
          if (got_m && got_q) state <= S_MUL;
        end
        S_MUL: begin
          mean_sq <= SQ_W'(mean_mag) * SQ_W'(mean_mag);
          mean    <= sum_neg ? -signed'(mean_mag) : signed'(mean_mag);
          state   <= S_SUB;
        end
        S_SUB: begin
          var_q      <= (msq >= mean_sq) ? msq - mean_sq : '0;
          sqrt_start <= 1'b1;                // seq_isqrt samples var_q next cycle
          state      <= S_SQRT;
        end
        S_SQRT: begin
          if (sq_done) begin
            sdev   <= root;
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
