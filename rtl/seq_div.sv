// seq_div -- sequential restoring divider for unsigned integers.
//
// Computes q = floor(a / b) one quotient bit per clock, most significant bit
// first: NW cycles after 'start' the quotient is valid and 'done' pulses for
// one cycle. 'busy' is high in between; a 'start' while busy is ignored.
// Division by zero returns all ones (the callers test for it). Used once per
// image and scale, for the mean and mean-square divisions of the statistics
// unit and for the reciprocal of the standard deviation, so a small
// sequential divider is used instead of a pipelined one (this design's
// choice; the source only shows a divider symbol).
module seq_div #(
  parameter int unsigned NW = 32,   // dividend / quotient width
  parameter int unsigned DW = 16    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] a,
  input  logic [DW-1:0] b,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] q
);
  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW:0]   rem;       // partial remainder, one guard bit
  logic [NW-1:0] num;       // dividend bits still to shift in
  logic [DW-1:0] den;
  logic [CW-1:0] cnt;
  logic [DW:0]   trial;

  assign trial = {rem[DW-1:0], num[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      rem  <= '0;
      num  <= '0;
      den  <= '0;
      q    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        rem  <= '0;
        num  <= a;
        den  <= b;
        q    <= '0;
        cnt  <= CW'(NW);
      end else if (busy) begin
        num <= num << 1;
        if (trial >= {1'b0, den}) begin
          rem <= trial - {1'b0, den};
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
