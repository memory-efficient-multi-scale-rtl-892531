// combined_response -- combined MSLD response of one pixel,
//   R_combined = (sum over the NS scales of R'_L  +  I_igc) / (NS + 1).
//
// The NS standardized responses and the inverted green value of the pixel
// (an integer, aligned to FRAC fractional bits) are summed by a pipelined
// adder tree; the division by NS+1 is a multiplication by the reciprocal
// coefficient floor(2^FRAC/(NS+1)) followed by an arithmetic shift by FRAC,
// and the result is saturated to OUT_W bits with FRAC fractional bits. The
// formula is the source's; the adder-tree form, the reciprocal multiply and
// the saturation are this design's. I_igc is used unstandardized, as the
// formula is written.
//
// Timing: y belongs to the inputs presented LAT = clog2(NS+1)+1 enabled
// cycles earlier.
module combined_response
  import msld_pkg::*;
#(
  parameter int unsigned NS = n_scales(W_DEF)
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic signed [STD_W-1:0] z   [NS],
  input  logic        [PIX_W-1:0] igc,
  output logic signed [OUT_W-1:0] y
);
  localparam int unsigned SUM_W  = STD_W + $clog2(NS + 1);
  localparam logic [FRAC:0] RC   = (FRAC+1)'(recip(NS + 1));
  localparam int unsigned PROD_W = SUM_W + FRAC + 2;
  localparam logic signed [PROD_W-1:0] YMAX = PROD_W'({1'b0, {(OUT_W-1){1'b1}}});
  localparam logic signed [PROD_W-1:0] YMIN = -YMAX - 1;

  logic [SUM_W-1:0] terms [NS+1];
  logic [SUM_W-1:0] sum;
  logic signed [PROD_W-1:0] prod, shifted;

  always_comb begin
    for (int s = 0; s < NS; s++) terms[s] = SUM_W'(z[s]);   // sign-extended
    terms[NS] = SUM_W'(igc) << FRAC;
  end

  pipe_add_tree #(.N(NS + 1), .DW(SUM_W)) u_tree (
    .clk(clk), .en(en), .din(terms), .sum(sum)
  );

  assign prod    = PROD_W'(signed'(sum)) * signed'(PROD_W'(RC));
  assign shifted = prod >>> FRAC;

  always_ff @(posedge clk) begin
    if (en) begin
      if (shifted > YMAX)      y <= OUT_W'(YMAX);
      else if (shifted < YMIN) y <= OUT_W'(YMIN);
      else                     y <= OUT_W'(shifted);
    end
  end

endmodule
