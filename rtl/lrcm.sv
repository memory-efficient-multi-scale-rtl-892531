// lrcm -- line response computing module: the mean of one line at every scale.
//
// The W pixels of one oriented line, p[0..W-1] with the window centre at
// p[H] (H = (W-1)/2), are summed by a chain of adders in which every scale
// reuses the sum of the scale below it:
//   stage 1   : pair_k = p[H-k] + p[H+k] (k = 2..H), s = p[H-1] + p[H]
//   stage 2   : S2 = s + p[H+1]                      (3 pixels)
//   stage k+1 : S(k+1) = S(k) + pair_k               (2k+1 pixels)
// Each adder output is registered, and each pair is delayed until the chain
// reaches it, so scale s (line length L = 2s-1) has its sum after s stages.
// Multiplying by the reciprocal coefficient floor(2^FRAC/L) turns a sum into
// a mean with FRAC fractional bits. Registers after the multipliers delay the
// early scales so that all NS = H+1 outputs leave together: the centre pixel
// (scale 1) passes NS registers, scale 2 has its multiplier register plus
// NS-3 more, and the largest scale's multiplier drives the output directly.
// This is the arrangement of the adder tree, multipliers and balancing
// registers that the source draws for an 11-pixel line; it is generalised
// here to any odd W >= 5. Adder word lengths are written at the widest size
// (PIX_W + clog2(W)); synthesis removes the constant upper bits of the
// narrower stages.
//
// Timing: mean[] belongs to the line pixels presented LAT = NS enabled cycles
// earlier. All registers advance only when 'en' is high.
module lrcm
  import msld_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  logic              clk,
  input  logic              en,
  input  logic [PIX_W-1:0]  p    [W],
  output logic [MEAN_W-1:0] mean [(W+1)/2]   // mean[s-1]: scale s, length 2s-1
);
  localparam int unsigned H     = (W - 1) / 2;
  localparam int unsigned NS    = H + 1;
  localparam int unsigned SUM_W = PIX_W + $clog2(W);

  // S[s]: sum of scale s, registered in row s (s = 2..NS)
  logic [SUM_W-1:0] S [2:NS];
  logic [SUM_W-1:0] s1a, pnext;
  logic [PIX_W-1:0] ctr [1:NS];   // centre pixel delay line (scale 1)

  always_ff @(posedge clk) begin
    if (en) begin
      s1a    <= SUM_W'(p[H-1]) + SUM_W'(p[H]);
      pnext  <= SUM_W'(p[H+1]);
      S[2]   <= s1a + pnext;
      ctr[1] <= p[H];
      for (int j = 2; j <= NS; j++) ctr[j] <= ctr[j-1];
    end
  end
  assign mean[0] = MEAN_W'(ctr[NS]) << FRAC;

  for (genvar k = 2; k <= H; k++) begin : g_pair
    // pair k joins the chain at stage k+1; it waits in rows 1..k
    logic [SUM_W-1:0] pd [1:k];
    always_ff @(posedge clk) begin
      if (en) begin
        pd[1] <= SUM_W'(p[H-k]) + SUM_W'(p[H+k]);
        for (int j = 2; j <= k; j++) pd[j] <= pd[j-1];
        S[k+1] <= S[k] + pd[k];
      end
    end
  end

  for (genvar s = 2; s <= NS; s++) begin : g_scale
    localparam int unsigned L = 2 * s - 1;
    localparam logic [FRAC:0] RC = (FRAC+1)'(recip(L));
    logic [SUM_W+FRAC:0] prod;
    assign prod = (SUM_W+FRAC+1)'(S[s]) * (SUM_W+FRAC+1)'(RC);
    if (s == NS) begin : g_last
      assign mean[s-1] = MEAN_W'(prod);
    end else begin : g_bal
      // multiplier register in row s+1, then rows s+2..NS
      logic [MEAN_W-1:0] md [s+1:NS];
      always_ff @(posedge clk) begin
        if (en) begin
          md[s+1] <= MEAN_W'(prod);
          for (int j = s + 2; j <= NS; j++) md[j] <= md[j-1];
        end
      end
      assign mean[s-1] = md[NS];
    end
  end

endmodule
