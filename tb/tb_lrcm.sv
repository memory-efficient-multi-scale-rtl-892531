// tb_lrcm -- self-checking test of the line response computing module at the
// default line length (W = 15, eight scales).
//
// Random lines are presented with a randomly gated enable. After each enabled
// clock the outputs must equal the means, at every scale, of the line that
// was presented exactly NS enabled clocks earlier: the sum of the 2s-1 centre
// pixels times floor(2^18/(2s-1)), and the centre pixel itself for scale 1.
// This checks both the arithmetic and the pipeline balancing (all scales
// leave together after NS stages).
module tb_lrcm;
  import msld_pkg::*;
  localparam int W  = W_DEF;
  localparam int NS = (W + 1) / 2;
  localparam int H  = (W - 1) / 2;
  localparam int NIN = 3000;

  logic clk = 1'b0, en = 1'b0;
  always #5 clk = ~clk;
  logic [PIX_W-1:0]  p [W];
  logic [MEAN_W-1:0] mean [NS];

  lrcm #(.W(W)) dut (.clk(clk), .en(en), .p(p), .mean(mean));

  int checks = 0, failures = 0, ne = 0;
  byte unsigned hist [NIN+1][W];

  function automatic longint expect_mean(input int n, input int s);
    longint sum = 0;
    for (int i = H - (s - 1); i <= H + (s - 1); i++) sum += hist[n][i];
    return (s == 1) ? (sum << FRAC) : sum * ((longint'(1) << FRAC) / (2 * s - 1));
  endfunction

  initial begin
    while (ne < NIN) begin
      @(negedge clk);
      if (ne >= NS) begin
        for (int s = 1; s <= NS; s++) begin
          checks++;
          if (longint'(mean[s-1]) != expect_mean(ne - NS + 1, s)) begin
            failures++;
            if (failures < 10) $display("scale %0d input %0d: %0d vs %0d", s, ne - NS + 1,
                                        mean[s-1], expect_mean(ne - NS + 1, s));
          end
        end
      end
      en = ($urandom_range(0, 9) < 7);
      for (int i = 0; i < W; i++) p[i] = (ne % 50 == 7) ? 8'd255 : 8'($urandom);
      @(posedge clk);
      if (en) begin
        ne++;
        for (int i = 0; i < W; i++) hist[ne][i] = p[i];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * NIN) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
