// tb_raw_response_unit -- self-checking test of the twelve-LRCM / RRCM array
// at the default window (W = 15, eight scales).
//
// Random 15 x 15 windows, some with bright or dark oriented lines drawn
// through the centre, enter with a gated enable. raw_lat(15) = 14 enabled
// clocks later every scale's output must equal the reference model's raw
// response (line geometry computed there with real cos/sin). Windows are
// drawn as 15 x 15 images, so the window is the whole image.
module tb_raw_response_unit;
  import msld_pkg::*;
  import msld_ref::*;
  localparam int W = W_DEF, NS = (W + 1) / 2, H = (W - 1) / 2;
  localparam int LAT = raw_lat(W);
  localparam int NIN = 400;

  logic clk = 1'b0, en = 1'b0;
  always #5 clk = ~clk;
  logic [PIX_W-1:0] win [W*W];
  logic signed [RAW_W-1:0] r [NS];

  raw_response_unit #(.W(W)) dut (.clk(clk), .en(en), .win(win), .r(r));

  int checks = 0, failures = 0, ne = 0;
  longint expv [NIN+1][NS];
  byte unsigned img[];

  initial begin
    img = new[W * W];
    if (LAT != 14) begin failures++; $display("latency %0d", LAT); end
    while (ne < NIN) begin
      @(negedge clk);
      if (ne >= LAT) begin
        for (int s = 0; s < NS; s++) begin
          checks++;
          if (longint'(r[s]) != expv[ne - LAT + 1][s]) begin
            failures++;
            if (failures < 10) $display("input %0d scale %0d: %0d vs %0d", ne - LAT + 1, s + 1,
                                        r[s], expv[ne - LAT + 1][s]);
          end
        end
      end
      en = ($urandom_range(0, 9) < 7);
      // background, then a darker (in green) line: bright after inversion
      for (int i = 0; i < W * W; i++) img[i] = 8'($urandom_range(100, 200));
      if (ne % 3 != 0) begin
        int o, len;
        o   = $urandom_range(0, 11);
        len = $urandom_range(0, H);
        for (int i = H - len; i <= H + len; i++) img[tap(W, o, i)] = 8'($urandom_range(0, 60));
      end
      for (int i = 0; i < W * W; i++) win[i] = 8'(255 - int'(img[i]));
      @(posedge clk);
      if (en) begin
        longint rr[];
        ne++;
        raw(W, W, img, H * W + H, rr);
        for (int s = 0; s < NS; s++) expv[ne][s] = rr[s];
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
