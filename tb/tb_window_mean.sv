// tb_window_mean -- self-checking test of the window mean unit (W = 15).
//
// Random 15 x 15 windows (and all-255 windows, the largest sum) enter with a
// randomly gated enable; clog2(225)+1 = 9 enabled clocks later the output must
// equal sum * floor(2^18/225).
module tb_window_mean;
  import msld_pkg::*;
  localparam int W   = W_DEF;
  localparam int LAT = $clog2(W * W) + 1;
  localparam int NIN = 2000;

  logic clk = 1'b0, en = 1'b0;
  always #5 clk = ~clk;
  logic [PIX_W-1:0]  win [W*W];
  logic [MEAN_W-1:0] mean;

  window_mean #(.W(W)) dut (.clk(clk), .en(en), .win(win), .mean(mean));

  int checks = 0, failures = 0, ne = 0;
  longint sums [NIN+1];

  initial begin
    while (ne < NIN) begin
      @(negedge clk);
      if (ne >= LAT) begin
        longint e;
        e = sums[ne - LAT + 1] * ((longint'(1) << FRAC) / (W * W));
        checks++;
        if (longint'(mean) != e) begin
          failures++;
          if (failures < 10) $display("input %0d: %0d vs %0d", ne - LAT + 1, mean, e);
        end
      end
      en = ($urandom_range(0, 9) < 7);
      for (int i = 0; i < W * W; i++) win[i] = (ne % 40 == 3) ? 8'd255 : 8'($urandom);
      @(posedge clk);
      if (en) begin
        ne++;
        sums[ne] = 0;
        for (int i = 0; i < W * W; i++) sums[ne] += win[i];
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
