// tb_combined_response -- self-checking test of the combined response module
// (eight scales, the default).
//
// Random standardized responses (including saturated extremes) and random
// inverted green values enter with a gated enable; clog2(9)+1 = 5 enabled
// clocks later y must equal floor((sum z + igc*2^18) * floor(2^18/9) / 2^18),
// saturated to 32 bits.
module tb_combined_response;
  import msld_pkg::*;
  import msld_ref::*;
  localparam int NS = n_scales(W_DEF);
  localparam int LAT = $clog2(NS + 1) + 1;
  localparam int NIN = 3000;

  logic clk = 1'b0, en = 1'b0;
  always #5 clk = ~clk;
  logic signed [STD_W-1:0] z [NS];
  logic [PIX_W-1:0] igc;
  logic signed [OUT_W-1:0] y;

  combined_response #(.NS(NS)) dut (.clk(clk), .en(en), .z(z), .igc(igc), .y(y));

  int checks = 0, failures = 0, ne = 0;
  longint expv [NIN+1];

  initial begin
    while (ne < NIN) begin
      @(negedge clk);
      if (ne >= LAT) begin
        checks++;
        if (longint'(y) != expv[ne - LAT + 1]) begin
          failures++;
          if (failures < 10) $display("input %0d: %0d vs %0d", ne - LAT + 1, y, expv[ne - LAT + 1]);
        end
      end
      en  = ($urandom_range(0, 9) < 7);
      igc = 8'($urandom);
      for (int s = 0; s < NS; s++) begin
        if (ne % 25 == 1)      z[s] = {1'b0, {(STD_W-1){1'b1}}};
        else if (ne % 25 == 2) z[s] = {1'b1, {(STD_W-1){1'b0}}};
        else                   z[s] = STD_W'($signed($urandom_range(0, 12 << FRAC)) - (6 << FRAC));
      end
      @(posedge clk);
      if (en) begin
        longint zz[];
        ne++;
        zz = new[NS];
        for (int s = 0; s < NS; s++) zz[s] = longint'(z[s]);
        expv[ne] = combine(zz, int'(igc));
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
