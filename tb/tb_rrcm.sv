// tb_rrcm -- self-checking test of the raw response computation module.
//
// Twelve random line means and a random window mean enter with a randomly
// gated enable; clog2(12)+1 = 5 enabled clocks later r must equal
// max(line means) - window mean (signed). The position of the maximum is
// varied over all twelve inputs, and ties are included.
module tb_rrcm;
  import msld_pkg::*;
  localparam int LAT = $clog2(N_ORIENT) + 1;
  localparam int NIN = 3000;

  logic clk = 1'b0, en = 1'b0;
  always #5 clk = ~clk;
  logic [MEAN_W-1:0] lm [N_ORIENT];
  logic [MEAN_W-1:0] avg;
  logic signed [RAW_W-1:0] r;

  rrcm dut (.clk(clk), .en(en), .lm(lm), .avg(avg), .r(r));

  int checks = 0, failures = 0, ne = 0;
  longint expv [NIN+1];

  initial begin
    while (ne < NIN) begin
      @(negedge clk);
      if (ne >= LAT) begin
        checks++;
        if (longint'(r) != expv[ne - LAT + 1]) begin
          failures++;
          if (failures < 10) $display("input %0d: %0d vs %0d", ne - LAT + 1, r, expv[ne - LAT + 1]);
        end
      end
      en = ($urandom_range(0, 9) < 7);
      for (int o = 0; o < N_ORIENT; o++) lm[o] = MEAN_W'($urandom_range(0, 255 << FRAC));
      lm[ne % N_ORIENT] = MEAN_W'(255 << FRAC) - MEAN_W'($urandom_range(0, 1000));
      if (ne % 7 == 0) lm[(ne + 5) % N_ORIENT] = lm[ne % N_ORIENT];
      avg = MEAN_W'($urandom_range(0, 255 << FRAC));
      @(posedge clk);
      if (en) begin
        longint mx;
        mx = 0;
        ne++;
        for (int o = 0; o < N_ORIENT; o++) if (longint'(lm[o]) > mx) mx = lm[o];
        expv[ne] = mx - longint'(avg);
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
