// tb_standardization -- self-checking test of the standardization module.
//
// For several (mean, std) pairs, including a tiny std (saturation) and a
// zero std, the statistics are loaded, 'busy' must fall within 2*FRAC+4
// cycles, and then a stream of random raw responses with a gated enable must
// give (R - mean) * floor(2^36/std) >>> 18, saturated to 36 bits, exactly two
// enabled clocks later.
module tb_standardization;
  import msld_pkg::*;
  import msld_ref::*;
  localparam int LAT = 2, NIN = 500;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, en = 1'b0;
  always #5 clk = ~clk;
  logic signed [RAW_W-1:0] mean_in, r;
  logic [RAW_W-1:0] sdev_in;
  logic busy;
  logic signed [STD_W-1:0] z;

  standardization dut (
    .clk(clk), .rst_n(rst_n), .load(load), .mean_in(mean_in), .sdev_in(sdev_in),
    .busy(busy), .en(en), .r(r), .z(z)
  );

  int checks = 0, failures = 0;
  longint expv [NIN+1];

  task automatic run(input longint m, input longint sd);
    int ne, t;
    @(negedge clk);
    mean_in = RAW_W'(m); sdev_in = RAW_W'(sd); load = 1'b1;
    @(negedge clk); load = 1'b0;
    t = 0;
    while (busy && t < 200) begin @(negedge clk); t++; end
    checks++;
    if (t > 2 * FRAC + 4) begin failures++; $display("load took %0d cycles", t); end
    ne = 0;
    while (ne < NIN) begin
      if (ne >= LAT) begin
        checks++;
        if (longint'(z) != expv[ne - LAT + 1]) begin
          failures++;
          if (failures < 10) $display("std %0d input %0d: %0d vs %0d", sd, ne - LAT + 1, z,
                                      expv[ne - LAT + 1]);
        end
      end
      en = ($urandom_range(0, 9) < 7);
      r  = RAW_W'($signed($urandom_range(0, 200 << FRAC)) - (100 << FRAC));
      @(negedge clk);
      if (en) begin ne++; expv[ne] = standardize(longint'(r), m, sd); end
    end
  endtask

  initial begin
    mean_in = '0; sdev_in = '0; r = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(3 << FRAC, 5 << FRAC);
    run(-(7 << FRAC) + 12345, (12 << FRAC) + 999);
    run(1234567, 262);          // std ~ 0.001: saturates
    run(0, 1 << FRAC);
    run(5 << FRAC, 0);          // zero std: all responses 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
