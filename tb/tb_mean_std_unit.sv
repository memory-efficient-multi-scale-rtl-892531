// tb_mean_std_unit -- self-checking test of the streaming mean / standard
// deviation unit.
//
// Four "images" of random signed raw responses with random ROI bits (and
// random valid / enable gaps) are streamed; 'finish' follows the last sample
// by one cycle. The mean (truncated toward zero) and sqrt(E[x^2] - mean^2)
// from the reference model must appear when 'done' pulses, within the
// expected number of cycles. One image has an empty ROI (both results zero)
// and one has mostly negative responses.
module tb_mean_std_unit;
  import msld_pkg::*;
  import msld_ref::*;
  localparam int NPIX = 3000;
  localparam int CNT_W = $clog2(NPIX + 1);
  // sum-of-squares divider (2*RAW_W+CNT_W) + square root (RAW_W) + control
  localparam int MAXLAT = (2 * RAW_W + CNT_W) + RAW_W + 8;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0, valid = 1'b0, mask = 1'b0;
  logic finish = 1'b0;
  always #5 clk = ~clk;
  logic signed [RAW_W-1:0] r;
  logic busy, done;
  logic signed [RAW_W-1:0] mean;
  logic [RAW_W-1:0] sdev;
  logic [CNT_W-1:0] count;

  mean_std_unit #(.NPIX(NPIX)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .valid(valid), .mask(mask), .r(r),
    .finish(finish), .busy(busy), .done(done), .mean(mean), .sdev(sdev), .count(count)
  );

  int checks = 0, failures = 0;

  task automatic run_image(input int n, input int mode);
    longint cnt, em, es;
    big_t sum, sq;
    int t;
    cnt = 0; sum = 0; sq = 0;
    @(negedge clk); clr = 1'b1; @(negedge clk); clr = 1'b0;
    for (int i = 0; i < n; i++) begin
      en    = ($urandom_range(0, 4) != 0);
      valid = ($urandom_range(0, 9) != 0);
      mask  = (mode == 1) ? 1'b0 : 1'($urandom);
      case (mode)
        2:       r = RAW_W'(-$signed($urandom_range(0, 40 << FRAC)) + 1000);
        3:       r = RAW_W'($urandom_range(0, 1)) ? RAW_W'(255 << FRAC) - 1 : -RAW_W'(255 << FRAC) + 1;
        default: r = RAW_W'($signed($urandom_range(0, 60 << FRAC)) - (20 << FRAC));
      endcase
      if (en && valid && mask) begin
        cnt++; sum += longint'(r); sq += big_t'(longint'(r)) * longint'(r);
      end
      @(negedge clk);
    end
    en = 1'b0;
    finish = 1'b1; @(negedge clk); finish = 1'b0;
    t = 0;
    while (!done && t < 1000) begin @(negedge clk); t++; end
    stats(cnt, sum, sq, em, es);
    checks += 4;
    if (!done)                         begin failures++; $display("no done"); end
    if (t > MAXLAT)                    begin failures++; $display("latency %0d", t); end
    if (longint'(mean) != em)          begin failures++; $display("mean %0d vs %0d", mean, em); end
    if (longint'(sdev) != es)          begin failures++; $display("sdev %0d vs %0d", sdev, es); end
    checks++;
    if (longint'(count) != cnt)        begin failures++; $display("count %0d vs %0d", count, cnt); end
  endtask

  initial begin
    r = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_image(NPIX, 0);
    run_image(500, 1);
    run_image(NPIX, 2);
    run_image(NPIX, 3);
    run_image(NPIX, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
