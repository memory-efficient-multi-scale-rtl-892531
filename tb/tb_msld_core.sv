// tb_msld_core -- self-checking test of the MSLD core without FIFOs, at a
// reduced size (W = 7, four scales, 24 x 18 pixel frame).
//
// A frame of random pixels with a circular ROI is streamed twice through the
// valid/ready input, with random input gaps and random output 'full'. The
// per-scale mean / standard deviation after pass 1 and every output pixel of
// pass 2 are compared with the msld_ref model. The first result must leave
// the core a fixed number of enabled cycles after the first pixel of pass 2:
// h*NCOLS + h + 1 + raw_lat(W) + 2 + clog2(NS+1) + 1.
module tb_msld_core;
  import msld_pkg::*;
  import msld_ref::*;
  localparam int TW = 7, NC = 24, NR = 18, NPIX = NC * NR, NS = (TW + 1) / 2;
  localparam int H = (TW - 1) / 2;
  localparam int LAT = H * NC + H + 1 + raw_lat(TW) + 2 + $clog2(NS + 1) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, out_valid, out_full = 1'b0, frame_done;
  pix_in_t in_data = '0;
  logic signed [OUT_W-1:0] out_data;
  phase_e phase;
  logic signed [RAW_W-1:0] stat_mean [NS];
  logic        [RAW_W-1:0] stat_sdev [NS];

  msld_core #(.W(TW), .NCOLS(NC), .NROWS(NR)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .in_ready(in_ready),
    .out_valid(out_valid), .out_data(out_data), .out_full(out_full),
    .phase(phase), .frame_done(frame_done), .stat_mean(stat_mean), .stat_sdev(stat_sdev)
  );

  int checks = 0, failures = 0;
  byte unsigned img[];
  bit msk[];
  longint expv[];
  longint emean[NS], esdev[NS];
  int n_en = 0, first_out_en = -1, nout = 0;
  bit in_pass2 = 0;

  // enabled cycles of pass 2 until the first result
  always @(posedge clk) if (rst_n) begin
    if (phase == PH_PASS2 && dut.en) begin
      n_en <= n_en + 1;
      if (out_valid && first_out_en < 0) first_out_en <= n_en;
    end
  end

  initial begin
    longint r[], allr[], cnt;
    big_t sum[NS], sq[NS];
    longint z[];
    img = new[NPIX]; msk = new[NPIX]; expv = new[NPIX]; allr = new[NPIX * NS];
    for (int y = 0; y < NR; y++)
      for (int x = 0; x < NC; x++) begin
        img[y*NC + x] = 8'($urandom_range(80, 220));
        if ((x + y) % 9 == 0) img[y*NC + x] = 8'($urandom_range(10, 60));
        msk[y*NC + x] = ((x - NC/2)*(x - NC/2) + (y - NR/2)*(y - NR/2) <= 64);
      end
    cnt = 0;
    for (int s = 0; s < NS; s++) begin sum[s] = 0; sq[s] = 0; end
    for (int i = 0; i < NPIX; i++) begin
      raw(TW, NC, img, i, r);
      for (int s = 0; s < NS; s++) begin
        allr[i*NS + s] = r[s];
        if (msk[i]) begin sum[s] += r[s]; sq[s] += big_t'(r[s]) * r[s]; end
      end
      if (msk[i]) cnt++;
    end
    for (int s = 0; s < NS; s++) stats(cnt, sum[s], sq[s], emean[s], esdev[s]);
    z = new[NS];
    for (int i = 0; i < NPIX; i++) begin
      for (int s = 0; s < NS; s++) z[s] = standardize(allr[i*NS + s], emean[s], esdev[s]);
      expv[i] = msk[i] ? combine(z, 255 - int'(img[i])) : 0;
    end

    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      int i;
      bit take;
      i = 0;
      while (i < NPIX) begin
        @(negedge clk);
        // a pixel offered in the previous cycle was taken if in_ready was high
        in_valid = ($urandom_range(0, 4) != 0);
        in_data  = '{mask: msk[i], green: img[i]};
        out_full = (pass == 1) && ($urandom_range(0, 5) == 0);
        #1 take = in_valid && in_ready;
        @(posedge clk);
        if (take) i++;
      end
      @(negedge clk);
      in_valid = 1'b0;
      if (pass == 0) begin
        wait (phase == PH_PASS2);
        for (int s = 0; s < NS; s++) begin
          checks += 2;
          if (longint'(stat_mean[s]) != emean[s]) begin failures++; $display("mean %0d", s); end
          if (longint'(stat_sdev[s]) != esdev[s]) begin failures++; $display("sdev %0d", s); end
        end
      end
    end
    while (nout < NPIX) begin
      @(negedge clk);
      out_full = ($urandom_range(0, 5) == 0);
    end
    out_full = 1'b0;
    checks++;
    if (first_out_en != LAT) begin
      failures++;
      $display("first result after %0d enabled cycles, expected %0d", first_out_en, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (longint'(out_data) != expv[nout]) begin
      failures++;
      if (failures < 10) $display("pixel %0d: %0d vs %0d", nout, out_data, expv[nout]);
    end
    nout <= nout + 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
