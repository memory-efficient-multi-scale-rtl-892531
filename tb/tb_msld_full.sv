// tb_msld_full -- test of msld_top with every parameter at its default (W = 15,
// 565 x 584 pixels), one frame, host always ready.
//
// The testbench plays the host: it generates a synthetic fundus-like frame
// (bright background with a gradient and noise, dark vessel lines, circular
// ROI mask), writes it into the input FIFO twice (pass 1 and pass 2), and
// reads the processed image from the output FIFO. Expected results come from
// the msld_ref behavioural model: raw responses of every scale, ROI mean and
// standard deviation per scale, standardized and combined responses. It checks
// every output pixel, the stored per-scale statistics, and the number of
// cycles per frame. It also counts how often each mechanism of the design was
// exercised: input stalls, output back-pressure stalls, flush (fill) cycles,
// ROI and non-ROI pixels, first and second passes.
module tb_msld_full;
  import msld_pkg::*;
  import msld_ref::*;

  localparam int TW     = W_DEF;
  localparam int TNCOLS = NCOLS_DEF;
  localparam int TNROWS = NROWS_DEF;
  localparam int FRAMES = 1;
  localparam int STALL  = 0;   // percent of cycles the host idles
  localparam int NPIX   = TNCOLS * TNROWS;
  localparam int NS     = (TW + 1) / 2;
  localparam int OFFS   = ((TW - 1) / 2) * TNCOLS + (TW - 1) / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    h_wr_en, h_wr_full, h_rd_en, h_rd_empty, frame_done;
  pix_in_t h_wr_data;
  logic signed [OUT_W-1:0] h_rd_data;
  phase_e  phase;
  logic signed [RAW_W-1:0] stat_mean [NS];
  logic        [RAW_W-1:0] stat_sdev [NS];

  msld_top u_dut (
    .clk(clk), .rst_n(rst_n),
    .h_wr_en(h_wr_en), .h_wr_data(h_wr_data), .h_wr_full(h_wr_full),
    .h_rd_en(h_rd_en), .h_rd_data(h_rd_data), .h_rd_empty(h_rd_empty),
    .phase(phase), .frame_done(frame_done),
    .stat_mean(stat_mean), .stat_sdev(stat_sdev)
  );

  int checks = 0, failures = 0;
  byte unsigned img[];
  bit           msk[];
  longint       expv[];
  longint       emean[NS], esdev[NS];
  int           frame = 0;
  longint       cyc = 0;
  // mechanism counters
  longint n_in_stall = 0, n_out_stall = 0, n_fill = 0, n_roi = 0, n_nonroi = 0;
  longint n_pass1 = 0, n_pass2 = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && u_dut.u_core.u_ctrl.streaming && !u_dut.u_core.u_ctrl.en) begin
      if (u_dut.u_core.u_ctrl.stall_out) n_out_stall <= n_out_stall + 1;
      else                               n_in_stall  <= n_in_stall + 1;
    end
    if (rst_n && u_dut.u_core.en && u_dut.u_core.fill) n_fill <= n_fill + 1;
    if (rst_n && u_dut.u_core.finish) n_pass1 <= n_pass1 + 1;
    if (rst_n && frame_done)          n_pass2 <= n_pass2 + 1;
  end

  function automatic int clip(input int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  task automatic make_frame(input int f);
    int cx, cy, rad;
    img = new[NPIX];
    msk = new[NPIX];
    cx = TNCOLS / 2; cy = TNROWS / 2;
    rad = ((TNCOLS < TNROWS) ? TNCOLS : TNROWS) * 9 / 20;
    for (int y = 0; y < TNROWS; y++)
      for (int x = 0; x < TNCOLS; x++) begin
        int v = 120 + (x * 60) / TNCOLS + (y * 20) / TNROWS + int'($urandom_range(0, 24)) - 12;
        // vessels: a few dark straight lines of different slope and width
        if (((x + 2 * y + 3 * f) % 23) < 2)          v -= 45;
        if (((3 * x - y + 100 * TNCOLS) % 31) == 0)   v -= 30;
        if (((y + f) % 17) == 3)                     v -= 25;
        img[y*TNCOLS + x] = byte'(clip(v));
        msk[y*TNCOLS + x] = ((x-cx)*(x-cx) + (y-cy)*(y-cy) <= rad*rad);
      end
  endtask

  task automatic make_expected();
    longint r[];
    longint allr[];
    longint cnt;
    big_t   sum[NS], sq[NS];
    longint z[];
    allr = new[NPIX * NS];
    cnt = 0;
    for (int s = 0; s < NS; s++) begin sum[s] = 0; sq[s] = 0; end
    for (int i = 0; i < NPIX; i++) begin
      raw(TW, TNCOLS, img, i, r);
      for (int s = 0; s < NS; s++) begin
        allr[i*NS + s] = r[s];
        if (msk[i]) begin sum[s] += r[s]; sq[s] += big_t'(r[s]) * r[s]; end
      end
      if (msk[i]) cnt++;
    end
    for (int s = 0; s < NS; s++) stats(cnt, sum[s], sq[s], emean[s], esdev[s]);
    expv = new[NPIX];
    z = new[NS];
    for (int i = 0; i < NPIX; i++) begin
      for (int s = 0; s < NS; s++) z[s] = standardize(allr[i*NS + s], emean[s], esdev[s]);
      expv[i] = msk[i] ? combine(z, 255 - int'(img[i])) : 0;
    end
  endtask

  // host drives at the falling edge; the FIFOs act at the rising edge
  task automatic send_pass();
    int i = 0;
    while (i < NPIX) begin
      @(negedge clk);
      if (!h_wr_full && !(STALL > 0 && $urandom_range(0, 99) < STALL)) begin
        h_wr_en   = 1'b1;
        h_wr_data = '{mask: msk[i], green: img[i]};
        i++;
      end else h_wr_en = 1'b0;
    end
    @(negedge clk);
    h_wr_en = 1'b0;
  endtask

  task automatic receive_frame();
    int k = 0;
    while (k < NPIX) begin
      @(negedge clk);
      h_rd_en = (STALL == 0) || ($urandom_range(0, 99) >= 2 * STALL);
      if (h_rd_en && !h_rd_empty) begin
        checks++;
        if (longint'(h_rd_data) != expv[k]) begin
          failures++;
          if (failures < 10)
            $display("frame %0d pixel %0d: got %0d expected %0d", frame, k,
                     h_rd_data, expv[k]);
        end
        if (msk[k]) n_roi++; else n_nonroi++;
        k++;
      end
    end
    @(negedge clk);
    h_rd_en = 1'b0;
  endtask

  initial begin : main
    longint t0, tf;
    h_wr_en = 1'b0; h_rd_en = 1'b0; h_wr_data = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (frame = 0; frame < FRAMES; frame++) begin
      make_frame(frame);
      make_expected();
      t0 = cyc;
      fork
        begin send_pass(); send_pass(); end
        receive_frame();
      join
      wait (n_pass2 == longint'(frame + 1));
      tf = cyc - t0;
      // statistics kept between the passes
      for (int s = 0; s < NS; s++) begin
        checks += 2;
        if (longint'(stat_mean[s]) != emean[s] || longint'(stat_sdev[s]) != esdev[s]) begin
          failures++;
          $display("scale %0d: mean %0d/%0d sdev %0d/%0d", s + 1, stat_mean[s], emean[s],
                   stat_sdev[s], esdev[s]);
        end
      end
      // rate: one pixel per cycle in each pass when the host never stalls
      if (STALL == 0) begin
        checks++;
        if (tf > 2 * (NPIX + OFFS + 64) + 600) begin
          failures++;
          $display("frame took %0d cycles, more than two passes at one pixel per cycle", tf);
        end
      end
      $display("frame %0d: %0d cycles for %0d pixels x 2 passes", frame, tf, NPIX);
    end
    $display("mechanisms: input stalls %0d, output stalls %0d, fill cycles %0d, ROI pixels %0d, non-ROI pixels %0d, first passes %0d, second passes %0d",
             n_in_stall, n_out_stall, n_fill, n_roi, n_nonroi, n_pass1, n_pass2);
    checks += 7;
    if (STALL > 0 && n_in_stall == 0)  failures++;
    if (STALL > 0 && n_out_stall == 0) failures++;
    if (n_fill == 0)   failures++;
    if (n_roi == 0)    failures++;
    if (n_nonroi == 0) failures++;
    if (n_pass1 != FRAMES) failures++;
    if (n_pass2 != FRAMES) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired: controller state %0d, results %0d", u_dut.u_core.u_ctrl.state, u_dut.u_core.u_ctrl.out_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
