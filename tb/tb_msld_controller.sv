// tb_msld_controller -- self-checking test of the two-pass scheduler.
//
// The datapath is modelled: a result reaches the pipeline end LATX enabled
// cycles after its pixel is pushed (fill pushes continue the count), the
// statistics units stay busy for 30 cycles after 'finish', the
// standardization units for 20 cycles after 'load'. With random input gaps
// and random output back-pressure, three frames are run. Checked: exactly
// NPIX pixels accepted per pass, fill pushes only after the last pixel, no
// datapath enable while the output is full in pass 2, one finish and one load
// per frame, load only after the statistics are ready, phase sequence
// CLEAR, PASS1, STATS, LOAD, CLEAR, PASS2 and one frame_done per frame.
module tb_msld_controller;
  import msld_pkg::*;
  localparam int NPIX = 50, LATX = 17, FRAMES = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, out_full = 1'b0, tail_valid, stats_busy, std_busy;
  logic clr_pass, clr_stats, en, fill, in_ready, pass2, finish, load, frame_done;
  phase_e phase;

  msld_controller #(.NPIX(NPIX)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .out_full(out_full),
    .tail_valid(tail_valid), .stats_busy(stats_busy), .std_busy(std_busy),
    .clr_pass(clr_pass), .clr_stats(clr_stats), .en(en), .fill(fill),
    .in_ready(in_ready), .pass2(pass2), .finish(finish), .load(load),
    .frame_done(frame_done), .phase(phase)
  );

  int checks = 0, failures = 0;
  int k_en = 0, accepted = 0, st_cnt = 0, sd_cnt = 0;
  int n_finish = 0, n_load = 0, n_done = 0, n_fill = 0, n_stall_out = 0;
  phase_e last_phase = PH_CLEAR;
  phase_e seq [$];

  assign tail_valid = (k_en >= LATX) && (k_en - LATX < NPIX);
  assign stats_busy = (st_cnt != 0);
  assign std_busy   = (sd_cnt != 0);

  task automatic fail(input string m);
    failures++;
    if (failures < 10) $display("%s", m);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (clr_pass) begin k_en <= 0; accepted <= 0; end
    else if (en) k_en <= k_en + 1;
    if (en && !fill && in_valid) accepted <= accepted + 1;
    if (en && fill) begin
      n_fill <= n_fill + 1;
      checks++;
      if (accepted != NPIX) fail("fill before the last pixel");
    end
    if (pass2 && out_full) begin
      n_stall_out <= n_stall_out + 1;
      checks++;
      if (en) fail("enable while output full");
    end
    st_cnt <= finish ? 30 : (st_cnt != 0) ? st_cnt - 1 : 0;
    sd_cnt <= load ? 20 : (sd_cnt != 0) ? sd_cnt - 1 : 0;
    if (finish) begin
      n_finish <= n_finish + 1;
      checks++;
      if (accepted != NPIX) fail("finish before all pixels");
    end
    if (load) begin
      n_load <= n_load + 1;
      checks++;
      if (st_cnt != 0) fail("load while statistics busy");
    end
    if (frame_done) n_done <= n_done + 1;
    if (phase != last_phase) begin seq.push_back(phase); last_phase <= phase; end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (n_done < FRAMES) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      out_full = ($urandom_range(0, 4) == 0);
    end
    checks += 4;
    if (n_finish != FRAMES) fail("finish count");
    if (n_load != FRAMES)   fail("load count");
    if (n_fill == 0)        fail("no fill");
    if (n_stall_out == 0)   fail("no output stall");
    // expected phase order, repeated per frame
    for (int f = 0; f < FRAMES; f++) begin
      phase_e exp_seq [5] = '{PH_PASS1, PH_STATS, PH_LOAD, PH_CLEAR, PH_PASS2};
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (seq.size() == 0 || seq.pop_front() != exp_seq[i]) fail("phase sequence");
      end
      if (f < FRAMES - 1) void'(seq.pop_front());   // CLEAR of the next frame
    end
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
