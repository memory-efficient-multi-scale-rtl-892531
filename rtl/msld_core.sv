// msld_core -- the multi-scale line detector core.
//
// Streams a frame (green value + ROI mask bit per pixel, raster order) twice:
//   pass 1: line buffer -> raw_response_unit -> one mean_std_unit per scale.
//           At the end of the image each unit holds the mean and standard
//           deviation of its scale over the ROI: 2 x NS values in total,
//           instead of NS raw-response images.
//   pass 2: line buffer -> raw_response_unit (recomputed) -> one
//           standardization unit per scale -> combined_response -> output.
// msld_controller sequences the passes and drives the single datapath enable.
// The ROI bit and the inverted centre pixel travel beside the arithmetic in
// delay lines of matching depth. Output pixels outside the ROI are zero (this
// design's choice; the source does not say what is sent there).
//
// Interface: valid/ready input stream; output stream with a 'full' input
// (write when out_valid). One pixel per clock in both passes when neither
// stream stalls. Output value: signed, OUT_W bits, FRAC fractional bits.
// Latency from a pixel entering to its result leaving, in enabled cycles:
// h*NCOLS + h (line buffer look-ahead) + 1 + raw_lat(W) + 2 + clog2(NS+1) + 1.
module msld_core
  import msld_pkg::*;
#(
  parameter int unsigned W     = W_DEF,
  parameter int unsigned NCOLS = NCOLS_DEF,
  parameter int unsigned NROWS = NROWS_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // image and mask stream
  input  logic                    in_valid,
  input  pix_in_t                 in_data,
  output logic                    in_ready,
  // processed image stream
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data,
  input  logic                    out_full,
  // status
  output phase_e                  phase,
  output logic                    frame_done,
  output logic signed [RAW_W-1:0] stat_mean [(W+1)/2],
  output logic        [RAW_W-1:0] stat_sdev [(W+1)/2]
);
  localparam int unsigned NS       = (W + 1) / 2;
  localparam int unsigned H        = (W - 1) / 2;
  localparam int unsigned NPIX     = NROWS * NCOLS;
  localparam int unsigned RAW_LAT  = raw_lat(W);
  localparam int unsigned STD_LAT  = 2;
  localparam int unsigned COMB_LAT = clog2u(NS + 1) + 1;

  logic clr_pass, clr_stats, en, fill, pass2, finish, load;
  logic tail_valid;

  // ---- line buffer --------------------------------------------------------
  logic [PIX_W-1:0] win [W*W];
  logic             ctr_valid, ctr_mask;

  line_buffer #(.W(W), .NCOLS(NCOLS), .NROWS(NROWS)) u_lb (
    .clk(clk), .rst_n(rst_n), .clr(clr_pass), .en(en), .fill(fill), .din(in_data),
    .win(win), .ctr_valid(ctr_valid), .ctr_mask(ctr_mask)
  );

  // ---- raw responses, first and second pass -------------------------------
  logic signed [RAW_W-1:0] r [NS];
  raw_response_unit #(.W(W)) u_raw (.clk(clk), .en(en), .win(win), .r(r));

  logic             raw_valid, raw_mask;
  logic [PIX_W-1:0] raw_igc;
  pipe_delay #(.DW(1), .D(RAW_LAT)) u_dv_raw (
    .clk(clk), .en(en), .clr(clr_pass), .din(ctr_valid), .dout(raw_valid)
  );
  pipe_delay #(.DW(PIX_W + 1), .D(RAW_LAT)) u_dm_raw (
    .clk(clk), .en(en), .clr(1'b0), .din({ctr_mask, win[H*W + H]}),
    .dout({raw_mask, raw_igc})
  );

  // ---- statistics (first pass) and standardization (second pass) ----------
  logic [NS-1:0]           st_busy, st_done, sd_busy;
  logic signed [STD_W-1:0] z [NS];

  for (genvar s = 0; s < NS; s++) begin : g_scale
    logic [$clog2(NPIX+1)-1:0] cnt;
    mean_std_unit #(.NPIX(NPIX)) u_stat (
      .clk(clk), .rst_n(rst_n), .clr(clr_stats), .en(en && !pass2),
      .valid(raw_valid), .mask(raw_mask), .r(r[s]), .finish(finish),
      .busy(st_busy[s]), .done(st_done[s]), .mean(stat_mean[s]), .sdev(stat_sdev[s]),
      .count(cnt)
    );
    standardization u_std (
      .clk(clk), .rst_n(rst_n), .load(load), .mean_in(stat_mean[s]),
      .sdev_in(stat_sdev[s]), .busy(sd_busy[s]), .en(en), .r(r[s]), .z(z[s])
    );
  end

  // ---- combined response ---------------------------------------------------
  logic [PIX_W-1:0]        std_igc;
  logic signed [OUT_W-1:0] y;
  logic                    o_valid, o_mask;

  pipe_delay #(.DW(PIX_W), .D(STD_LAT)) u_d_igc (
    .clk(clk), .en(en), .clr(1'b0), .din(raw_igc), .dout(std_igc)
  );
  combined_response #(.NS(NS)) u_comb (
    .clk(clk), .en(en), .z(z), .igc(std_igc), .y(y)
  );
  pipe_delay #(.DW(1), .D(STD_LAT + COMB_LAT)) u_dv_out (
    .clk(clk), .en(en), .clr(clr_pass), .din(raw_valid), .dout(o_valid)
  );
  pipe_delay #(.DW(1), .D(STD_LAT + COMB_LAT)) u_dm_out (
    .clk(clk), .en(en), .clr(1'b0), .din(raw_mask), .dout(o_mask)
  );

  assign out_valid  = en && pass2 && o_valid;
  assign out_data   = o_mask ? y : '0;
  assign tail_valid = pass2 ? o_valid : raw_valid;

  // ---- scheduling ----------------------------------------------------------
  msld_controller #(.NPIX(NPIX)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .out_full(out_full),
    .tail_valid(tail_valid), .stats_busy(|st_busy), .std_busy(|sd_busy),
    .clr_pass(clr_pass), .clr_stats(clr_stats), .en(en), .fill(fill),
    .in_ready(in_ready), .pass2(pass2), .finish(finish), .load(load),
    .frame_done(frame_done), .phase(phase)
  );

  // results are only written when the output stream has room
  assert property (@(posedge clk) disable iff (!rst_n) out_valid |-> !out_full);

endmodule
