// msld_top -- programmable-logic side of the retinal vessel segmentation
// system: input FIFO, MSLD core, output FIFO.
//
// The host (processor and its link core, outside this design) writes image
// and mask words into the input FIFO and reads the processed image from the
// output FIFO; both ports are plain FIFO write/read ports. Each frame is
// written twice, pass 1 and pass 2, and yields NROWS*NCOLS results during
// pass 2. The mean and standard deviation of every scale, the only values
// kept between the passes, are also visible as outputs. Input word: {mask, green[7:0]}. Output word: signed combined
// response, OUT_W bits with FRAC fractional bits, zero outside the ROI.
module msld_top
  import msld_pkg::*;
#(
  parameter int unsigned W          = W_DEF,
  parameter int unsigned NCOLS      = NCOLS_DEF,
  parameter int unsigned NROWS      = NROWS_DEF,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host -> PL: image and mask transfer
  input  logic                    h_wr_en,
  input  pix_in_t                 h_wr_data,
  output logic                    h_wr_full,
  // PL -> host: processed image transfer
  input  logic                    h_rd_en,
  output logic signed [OUT_W-1:0] h_rd_data,
  output logic                    h_rd_empty,
  // status
  output phase_e                  phase,
  output logic                    frame_done,
  // per-scale statistics stored between the passes
  output logic signed [RAW_W-1:0] stat_mean [(W+1)/2],
  output logic        [RAW_W-1:0] stat_sdev [(W+1)/2]
);
  logic    in_empty, in_ready, c_out_valid, out_full;
  pix_in_t in_head;
  logic signed [OUT_W-1:0] c_out_data;
  logic [$clog2(FIFO_DEPTH):0] in_level, out_level;

  stream_fifo #(.DW($bits(pix_in_t)), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk(clk), .rst_n(rst_n),
    .wr_en(h_wr_en), .wr_data(h_wr_data), .full(h_wr_full),
    .rd_en(in_ready && !in_empty), .rd_data(in_head), .empty(in_empty),
    .level(in_level)
  );

  msld_core #(.W(W), .NCOLS(NCOLS), .NROWS(NROWS)) u_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(!in_empty), .in_data(in_head), .in_ready(in_ready),
    .out_valid(c_out_valid), .out_data(c_out_data), .out_full(out_full),
    .phase(phase), .frame_done(frame_done),
    .stat_mean(stat_mean), .stat_sdev(stat_sdev)
  );

  stream_fifo #(.DW(OUT_W), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk(clk), .rst_n(rst_n),
    .wr_en(c_out_valid), .wr_data(c_out_data), .full(out_full),
    .rd_en(h_rd_en), .rd_data(h_rd_data), .empty(h_rd_empty),
    .level(out_level)
  );

endmodule
