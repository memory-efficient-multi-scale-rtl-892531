// window_mean -- mean grey level of the W x W window (I_avg^W).
//
// All W*W pixels of the window enter a fully pipelined adder tree
// (clog2(W*W) register levels); the sum is then multiplied by the reciprocal
// coefficient floor(2^FRAC / (W*W)) and registered, giving an unsigned mean
// with FRAC fractional bits. The source describes this unit as a pipelined,
// word-length optimised tree; the tree shape and the single registered
// multiplier are this design's.
//
// Timing: 'mean' belongs to the window presented LAT = clog2(W*W)+1 enabled
// cycles earlier.
module window_mean
  import msld_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  logic              clk,
  input  logic              en,
  input  logic [PIX_W-1:0]  win [W*W],
  output logic [MEAN_W-1:0] mean
);
  localparam int unsigned N     = W * W;
  localparam int unsigned SUM_W = PIX_W + $clog2(N);
  localparam logic [FRAC:0] RC  = (FRAC+1)'(recip(N));

  logic [SUM_W-1:0] ext [N];
  logic [SUM_W-1:0] sum;
  logic [SUM_W+FRAC:0] prod;

  always_comb begin
    for (int i = 0; i < N; i++) ext[i] = SUM_W'(win[i]);
  end

  pipe_add_tree #(.N(N), .DW(SUM_W)) u_tree (
    .clk(clk), .en(en), .din(ext), .sum(sum)
  );

  assign prod = (SUM_W+FRAC+1)'(sum) * (SUM_W+FRAC+1)'(RC);

  always_ff @(posedge clk) begin
    if (en) mean <= MEAN_W'(prod);
  end

endmodule
