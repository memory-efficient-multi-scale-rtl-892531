// raw_response_unit -- raw line-detector response of every scale, one pixel
// per enabled cycle.
//
// Twelve LRCMs, one per orientation (0, 15, ..., 165 degrees), each receive
// the W window pixels that lie on their line; the line geometry comes from
// msld_pkg::line_tap. Each LRCM returns the line mean at all NS = (W+1)/2
// scales. A pipelined window-mean unit computes I_avg^W in parallel. The two
// pipelines differ in depth, so the shallower one is delayed by balancing
// registers. Output s of every LRCM, together with the window mean, is routed
// to the RRCM of scale s, which returns R_W^L = max line mean - window mean
// for L = 2s-1. This is the routing of the source's figure of twelve LRCMs
// feeding one RRCM per scale.
//
// Timing: r[] belongs to the window presented LAT = msld_pkg::raw_lat(W)
// enabled cycles earlier (for W = 15: max(8, 9) + 5 = 14).
module raw_response_unit
  import msld_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic [PIX_W-1:0]        win [W*W],
  output logic signed [RAW_W-1:0] r   [(W+1)/2]   // r[s-1]: scale s, L = 2s-1
);
  localparam int unsigned NS    = (W + 1) / 2;
  localparam int unsigned ALIGN = (lrcm_lat(W) > wmean_lat(W)) ? lrcm_lat(W) : wmean_lat(W);

  logic [MEAN_W-1:0] lm  [N_ORIENT][NS];  // LRCM outputs
  logic [MEAN_W-1:0] lmd [NS][N_ORIENT];  // balanced, regrouped by scale
  logic [MEAN_W-1:0] wm, wmd;

  for (genvar o = 0; o < N_ORIENT; o++) begin : g_line
    logic [PIX_W-1:0] p [W];
    for (genvar i = 0; i < W; i++) begin : g_tap
      assign p[i] = win[line_tap(W, o, i)];
    end
    lrcm #(.W(W)) u_lrcm (.clk(clk), .en(en), .p(p), .mean(lm[o]));
    for (genvar s = 0; s < NS; s++) begin : g_bal
      pipe_delay #(.DW(MEAN_W), .D(ALIGN - lrcm_lat(W))) u_d (
        .clk(clk), .en(en), .clr(1'b0), .din(lm[o][s]), .dout(lmd[s][o])
      );
    end
  end

  window_mean #(.W(W)) u_wmean (.clk(clk), .en(en), .win(win), .mean(wm));
  pipe_delay #(.DW(MEAN_W), .D(ALIGN - wmean_lat(W))) u_wd (
    .clk(clk), .en(en), .clr(1'b0), .din(wm), .dout(wmd)
  );

  for (genvar s = 0; s < NS; s++) begin : g_rrcm
    rrcm u_rrcm (.clk(clk), .en(en), .lm(lmd[s]), .avg(wmd), .r(r[s]));
  end

endmodule
