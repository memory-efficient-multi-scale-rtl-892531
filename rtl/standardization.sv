// standardization -- standardization module of one scale, R' = (R - mean)/std.
//
// Between the two passes, 'load' hands over the mean and standard deviation
// found in the first pass for this scale. The module keeps the mean and
// replaces the division by a multiplication: a sequential divider forms the
// reciprocal inv = floor(2^(2*FRAC) / std) once (FRAC fractional bits; zero
// when std is zero, which makes R' zero). During the second pass each raw
// response is then standardized on the fly:
//   stage 1: d  = R - mean
//   stage 2: R' = (d * inv) >>> FRAC, saturated to STD_W bits
// so R' has FRAC fractional bits. The source gives the inputs (raw response,
// mean, standard deviation) and the function; computing the reciprocal once,
// the floor rounding and the saturation are this design's choices.
//
// Timing: 'busy' is high for 2*FRAC+2 cycles after 'load'; z belongs to the
// raw response presented LAT = 2 enabled cycles earlier.
module standardization
  import msld_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic signed [RAW_W-1:0] mean_in,
  input  logic        [RAW_W-1:0] sdev_in,
  output logic                    busy,
  input  logic                    en,
  input  logic signed [RAW_W-1:0] r,
  output logic signed [STD_W-1:0] z
);
  localparam int unsigned INV_W  = 2 * FRAC + 1;
  localparam int unsigned PROD_W = RAW_W + 1 + INV_W + 1;
  localparam logic signed [PROD_W-1:0] ZMAX = PROD_W'({1'b0, {(STD_W-1){1'b1}}});
  localparam logic signed [PROD_W-1:0] ZMIN = -ZMAX - 1;

  logic signed [RAW_W-1:0] mean_q;
  logic        [INV_W-1:0] inv_q, q;
  logic                    div_start, div_busy, div_done, zero_sd;
  logic signed [RAW_W:0]   d;
  logic signed [PROD_W-1:0] prod, shifted;

  seq_div #(.NW(INV_W), .DW(RAW_W)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start), .a(INV_W'(1) << (2*FRAC)), .b(sdev_in),
    .busy(div_busy), .done(div_done), .q(q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mean_q    <= '0;
      inv_q     <= '0;
      zero_sd   <= 1'b0;
      div_start <= 1'b0;
    end else begin
      div_start <= 1'b0;
      if (load) begin
        mean_q    <= mean_in;
        zero_sd   <= (sdev_in == '0);
        div_start <= 1'b1;
      end
      if (div_done) inv_q <= zero_sd ? '0 : q;
    end
  end

  assign busy = div_start || div_busy;

  assign prod    = PROD_W'(d) * signed'(PROD_W'(inv_q));
  assign shifted = prod >>> FRAC;

  always_ff @(posedge clk) begin
    if (en) begin
      d <= (RAW_W+1)'(r) - (RAW_W+1)'(mean_q);
      if (shifted > ZMAX)      z <= STD_W'(ZMAX);
      else if (shifted < ZMIN) z <= STD_W'(ZMIN);
      else                     z <= STD_W'(shifted);
    end
  end

endmodule
