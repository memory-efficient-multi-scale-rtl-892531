// rrcm -- raw response computation module of one scale.
//
// Receives the twelve line means of one scale (one per orientation) and the
// window mean. The largest line mean I_max is found by comparing the inputs
// two by two in a pipelined tree (12 -> 6 -> 3 -> 2 -> 1, one register per
// level); the raw response R = I_max - I_avg is then formed and registered as
// a signed number with FRAC fractional bits. The window mean is delayed inside
// the module by the depth of the comparator tree so that both operands of the
// subtraction belong to the same pixel. Structure after the source's figure
// of this module; tree register placement is this design's.
//
// Timing: 'r' belongs to inputs presented LAT = clog2(N_ORIENT)+1 enabled
// cycles earlier.
module rrcm
  import msld_pkg::*;
(
  input  logic                     clk,
  input  logic                     en,
  input  logic [MEAN_W-1:0]        lm  [N_ORIENT],  // line means, 0..165 deg
  input  logic [MEAN_W-1:0]        avg,             // window mean
  output logic signed [RAW_W-1:0]  r                // I_max - I_avg
);
  localparam int unsigned LEVELS = clog2u(N_ORIENT);

  function automatic int unsigned cnt(input int unsigned l);
    int unsigned c = N_ORIENT;
    for (int unsigned i = 0; i < l; i++) c = (c + 1) / 2;
    return c;
  endfunction

  logic [MEAN_W-1:0] lv [LEVELS+1][N_ORIENT];
  logic [MEAN_W-1:0] avg_d [LEVELS+1];

  assign lv[0]    = lm;
  assign avg_d[0] = avg;

  always_ff @(posedge clk) begin
    if (en) begin
      for (int l = 1; l <= LEVELS; l++) begin
        avg_d[l] <= avg_d[l-1];
        for (int i = 0; i < N_ORIENT; i++) begin
          if (i >= cnt(l))                lv[l][i] <= '0;
          else if (2*i + 1 < cnt(l - 1))
            lv[l][i] <= (lv[l-1][2*i] >= lv[l-1][2*i+1]) ? lv[l-1][2*i] : lv[l-1][2*i+1];
          else                            lv[l][i] <= lv[l-1][2*i];
        end
      end
      r <= signed'(RAW_W'(lv[LEVELS][0])) - signed'(RAW_W'(avg_d[LEVELS]));
    end
  end

endmodule
