// pipe_add_tree -- fully pipelined binary adder tree.
//
// Adds N operands of DW bits two by two; every level of adders is followed by
// a register, so a new set of operands can enter every enabled cycle and the
// sum leaves LAT = clog2(N) enabled cycles later. An odd operand at the end
// of a level is passed on with a zero partner. Operands are two's-complement
// or unsigned alike: the caller extends them to DW bits, wide enough for the
// full sum. Used for the window mean (W*W pixels) and for the combined
// response (one term per scale plus the inverted green value).
module pipe_add_tree #(
  parameter int unsigned N  = 4,
  parameter int unsigned DW = 16
) (
  input  logic          clk,
  input  logic          en,
  input  logic [DW-1:0] din [N],
  output logic [DW-1:0] sum
);
  localparam int unsigned LEVELS = (N <= 1) ? 0 : $clog2(N);

  function automatic int unsigned cnt(input int unsigned l);
    int unsigned c = N;
    for (int unsigned i = 0; i < l; i++) c = (c + 1) / 2;
    return c;
  endfunction

  // lv[l][i]: registered output of adder i of level l (l = 1..LEVELS);
  // lv[0] = din. Each level is its own generate block of CCUR adders.
  logic [DW-1:0] lv [LEVELS+1][N];

  assign lv[0] = din;

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned CPREV = cnt(l - 1);
    localparam int unsigned CCUR  = cnt(l);
    for (genvar i = 0; i < CCUR; i++) begin : g_add
      if (2*i + 1 < CPREV) begin : g_pair
        always_ff @(posedge clk) if (en) lv[l][i] <= lv[l-1][2*i] + lv[l-1][2*i+1];
      end else begin : g_pass
        always_ff @(posedge clk) if (en) lv[l][i] <= lv[l-1][2*i];
      end
    end
    for (genvar i = CCUR; i < N; i++) begin : g_unused
      assign lv[l][i] = '0;   // never read
    end
  end

  assign sum = lv[LEVELS][0];

endmodule
