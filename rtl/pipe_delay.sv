// pipe_delay -- D balancing registers on a DW-bit signal.
//
// Used wherever two pipelines of different depth must deliver the data of the
// same pixel at the same time (line means against the window mean, side
// information against the arithmetic). Advances only when 'en' is high.
// 'clr' empties the delay line (used for valid bits at the start of a pass).
// With D = 0 the output is the input.
module pipe_delay #(
  parameter int unsigned DW = 8,
  parameter int unsigned D  = 1
) (
  input  logic          clk,
  input  logic          en,
  input  logic          clr,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_regs
    logic [DW-1:0] q [D];
    always_ff @(posedge clk) begin
      if (clr) begin
        for (int i = 0; i < D; i++) q[i] <= '0;
      end else if (en) begin
        q[0] <= din;
        for (int i = 1; i < D; i++) q[i] <= q[i-1];
      end
    end
    assign dout = q[D-1];
  end
endmodule
