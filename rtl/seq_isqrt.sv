// seq_isqrt -- sequential integer square root, floor(sqrt(x)).
//
// Digit-by-digit (non-restoring style) method: two radicand bits and one root
// bit per clock, XW/2 cycles after 'start'; 'done' pulses when 'root' is
// valid. XW must be even. Applied to the variance with 2*FRAC fractional bits
// it returns the standard deviation with FRAC fractional bits. The source
// shows a square-root operator; the method is this design's choice.
module seq_isqrt #(
  parameter int unsigned XW = 56
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [XW-1:0]   x,
  output logic            busy,
  output logic            done,
  output logic [XW/2-1:0] root
);
  localparam int unsigned RW = XW / 2;
  localparam int unsigned CW = $clog2(RW + 1);

  logic [XW-1:0] rad;        // radicand bits still to bring down
  logic [RW+1:0] rem;        // partial remainder, <= 2*root
  logic [RW+3:0] trial;
  logic [RW+3:0] nrem;
  logic [CW-1:0] cnt;

  assign nrem  = {rem, rad[XW-1 -: 2]};
  assign trial = {2'b00, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rad  <= '0;
      rem  <= '0;
      root <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        rad  <= x;
        rem  <= '0;
        root <= '0;
        cnt  <= CW'(RW);
      end else if (busy) begin
        rad <= rad << 2;
        if (nrem >= trial) begin
          rem  <= (RW+2)'(nrem - trial);
          root <= {root[RW-2:0], 1'b1};
        end else begin
          rem  <= (RW+2)'(nrem);
          root <= {root[RW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
