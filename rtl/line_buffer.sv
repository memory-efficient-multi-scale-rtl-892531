// line_buffer -- pixel shift register that presents the W x W window.
//
// Every enabled cycle one pixel enters, inverted on the way in (255 - green),
// so that vessels are bright. The register holds (W-1)*NCOLS + W pixels, the
// shortest span that contains a whole W x W window of a raster-scanned image;
// window pixel (r, c) (row 0 on top) sits (W-1-r)*NCOLS + (W-1-c) places
// behind the newest pixel; the register is one packed vector, so a push is a
// single shift of the whole vector. The window is centred on the pixel that
// entered OFFSET = h*NCOLS + h pushes earlier, h = (W-1)/2.
//
// A parallel shift register of OFFSET+1 bits delays the ROI mask bit to the
// centre. A push counter marks the centre valid when it is a real pixel of the
// current pass (0 <= index < NROWS*NCOLS). 'fill' pushes a zero pixel with a
// clear mask (used to flush the tail of the image); 'clr' empties the buffer
// and restarts the counter at the start of a pass, so window taps that fall
// before the first pixel or after the last read zero. Taps of border pixels
// wrap onto the neighbouring row, as a plain shift register does; the border
// lies outside the circular retina ROI. Zero fill and wrap-around are this
// design's choices; the source only gives the shift register and its length.
//
// Timing: window, centre mask, centre value and centre-valid are registers that
// change in the cycle after an enabled push.
module line_buffer
  import msld_pkg::*;
#(
  parameter int unsigned W     = W_DEF,
  parameter int unsigned NCOLS = NCOLS_DEF,
  parameter int unsigned NROWS = NROWS_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,         // synchronous clear, start of a pass
  input  logic                  en,          // push one pixel
  input  logic                  fill,        // push a zero pixel (flush) instead of din
  input  pix_in_t               din,
  output logic [PIX_W-1:0]      win [W*W],   // inverted window, row-major
  output logic                  ctr_valid,   // window centre is a pixel of this pass
  output logic                  ctr_mask     // ROI bit of the window centre
);
  localparam int unsigned H      = (W - 1) / 2;
  localparam int unsigned LEN    = (W - 1) * NCOLS + W;
  localparam int unsigned OFFSET = H * NCOLS + H;
  localparam int unsigned NPIX   = NROWS * NCOLS;
  localparam int unsigned CW     = $clog2(NPIX + LEN + 1) + 1;

  // sr: pixel k (k = 0 newest) in bits [k*PIX_W +: PIX_W]; msr: mask bit k
  logic [LEN*PIX_W-1:0] sr;
  logic [OFFSET:0]      msr;
  logic [CW-1:0]        npush;
  logic [PIX_W-1:0]     inv;

  assign inv = fill ? '0 : PIX_W'(MAX_PIX) - din.green;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      npush     <= '0;
      ctr_valid <= 1'b0;
    end else if (clr) begin
      npush     <= '0;
      ctr_valid <= 1'b0;
    end else if (en) begin
      npush     <= npush + 1'b1;
      ctr_valid <= (npush >= CW'(OFFSET)) && (npush - CW'(OFFSET) < CW'(NPIX));
    end
  end

  always_ff @(posedge clk) begin
    if (clr) begin
      sr  <= '0;
      msr <= '0;
    end else if (en) begin
      sr  <= {sr[(LEN-1)*PIX_W-1:0], inv};
      msr <= {msr[OFFSET-1:0], !fill && din.mask};
    end
  end

  always_comb begin
    for (int r = 0; r < W; r++)
      for (int c = 0; c < W; c++)
        win[r*W + c] = sr[((W-1-r)*NCOLS + (W-1-c))*PIX_W +: PIX_W];
  end

  assign ctr_mask = msr[OFFSET];

endmodule
