// msld_pkg -- constants, types and geometry shared by the MSLD datapath.
//
// The multi-scale line detector (MSLD) looks at a W x W window around each
// pixel of the inverted green channel. Twelve lines of W pixels, 15 degrees
// apart, pass through the centre pixel. For every odd line length L = 1, 3,
// ..., W (one "scale" each, (W+1)/2 scales) the largest of the twelve line
// means, minus the mean of the whole window, is the raw response of that scale.
//
// Defaults follow the configuration that was built for the DRIVE images:
// W = 15 (eight scales), 565 x 584 pixel images, 18 fractional bits in the
// fixed-point datapath, 12 orientations. How a line is drawn on the pixel grid
// is not specified; this design rounds k*cos(theta) and k*sin(theta) to the
// nearest integer (half away from zero), with the cosine and sine held as
// 16-bit fractions in a 12-entry table.
package msld_pkg;

  // Configuration of the DRIVE implementation.
  localparam int unsigned W_DEF      = 15;   // window / longest line length
  localparam int unsigned NCOLS_DEF  = 565;  // image width  (columns)
  localparam int unsigned NROWS_DEF  = 584;  // image height (rows)
  localparam int unsigned N_ORIENT   = 12;   // line orientations, 0..165 deg
  localparam int unsigned FRAC       = 18;   // fractional bits of the datapath
  localparam int unsigned PIX_W      = 8;    // pixel width
  localparam int unsigned MAX_PIX    = 255;  // pixels are inverted as 255 - g

  // Fixed-point widths derived from the above.
  localparam int unsigned MEAN_W = PIX_W + FRAC;       // unsigned Q8.18 mean
  localparam int unsigned RAW_W  = MEAN_W + 2;         // signed raw response Q9.18 (+guard)
  localparam int unsigned STD_W  = 36;                 // signed standardized response
  localparam int unsigned OUT_W  = 32;                 // signed combined response Q13.18

  // One word of the image/mask stream: green value and ROI mask bit.
  typedef struct packed {
    logic             mask;
    logic [PIX_W-1:0] green;
  } pix_in_t;

  // Core phase, visible to the outside as status.
  typedef enum logic [2:0] {
    PH_CLEAR = 3'd0,  // line buffer being cleared for a new pass
    PH_PASS1 = 3'd1,  // first pass: raw responses -> statistics
    PH_STATS = 3'd2,  // end of image: mean / std being computed
    PH_LOAD  = 3'd3,  // standardization coefficients being loaded
    PH_PASS2 = 3'd4   // second pass: standardized, combined output
  } phase_e;

  function automatic int unsigned n_scales(input int unsigned w);
    return (w + 1) / 2;
  endfunction

  // floor(2^FRAC / n): reciprocal coefficient used to turn a sum into a mean.
  // Rounding down keeps a mean of 255-valued pixels below 256.
  function automatic longint unsigned recip(input int unsigned n);
    return (64'd1 << FRAC) / 64'(n);
  endfunction

  // cos(15 deg * o) * 65536, o = 0..11; sin(15*o) = cos(15*(6-o)) for o <= 6.
  function automatic int cos16(input int unsigned o);
    case (o)
      0:  return 65536;
      1:  return 63303;
      2:  return 56756;
      3:  return 46341;
      4:  return 32768;
      5:  return 16962;
      6:  return 0;
      7:  return -16962;
      8:  return -32768;
      9:  return -46341;
      10: return -56756;
      11: return -63303;
      default: return 0;
    endcase
  endfunction

  function automatic int sin16(input int unsigned o);
    // sin(15 o) = cos(90 - 15 o); for o = 7..11, sin(15 o) = sin(180 - 15 o)
    return (o <= 6) ? cos16(6 - o) : cos16(o - 6);
  endfunction

  // round(v / 65536), half away from zero
  function automatic int rnd16(input int v);
    return (v < 0) ? -((-v + 32768) >>> 16) : ((v + 32768) >>> 16);
  endfunction

  // Position, inside the W x W window (row-major, row 0 on top), of pixel i
  // (0..W-1) of the line of orientation o. Pixel (W-1)/2 is the window centre.
  function automatic int unsigned line_tap(input int unsigned w, input int unsigned o,
                                           input int unsigned i);
    int h, k, dx, dy;
    h  = (int'(w) - 1) / 2;
    k  = int'(i) - h;
    dx = rnd16(k * cos16(o));
    dy = -rnd16(k * sin16(o));  // rows grow downwards
    return int'(unsigned'((h + dy) * int'(w) + (h + dx)));
  endfunction

  function automatic int unsigned clog2u(input int unsigned n);
    return (n <= 1) ? 0 : $clog2(n);
  endfunction

  // Pipeline latencies, in enabled cycles, of the streaming units.
  function automatic int unsigned lrcm_lat(input int unsigned w);
    return n_scales(w);
  endfunction
  function automatic int unsigned wmean_lat(input int unsigned w);
    return clog2u(w * w) + 1;
  endfunction
  function automatic int unsigned rrcm_lat();
    return clog2u(N_ORIENT) + 1;
  endfunction
  function automatic int unsigned raw_lat(input int unsigned w);
    return ((lrcm_lat(w) > wmean_lat(w)) ? lrcm_lat(w) : wmean_lat(w)) + rrcm_lat();
  endfunction

endpackage
