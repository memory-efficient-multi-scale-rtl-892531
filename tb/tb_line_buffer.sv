// tb_line_buffer -- self-checking test of the line buffer (W = 5, 9 x 7
// pixel frames, reduced so that every window position is checked).
//
// A frame of random pixels and mask bits is pushed with a gated enable,
// followed by zero fill pushes, then the buffer is cleared and a second frame
// follows. After every push the window must hold 255 - pixel at linear index
// centre + (r-2)*NCOLS + (c-2) (zero outside the frame), where the centre is
// the pixel pushed OFFSET = 2*NCOLS+2 pushes earlier; the centre-valid flag
// and the centre mask bit must follow the same centre.
module tb_line_buffer;
  import msld_pkg::*;
  localparam int W = 5, NC = 9, NR = 7, H = 2;
  localparam int NPIX = NC * NR, OFFS = H * NC + H;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0, fill = 1'b0;
  always #5 clk = ~clk;
  pix_in_t din;
  logic [PIX_W-1:0] win [W*W];
  logic ctr_valid, ctr_mask;

  line_buffer #(.W(W), .NCOLS(NC), .NROWS(NR)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .fill(fill), .din(din),
    .win(win), .ctr_valid(ctr_valid), .ctr_mask(ctr_mask)
  );

  int checks = 0, failures = 0;
  byte unsigned img [NPIX];
  bit           msk [NPIX];

  function automatic int pix(input int j);
    return (j < 0 || j >= NPIX) ? 0 : 255 - int'(img[j]);
  endfunction

  task automatic run_frame();
    int n;
    n = 0;
    for (int i = 0; i < NPIX; i++) begin img[i] = 8'($urandom); msk[i] = 1'($urandom); end
    @(negedge clk); clr = 1'b1; @(negedge clk); clr = 1'b0;
    while (n < NPIX + OFFS + 3) begin
      en   = ($urandom_range(0, 3) != 0);
      fill = (n >= NPIX);
      din  = (n < NPIX) ? '{mask: msk[n], green: img[n]} : '{mask: 1'b1, green: 8'hA5};
      @(negedge clk);
      if (en) begin
        int c;
        c = n - OFFS;
        n++;
        checks++;
        if (ctr_valid != (c >= 0 && c < NPIX)) begin
          failures++; $display("push %0d: centre valid %0d", n, ctr_valid);
        end
        if (c >= 0 && c < NPIX) begin
          checks++;
          if (ctr_mask != msk[c]) begin failures++; $display("centre %0d mask", c); end
          for (int r = 0; r < W; r++)
            for (int cc = 0; cc < W; cc++) begin
              checks++;
              if (int'(win[r*W + cc]) != pix(c + (r - H) * NC + (cc - H))) begin
                failures++;
                if (failures < 10) $display("centre %0d tap (%0d,%0d): %0d", c, r, cc, win[r*W+cc]);
              end
            end
        end
      end
    end
  endtask

  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_frame();
    run_frame();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
