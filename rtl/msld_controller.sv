// msld_controller -- operations scheduling of the two-pass MSLD.
//
// The raw responses are never stored. Each frame is therefore streamed
// through the datapath twice (the host sends image and mask twice):
//   CLEAR1 -> PASS1 : raw responses of every scale feed the statistics units
//   FINISH -> WSTAT : end of image; mean and standard deviation per scale
//   LOAD   -> WLOAD : the statistics are stored in the standardization units
//   CLEAR2 -> PASS2 : raw responses are recomputed, standardized, combined
//                     and sent out; then the next frame starts at CLEAR1.
// In a pass, NPIX pixels are accepted from the input stream; afterwards the
// controller keeps the pipeline moving with zero "fill" pixels until NPIX
// valid results have left the end of the pipeline (tail_valid), which flushes
// the line buffer's look-ahead of h*NCOLS+h pixels and the pipeline latency.
// The whole datapath advances on one enable, 'en'. It is low when the input
// stream is empty (stall on input), and in the second pass when the output
// FIFO is full (stall on output back-pressure).
// The two-pass sequence is the source's; states, flush and stall scheme are
// this design's.
module msld_controller
  import msld_pkg::*;
#(
  parameter int unsigned NPIX = NROWS_DEF * NCOLS_DEF
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,     // a pixel is available
  input  logic   out_full,     // output stream cannot take a result
  input  logic   tail_valid,   // a valid result is at the pipeline end
  input  logic   stats_busy,   // any mean/std unit busy
  input  logic   std_busy,     // any standardization unit loading
  output logic   clr_pass,     // clear line buffer and valid pipes
  output logic   clr_stats,    // clear statistics accumulators (new frame)
  output logic   en,           // advance the datapath
  output logic   fill,         // push a zero pixel instead of the input
  output logic   in_ready,     // input pixel consumed when in_valid & in_ready
  output logic   pass2,        // second pass: results go out
  output logic   finish,       // end of first pass, pulse
  output logic   load,         // store statistics, pulse
  output logic   frame_done,   // last result of the frame sent, pulse
  output phase_e phase
);
  localparam int unsigned CW = $clog2(NPIX + 1);

  typedef enum logic [3:0] {
    C_CLEAR1, C_PASS1, C_FINISH, C_WSTAT, C_LOAD, C_WLOAD, C_CLEAR2, C_PASS2
  } cstate_e;

  cstate_e       state;
  logic [CW-1:0] in_cnt, out_cnt;
  logic          streaming, stall_out, last_out;

  assign streaming = (state == C_PASS1) || (state == C_PASS2);
  assign pass2     = (state == C_PASS2);
  assign fill      = (in_cnt == CW'(NPIX));
  assign stall_out = pass2 && out_full;
  assign en        = streaming && (fill || in_valid) && !stall_out;
  assign in_ready  = streaming && !fill && !stall_out;
  assign last_out  = en && tail_valid && (out_cnt == CW'(NPIX - 1));

  assign clr_pass  = (state == C_CLEAR1) || (state == C_CLEAR2);
  assign clr_stats = (state == C_CLEAR1);
  assign finish    = (state == C_FINISH);
  assign load      = (state == C_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_CLEAR1;
      in_cnt     <= '0;
      out_cnt    <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        C_CLEAR1, C_CLEAR2: begin
          in_cnt  <= '0;
          out_cnt <= '0;
          state   <= (state == C_CLEAR1) ? C_PASS1 : C_PASS2;
        end
        C_PASS1, C_PASS2: begin
          if (en && !fill)      in_cnt  <= in_cnt + 1'b1;
          if (en && tail_valid) out_cnt <= out_cnt + 1'b1;
          if (last_out) begin
            if (state == C_PASS1) state <= C_FINISH;
            else begin
              state      <= C_CLEAR1;
              frame_done <= 1'b1;
            end
          end
        end
        C_FINISH: state <= C_WSTAT;
        C_WSTAT:  if (!stats_busy) state <= C_LOAD;
        C_LOAD:   state <= C_WLOAD;
        C_WLOAD:  if (!std_busy) state <= C_CLEAR2;
        default:  state <= C_CLEAR1;
      endcase
    end
  end

  always_comb begin
    unique case (state)
      C_CLEAR1, C_CLEAR2: phase = PH_CLEAR;
      C_PASS1:            phase = PH_PASS1;
      C_FINISH, C_WSTAT:  phase = PH_STATS;
      C_LOAD, C_WLOAD:    phase = PH_LOAD;
      C_PASS2:            phase = PH_PASS2;
      default:            phase = PH_CLEAR;
    endcase
  end

  // a pass never takes more than NPIX input pixels
  assert property (@(posedge clk) disable iff (!rst_n) (in_cnt <= CW'(NPIX)));

endmodule
