// stream_fifo -- synchronous first-in first-out buffer.
//
// Decouples the host link from the MSLD core on both sides: one FIFO carries
// image and mask words to the core, the other carries processed pixels back.
// Write with wr_en when not full; the head word is always visible on rd_data
// while not empty (first-word fall-through) and is removed with rd_en. A
// write and a read may happen in the same cycle. Circular buffer of DEPTH
// words (a power of two) with read and write pointers one bit wider than the
// address. The source only names the FIFOs; depth and protocol are this
// design's choices.
module stream_fifo #(
  parameter int unsigned DW    = 9,
  parameter int unsigned DEPTH = 512
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          full,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          empty,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wp, rp;

  assign level   = wp - rp;
  assign full    = (level == (AW+1)'(DEPTH));
  assign empty   = (wp == rp);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  // the producer respects 'full' (a read while empty is simply ignored)
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);

endmodule
