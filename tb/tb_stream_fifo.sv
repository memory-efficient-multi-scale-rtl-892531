// tb_stream_fifo -- self-checking test of the FIFO against a queue model.
//
// Random writes (never while full) and random reads (also while empty, which
// must be ignored) for 20000 cycles on a 16-word FIFO. Every word read must
// be the oldest word written; full, empty and level must match the model.
module tb_stream_fifo;
  localparam int DW = 9, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  always #5 clk = ~clk;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [$clog2(DEPTH):0] level;

  stream_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_data(wr_data), .full(full),
    .rd_en(rd_en), .rd_data(rd_data), .empty(empty), .level(level)
  );

  int checks = 0, failures = 0, n_full = 0;
  logic [DW-1:0] q [$];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      checks += 3;
      if (full != (q.size() == DEPTH)) failures++;
      if (empty != (q.size() == 0))    failures++;
      if (int'(level) != q.size())     failures++;
      if (full) n_full++;
      // phases of mostly writing and mostly reading
      wr_en   = !full && ($urandom_range(0, 99) < ((t / 500) % 2 ? 70 : 30));
      wr_data = DW'($urandom);
      rd_en   = ($urandom_range(0, 99) < 50);
      if (rd_en && !empty) begin
        checks++;
        if (rd_data != q.pop_front()) failures++;
      end
      if (wr_en) q.push_back(wr_data);
    end
    checks++;
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
