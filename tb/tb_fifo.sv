// tb_fifo: self-checking test of the event FIFO.
// Random writes and reads (never writing when full or reading when empty)
// are compared with a queue model: data order, empty, full and level.
// The FIFO is filled completely and emptied completely at least once.
module tb_fifo;
  localparam int W = 9, D = 16;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic empty, full;
  logic [4:0] level;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, fulls = 0;

  fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_en, .in_data, .rd_en,
                                    .out_data, .empty, .full, .level);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      int bias;
      @(negedge clk);
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == D)
          || level !== 5'(model.size())) begin
        failures++;
        $display("flag mismatch size=%0d empty=%0b full=%0b", model.size(), empty, full);
      end
      if (model.size() > 0) begin
        checks++;
        if (out_data !== model[0]) begin
          failures++;
          $display("data mismatch %0d exp %0d", out_data, model[0]);
        end
      end
      if (full) fulls++;
      bias    = ((i / 200) % 2 == 0) ? 3 : 1;
      wr_en   = !full && ($urandom_range(0, 3) < bias);
      rd_en   = !empty && ($urandom_range(0, 3) >= bias);
      in_data = W'($urandom);
      @(posedge clk); #1;
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(in_data);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
