// tb_sync_fifo -- random push/pop test of the first-word-fall-through FIFO
// against a queue model. Checks read data, full, empty and count every cycle,
// and that a word written into an empty FIFO is visible on the next cycle.
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, rd_en, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [W-1:0] model [$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_data(wr_data), .full(full),
    .rd_en(rd_en), .rd_data(rd_data), .empty(empty), .count(count));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_full = 0;
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      checks++;
      if (count != model.size() || empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
          (model.size() > 0 && rd_data != model[0])) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d count %0d model %0d", c, count, model.size());
      end
      if (full) n_full++;
      wr_en   = !full && ($urandom_range(99) < ((c / 500) % 2 ? 70 : 40));
      rd_en   = !empty && ($urandom_range(99) < ((c / 500) % 2 ? 40 : 70));
      wr_data = W'($urandom);
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    checks++;
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
