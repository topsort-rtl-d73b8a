// tb_slr_pipe -- checks the die-crossing register slices.
//
// Three pipes (0, 2 and 4 slices) carry a counting sequence under random
// source valid and random sink ready. Every word must arrive once and in
// order. With both sides always ready a word must take exactly STAGES cycles
// and the pipe must move one word per cycle.
module tb_slr_pipe;
  localparam int W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] iv, ir, ov, orr;
  logic [2:0][W-1:0] id, od;
  int sent [3], got [3];
  longint cyc = 0;
  longint t_in [3][$];
  bit free_run = 0;
  int lat_err = 0;

  slr_pipe #(.W(W), .STAGES(0)) u0 (.clk(clk), .rst_n(rst_n), .i_valid(iv[0]), .i_ready(ir[0]), .i_data(id[0]),
    .o_valid(ov[0]), .o_ready(orr[0]), .o_data(od[0]));
  slr_pipe #(.W(W), .STAGES(2)) u2 (.clk(clk), .rst_n(rst_n), .i_valid(iv[1]), .i_ready(ir[1]), .i_data(id[1]),
    .o_valid(ov[1]), .o_ready(orr[1]), .o_data(od[1]));
  slr_pipe #(.W(W), .STAGES(4)) u4 (.clk(clk), .rst_n(rst_n), .i_valid(iv[2]), .i_ready(ir[2]), .i_data(id[2]),
    .o_valid(ov[2]), .o_ready(orr[2]), .o_data(od[2]));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 3; p++) begin
      if (iv[p] && ir[p]) begin sent[p]++; t_in[p].push_back(cyc); end
      if (ov[p] && orr[p]) begin
        longint t;
        checks++;
        if (od[p] != W'(got[p])) failures++;
        t = t_in[p].pop_front();
        if (free_run && cyc - t != (p == 0 ? 0 : 2 * p)) lat_err++;
        got[p]++;
      end
    end
  end

  initial begin
    iv = '0; orr = '0; id = '0;
    for (int p = 0; p < 3; p++) begin sent[p] = 0; got[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        if (!(iv[p] && !ir[p])) begin    // keep valid and data stable while stalled
          iv[p] = ($urandom_range(99) < 60);
        end
        id[p] = W'(sent[p]);
        orr[p] = ($urandom_range(99) < 60);
      end
    end
    // drain
    @(negedge clk); iv = '0; orr = '1;
    repeat (20) @(negedge clk);
    // free-running: latency and throughput
    free_run = 1;
    begin
      int g0 [3];
      for (int p = 0; p < 3; p++) g0[p] = got[p];
      for (int c = 0; c < 100; c++) begin
        @(negedge clk);
        iv = '1; orr = '1;
        for (int p = 0; p < 3; p++) id[p] = W'(sent[p]);
      end
      @(negedge clk); iv = '0;
      repeat (10) @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (got[p] - g0[p] != 100) begin failures++; $display("FAIL throughput pipe %0d: %0d", p, got[p] - g0[p]); end
      end
    end
    for (int p = 0; p < 3; p++) begin
      checks++;
      if (got[p] != sent[p] || sent[p] < 1000) failures++;
    end
    checks++;
    if (lat_err != 0) begin failures++; $display("FAIL latency errors %0d", lat_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
