// tb_bitonic_merge -- checks the pipelined bitonic merger at E = 4 and E = 8.
//
// Each cycle two ascending vectors of E random records are applied (keys
// drawn from a small range so duplicates occur); the expected output is the
// sorted union computed here by insertion sort on the {class, key} field.
// The output must appear exactly log2(2E) cycles later (3 cycles for the
// 4-rate merger of the published example) and, while 'en' is low, hold.
module tb_bitonic_merge;
  import topsort_pkg::*;
  localparam int W = MREC_W;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic en4, en8;
  logic [3:0][W-1:0]  a4, b4;
  logic [7:0][W-1:0]  o4;
  logic [7:0][W-1:0]  a8, b8;
  logic [15:0][W-1:0] o8;

  bitonic_merge #(.E(4)) u4 (.clk(clk), .en(en4), .in_a(a4), .in_b(b4), .out(o4));
  bitonic_merge #(.E(8)) u8 (.clk(clk), .en(en8), .in_a(a8), .in_b(b8), .out(o8));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_rec();
    logic [W-1:0] r;
    r = {$urandom, $urandom, $urandom};
    r[W-1 -: 2] = 2'($urandom_range(2));
    r[W-3 -: KEY_W] = KEY_W'($urandom_range(40));
    return r;
  endfunction

  function automatic logic [CMP_W-1:0] f(input logic [W-1:0] r);
    return r[W-1 -: CMP_W];
  endfunction

  // sort an array of records ascending by field (insertion sort)
  task automatic sort_recs(ref logic [W-1:0] v [$]);
    for (int i = 1; i < v.size(); i++) begin
      logic [W-1:0] x; int j;
      x = v[i]; j = i - 1;
      while (j >= 0 && f(v[j]) > f(x)) begin v[j+1] = v[j]; j--; end
      v[j+1] = x;
    end
  endtask

  task automatic run(input int e, input int n);
    logic [W-1:0] exp_q [$][$];
    logic [W-1:0] va [$], vb [$], all [$];
    int lat = $clog2(2 * e);
    for (int c = 0; c < n + lat; c++) begin
      if (c < n) begin
        va = {}; vb = {};
        for (int i = 0; i < e; i++) begin va.push_back(rnd_rec()); vb.push_back(rnd_rec()); end
        sort_recs(va); sort_recs(vb);
        all = {va, vb};
        sort_recs(all);
        exp_q.push_back(all);
        for (int i = 0; i < e; i++) begin
          if (e == 4) begin a4[i] = va[i]; b4[i] = vb[i]; end
          else        begin a8[i] = va[i]; b8[i] = vb[i]; end
        end
      end
      @(negedge clk);
      if (c >= lat - 1 && exp_q.size() > 0 && c - (lat - 1) < n) begin
        all = exp_q.pop_front();
        for (int i = 0; i < 2 * e; i++) begin
          checks++;
          if (f(e == 4 ? o4[i] : o8[i]) != f(all[i])) begin
            failures++;
            if (failures < 10) $display("FAIL E=%0d cycle %0d lane %0d", e, c, i);
          end
        end
      end
    end
  endtask

  initial begin
    logic [7:0][W-1:0] hold;
    en4 = 1'b1; en8 = 1'b1;
    a4 = '0; b4 = '0; a8 = '0; b8 = '0;
    @(negedge clk);
    run(4, 300);
    run(8, 300);
    // hold: with en low the output must not change
    en4 = 1'b0;
    hold = o4;
    repeat (5) begin
      a4[0] = rnd_rec();
      @(negedge clk);
      checks++;
      if (o4 != hold) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
