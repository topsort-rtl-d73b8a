// tb_leaf_feeder -- checks the beat-to-element leaf feeder.
//
// For several (R, G) settings, including R = 1 (first pass) and an inactive
// leaf, the testbench offers G*R/8 random 512-bit beats with random gaps and
// takes the element stream with random back pressure. The elements must
// come out in lane order, one per transfer, with 'last' on every R-th one,
// and 'idle' must rise after the G-th run. An inactive leaf must send
// exactly G empty-run tokens and read no beat. With no gaps or back
// pressure the feeder must send one element per cycle.
module tb_leaf_feeder;
  import topsort_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic       start, active, idle;
  logic [4:0] rl, gl;
  logic       in_valid, in_ready, o_valid, o_ready, o_last, o_empty;
  logic [AXI_DATA_W-1:0] in_data;
  elem_t [0:0] o_data;

  leaf_feeder dut (.clk(clk), .rst_n(rst_n), .start(start), .cfg_run_log2(rl), .cfg_runs_log2(gl),
    .cfg_active(active), .idle(idle), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .o_valid(o_valid), .o_ready(o_ready), .o_data(o_data), .o_last(o_last), .o_empty(o_empty));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [AXI_DATA_W-1:0] beats [$];
  elem_t exp_e [$];
  int  n_got, n_beats_read, pct;
  bit  fired = 0;

  always @(negedge clk) if (rst_n) begin
    if (!in_valid || fired) begin
      in_valid = beats.size() > 0 && $urandom_range(99) < pct;
      if (beats.size() > 0) in_data = beats[0];
    end
    fired = 0;
    o_ready = $urandom_range(99) < pct;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin void'(beats.pop_front()); fired = 1; n_beats_read++; end
  end

  task automatic run(input int r_l2, input int g_l2, input bit act, input int p);
    int R, G, nel, run_pos;
    longint t0;
    R = 1 << r_l2; G = 1 << g_l2;
    nel = act ? R * G : 0;
    pct = p;
    n_beats_read = 0;
    for (int w = 0; w < nel / 8; w++) begin
      logic [AXI_DATA_W-1:0] b;
      elem_t e;
      for (int k = 0; k < 8; k++) begin
        e.key = $urandom; e.value = $urandom;
        b[k*64 +: 64] = e;
        exp_e.push_back(e);
      end
      beats.push_back(b);
    end
    @(negedge clk);
    rl = 5'(r_l2); gl = 5'(g_l2); active = act; start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    n_got = 0; run_pos = 0;
    while (!(idle && !o_valid)) begin
      @(posedge clk);
      if (o_valid && o_ready) begin
        checks++;
        if (act) begin
          elem_t ex;
          ex = exp_e.pop_front();
          run_pos++;
          if (o_data[0] != ex || o_empty || o_last != (run_pos == R)) begin
            failures++;
            if (failures < 6) $display("FAIL R=%0d G=%0d element %0d", R, G, n_got);
          end
          if (run_pos == R) run_pos = 0;
        end else if (!o_empty || !o_last) failures++;
        n_got++;
      end
      @(negedge clk);
    end
    checks++;
    if (n_got != (act ? R * G : G) || (act && n_beats_read != R * G / 8) || (!act && n_beats_read != 0)) begin
      failures++;
      $display("FAIL R=%0d G=%0d act=%0d: %0d outputs, %0d beats", R, G, act, n_got, n_beats_read);
    end
    if (p == 100) begin
      checks++;
      $display("R=%0d G=%0d: %0d elements in %0d cycles", R, G, n_got, cyc - t0);
      if (cyc - t0 > n_got + 4) begin failures++; $display("FAIL rate"); end
    end
  endtask

  initial begin
    start = 0; active = 0; rl = 0; gl = 0; in_valid = 0; in_data = '0; o_ready = 0; pct = 70;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0, 4, 1, 70);    // R = 1, 16 runs
    run(2, 3, 1, 60);    // R = 4, 8 runs
    run(4, 2, 1, 80);    // R = 16, 4 runs
    run(3, 3, 0, 70);    // inactive, 8 tokens
    run(3, 4, 1, 100);   // rate check
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
