// tb_merge_tree -- runs one phase-1 merge tree through a complete phase 1.
//
// A single ordinary tree (TREE_ID = 1, so it owns channels 2 and 3) is
// connected to the behavioural AXI memory with random back pressure. The
// testbench writes N_t = 2^log2_nt random records into channel 2 and plays
// the controller: pass 0 merges runs of 1 into runs of 16 with all 16 leaves
// active (channel 2 -> 3); pass 1 merges runs of 16 into runs of N_t/4 with
// only the leaves a tuned last pass needs (channel 3 -> 2). After the last
// pass channel 2 must hold four ascending sub sequences of N_t/4 records
// whose union is the input. The AXI read and write engines, leaf feeders,
// couplers and merge units of the tree are all exercised; the output rate of
// the root (8 elements per cycle) is reported.
module tb_merge_tree;
  import topsort_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int TID = 1;

  tree_cfg_t cfg;
  logic start, done;
  axi_ar_t ar; logic ar_v, ar_r;
  axi_r_t  rr; logic r_v, r_r;
  axi_aw_t aw; logic aw_v, aw_r;
  axi_w_t  ww; logic w_v, w_r;
  axi_b_t  bb; logic b_v, b_r;
  logic ro_v, ro_l, ro_e, pi_r;
  elem_t [7:0] ro_d;

  merge_tree #(.TREE_ID(TID), .REUSED(0)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .start(start), .done(done),
    .ar(ar), .ar_valid(ar_v), .ar_ready(ar_r), .r(rr), .r_valid(r_v), .r_ready(r_r),
    .aw(aw), .aw_valid(aw_v), .aw_ready(aw_r), .w(ww), .w_valid(w_v), .w_ready(w_r),
    .b(bb), .b_valid(b_v), .b_ready(b_r),
    .root_valid(ro_v), .root_ready(1'b0), .root_data(ro_d), .root_last(ro_l), .root_empty(ro_e),
    .p2w_valid(1'b0), .p2w_ready(pi_r), .p2w_data('0));

  hbm_model #(.NP(1), .STALL_PCT(15)) u_hbm (
    .clk(clk), .rst_n(rst_n),
    .s_ar(ar), .s_arvalid(ar_v), .s_arready(ar_r), .s_r(rr), .s_rvalid(r_v), .s_rready(r_r),
    .s_aw(aw), .s_awvalid(aw_v), .s_awready(aw_r), .s_w(ww), .s_wvalid(w_v), .s_wready(w_r),
    .s_b(bb), .s_bvalid(b_v), .s_bready(b_r));

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(input bit par, input int r_l2, input int step, input int l2);
    longint t0;
    cfg.phase2 = 0; cfg.par = par; cfg.run_log2 = 5'(r_l2);
    cfg.runs_log2 = 5'(l2 - r_l2 - step); cfg.m = 5'(1 << step); cfg.log2_nt = 5'(l2);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (4) @(negedge clk);
    t0 = cyc;
    while (!done) @(negedge clk);
    $display("pass par=%0d R=2^%0d m=%0d: %0d cycles", par, r_l2, 1 << step, cyc - t0);
  endtask

  initial begin
    int l2, nt, cnt [int unsigned];
    logic [AXI_DATA_W-1:0] beat;
    elem_t e, prev;
    cfg = '0; start = 0;
    l2 = 7; nt = 1 << l2;
    for (int w = 0; w < nt / 8; w++) begin
      for (int k = 0; k < 8; k++) begin
        e.key = $urandom_range(5000); e.value = $urandom;
        beat[k*64 +: 64] = e;
        cnt[{e.key[15:0], e.value[15:0]}]++;
      end
      u_hbm.poke(longint'(mkaddr(2 * TID, w * 64)) >> 6, beat);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    pass(0, 0, 4, l2);          // runs 1 -> 16, channel 2 -> 3
    pass(1, 4, 1, l2);          // runs 16 -> 32 = N_t/4, m = 2, channel 3 -> 2
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < nt / 4; i++) begin
        int idx;
        idx = s * nt / 4 + i;
        beat = u_hbm.peek(longint'(mkaddr(2 * TID, (idx / 8) * 64)) >> 6);
        e = beat[(idx % 8)*64 +: 64];
        checks++;
        if (i > 0 && e.key < prev.key) begin
          failures++;
          if (failures < 6) $display("FAIL order at sub sequence %0d index %0d", s, i);
        end
        if (!cnt.exists({e.key[15:0], e.value[15:0]}) || cnt[{e.key[15:0], e.value[15:0]}] == 0) begin
          failures++;
          if (failures < 6) $display("FAIL unknown record at %0d", idx);
        end else cnt[{e.key[15:0], e.value[15:0]}]--;
        prev = e;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
