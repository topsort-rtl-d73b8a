// merge_tree -- one merge tree kernel (throughput P = 8 elements per cycle,
// NL = 16 leaves) with its single AXI port.
//
// Data path: AXI read -> 16 leaf buffers -> 16 leaf feeders -> a binary tree
// of streaming merge units (8 units of rate 1, 4 of rate 2, 2 of rate 4 and
// one of rate 8, with a coupler doubling the width between levels) -> root
// stream of 8 elements (one 512-bit beat) per cycle -> output buffer -> AXI
// write.
//
// Phase 1 (cfg.phase2 = 0). Tree t owns channels 2t and 2t+1 and ping-pongs
// between them: it reads channel 2t+par and writes 2t+1-par. Leaf j reads a
// contiguous region of G runs of R elements; round g merges run g of every
// active leaf, and the merged runs (16R elements, or mR when only m < 16
// leaves are active in the last pass) are written back to back.
//
// Phase 2 (cfg.phase2 = 1, REUSED trees only: trees 0, 4, 8, 12). Tree 4i's
// leaf 4j+s reads sorted sub sequence s (N/64 elements) from channel
// 8i+2j+par, the root stream leaves on root_* towards the extra phase-2
// merge units, and the AXI write port carries the beats of phase-2 output
// buffer i (p2w_*). Trees that are not reused stay idle in phase 2.
//
// Leaf buffers and merge units are the same in both phases: only the read
// addresses, lengths and the destination of the root stream change, which is
// the reuse scheme of the published design. 'start' begins a pass; 'done'
// rises when its last write response is back (at once for an idle tree).
module merge_tree #(
  parameter int TREE_ID     = 0,
  parameter bit REUSED      = 1'b0,
  parameter int NL          = topsort_pkg::NUM_LEAVES,
  parameter int BURST_BEATS = REUSED ? topsort_pkg::BURST_BEATS_REUSE
                                     : topsort_pkg::BURST_BEATS_P1,
  parameter int BUF_DEPTH   = 2 * BURST_BEATS
) (
  input  logic clk,
  input  logic rst_n,
  input  topsort_pkg::tree_cfg_t cfg,
  input  logic                   start,
  output logic                   done,
  // AXI master
  output topsort_pkg::axi_ar_t   ar,
  output logic                   ar_valid,
  input  logic                   ar_ready,
  input  topsort_pkg::axi_r_t    r,
  input  logic                   r_valid,
  output logic                   r_ready,
  output topsort_pkg::axi_aw_t   aw,
  output logic                   aw_valid,
  input  logic                   aw_ready,
  output topsort_pkg::axi_w_t    w,
  output logic                   w_valid,
  input  logic                   w_ready,
  input  topsort_pkg::axi_b_t    b,
  input  logic                   b_valid,
  output logic                   b_ready,
  // phase 2: root stream out, output-buffer beats in
  output logic                   root_valid,
  input  logic                   root_ready,
  output topsort_pkg::elem_t [NL/2-1:0] root_data,
  output logic                   root_last,
  output logic                   root_empty,
  input  logic                   p2w_valid,
  output logic                   p2w_ready,
  input  logic [topsort_pkg::AXI_DATA_W-1:0] p2w_data
);
  import topsort_pkg::*;

  localparam int LV = $clog2(NL);        // merge levels
  localparam int P  = NL / 2;            // root rate

  tree_cfg_t cfg_q;
  logic      go, go_q, p2_mode, idle_pass;

  assign go      = start && (!cfg.phase2 || REUSED);
  assign p2_mode = cfg_q.phase2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q     <= '0;
      go_q      <= 1'b0;
      idle_pass <= 1'b0;
    end else begin
      go_q <= go;
      if (start) begin
        cfg_q     <= cfg;
        idle_pass <= cfg.phase2 && !REUSED;
      end
    end
  end

  // ---------------- per-pass job decode ----------------
  logic [NL-1:0][AXI_ADDR_W-1:0] leaf_addr;
  logic [NL-1:0][31:0]           leaf_beats;
  logic [NL-1:0]                 leaf_active;
  logic [4:0]                    f_run_log2, f_runs_log2;
  logic [AXI_ADDR_W-1:0]         wr_base;
  logic [31:0]                   wr_beats;

  always_comb begin
    longint unsigned region;   // elements per leaf region (phase 1)
    longint unsigned subseq;   // elements per sub sequence (phase 2)
    region = longint'(1) << (cfg_q.run_log2 + cfg_q.runs_log2);
    subseq = longint'(1) << (cfg_q.log2_nt - 2);
    for (int j = 0; j < NL; j++) begin
      if (!p2_mode) begin
        leaf_active[j] = j < int'(cfg_q.m);
        leaf_addr[j]   = mkaddr(2 * TREE_ID + int'(cfg_q.par), longint'(j) * region * ELEM_W / 8);
        leaf_beats[j]  = leaf_active[j] ? 32'(region / ELEMS_PER_BEAT) : 32'd0;
      end else begin
        leaf_active[j] = 1'b1;
        leaf_addr[j]   = mkaddr(8 * (TREE_ID / 4) + 2 * (j / 4) + int'(cfg_q.par),
                                longint'(j % 4) * subseq * ELEM_W / 8);
        leaf_beats[j]  = 32'(subseq / ELEMS_PER_BEAT);
      end
    end
    f_run_log2  = p2_mode ? cfg_q.log2_nt - 5'd2 : cfg_q.run_log2;
    f_runs_log2 = p2_mode ? 5'd0 : cfg_q.runs_log2;
    wr_base     = mkaddr(2 * TREE_ID + (cfg_q.par ? 0 : 1), 0);
    // phase 1: N/16 elements; phase 2: a quarter of N elements
    wr_beats    = p2_mode ? 32'((longint'(1) << (cfg_q.log2_nt + 2)) / ELEMS_PER_BEAT)
                          : 32'((longint'(1) << cfg_q.log2_nt) / ELEMS_PER_BEAT);
  end

  // ---------------- read side ----------------
  logic [NL-1:0]                 lb_valid, lb_ready;
  logic [NL-1:0][AXI_DATA_W-1:0] lb_data;
  logic                          rd_all_issued;

  axi_read_engine #(.NL(NL), .BURST_BEATS(BURST_BEATS), .BUF_DEPTH(BUF_DEPTH)) u_rd (
    .clk(clk), .rst_n(rst_n), .start(go_q && !idle_pass),
    .leaf_addr(leaf_addr), .leaf_beats(leaf_beats), .all_issued(rd_all_issued),
    .ar(ar), .ar_valid(ar_valid), .ar_ready(ar_ready),
    .r(r), .r_valid(r_valid), .r_ready(r_ready),
    .lb_valid(lb_valid), .lb_ready(lb_ready), .lb_data(lb_data));

  // ---------------- merge network ----------------
  // Level k has NL>>(k+1) units of rate 2^k. Its inputs are NL>>k streams of
  // 2^k elements, packed into NL element slots; outputs use NL/2 slots.
  elem_t [NL-1:0]   lin_data  [LV];
  logic  [NL-1:0]   lin_valid [LV], lin_ready [LV], lin_last [LV], lin_empty [LV];
  elem_t [NL/2-1:0] lout_data [LV];
  logic  [NL/2-1:0] lout_valid [LV], lout_ready [LV], lout_last [LV], lout_empty [LV];
  logic  [NL-1:0]   feed_idle;

  for (genvar j = 0; j < NL; j++) begin : g_feed
    elem_t [0:0] fd;
    leaf_feeder u_feed (
      .clk(clk), .rst_n(rst_n), .start(go_q && !idle_pass),
      .cfg_run_log2(f_run_log2), .cfg_runs_log2(f_runs_log2),
      .cfg_active(leaf_active[j]), .idle(feed_idle[j]),
      .in_valid(lb_valid[j]), .in_ready(lb_ready[j]), .in_data(lb_data[j]),
      .o_valid(lin_valid[0][j]), .o_ready(lin_ready[0][j]), .o_data(fd),
      .o_last(lin_last[0][j]), .o_empty(lin_empty[0][j]));
    assign lin_data[0][j] = fd[0];
  end

  for (genvar k = 0; k < LV; k++) begin : g_lv
    localparam int E  = 1 << k;
    localparam int NU = NL >> (k + 1);
    for (genvar u = 0; u < NU; u++) begin : g_unit
      mms_merge_unit #(.E(E)) u_mu (
        .clk(clk), .rst_n(rst_n),
        .a_valid(lin_valid[k][2*u]),   .a_ready(lin_ready[k][2*u]),
        .a_data (lin_data[k][2*u*E +: E]),
        .a_last (lin_last[k][2*u]),    .a_empty(lin_empty[k][2*u]),
        .b_valid(lin_valid[k][2*u+1]), .b_ready(lin_ready[k][2*u+1]),
        .b_data (lin_data[k][(2*u+1)*E +: E]),
        .b_last (lin_last[k][2*u+1]),  .b_empty(lin_empty[k][2*u+1]),
        .o_valid(lout_valid[k][u]), .o_ready(lout_ready[k][u]),
        .o_data (lout_data[k][u*E +: E]),
        .o_last (lout_last[k][u]),  .o_empty(lout_empty[k][u]));
      if (k < LV - 1) begin : g_cpl
        stream_coupler #(.E(E)) u_cpl (
          .clk(clk), .rst_n(rst_n),
          .i_valid(lout_valid[k][u]), .i_ready(lout_ready[k][u]),
          .i_data (lout_data[k][u*E +: E]),
          .i_last (lout_last[k][u]),  .i_empty(lout_empty[k][u]),
          .o_valid(lin_valid[k+1][u]), .o_ready(lin_ready[k+1][u]),
          .o_data (lin_data[k+1][u*2*E +: 2*E]),
          .o_last (lin_last[k+1][u]),  .o_empty(lin_empty[k+1][u]));
      end
    end
    // unused stream slots of this level
    if (k > 0) begin : g_tie
      assign lin_valid[k][NL-1:NL>>k]  = '0;
      assign lin_last[k][NL-1:NL>>k]   = '0;
      assign lin_empty[k][NL-1:NL>>k]  = '0;
    end
    if (NU < NL / 2) begin : g_otie
      assign lout_valid[k][NL/2-1:NU] = '0;
      assign lout_last[k][NL/2-1:NU]  = '0;
      assign lout_empty[k][NL/2-1:NU] = '0;
    end
    if (k == LV - 1) begin : g_rtie
      assign lout_ready[k][NL/2-1:1] = '0;
    end
  end

  // ---------------- root and write side ----------------
  logic                  rt_valid, rt_ready, rt_last, rt_empty;
  elem_t [P-1:0]         rt_data;
  logic                  we_valid, we_ready;
  logic [AXI_DATA_W-1:0] we_data;
  logic                  wr_done;

  assign rt_valid = lout_valid[LV-1][0];
  assign rt_last  = lout_last[LV-1][0];
  assign rt_empty = lout_empty[LV-1][0];
  assign rt_data  = lout_data[LV-1][P-1:0];
  assign lout_ready[LV-1][0] = rt_ready;

  assign root_valid = p2_mode && rt_valid;
  assign root_data  = rt_data;
  assign root_last  = rt_last;
  assign root_empty = rt_empty;

  always_comb begin
    if (p2_mode) begin
      rt_ready  = root_ready;
      we_valid  = p2w_valid;
      we_data   = p2w_data;
      p2w_ready = we_ready;
    end else begin
      // empty-run tokens carry no data and are dropped here
      rt_ready  = rt_empty || we_ready;
      we_valid  = rt_valid && !rt_empty;
      we_data   = AXI_DATA_W'(rt_data);
      p2w_ready = 1'b0;
    end
  end

  axi_write_engine #(.BURST_BEATS(BURST_BEATS), .BUF_DEPTH(BUF_DEPTH)) u_wr (
    .clk(clk), .rst_n(rst_n), .start(go_q && !idle_pass),
    .mode_p2(p2_mode), .grp(2'(TREE_ID / 4)), .par(cfg_q.par),
    .base_addr(wr_base), .total_beats(wr_beats), .done(wr_done),
    .in_valid(we_valid), .in_ready(we_ready), .in_data(we_data),
    .aw(aw), .aw_valid(aw_valid), .aw_ready(aw_ready),
    .w(w), .w_valid(w_valid), .w_ready(w_ready),
    .b(b), .b_valid(b_valid), .b_ready(b_ready));

  assign done = idle_pass || (wr_done && !go_q);
endmodule
