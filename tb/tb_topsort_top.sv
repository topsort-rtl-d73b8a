// tb_topsort_top -- end-to-end test of the two-phase sorter.
//
// The sorter is instantiated with its default parameters (16 trees of 16
// leaves at 8 elements per cycle, a 64-leaf phase-2 tree at 32 elements per
// cycle, 4 KB output batches, die-crossing register slices) and connected to
// a behavioural HBM model that stalls its ready/valid signals at random.
//
// For each sort the testbench writes N = 16 * 2^log2_nt records with keys
// that are a random permutation of 1..N (value = a hash of the key) into the
// even channels, part t at channel 2t from offset 0, pulses start, waits for
// done and reads the result back through the output batch map
// (batch b -> channel 8(b%4) + 2((b/4)%4) + 1-par, offset (b/16)*4 KB). It
// checks that the result is in ascending key order, that every key appears
// once, and that the values travelled with their keys. It runs log2_nt = 7
// (two phase-1 passes, the second tuned with 2 active leaves per round) and
// log2_nt = 9 (passes with 16 and 8 active leaves).
//
// Mechanisms counted, each of which must occur at least once:
//   phase-1 passes / phase switch / ping-pong parity of both kinds,
//   inactive leaves (empty runs) in a tuned last pass,
//   merge-unit back pressure (a tree root stalled),
//   AXI back pressure from the memory,
//   write-demux batch switches,
//   die-crossing register slices holding a parked word (skid used).
module tb_topsort_top;
  import topsort_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  localparam int NT = NUM_TREES;

  logic       start;
  logic [4:0] log2_nt;
  logic       busy, done, phase2, out_par;
  logic [3:0] pass_idx;

  axi_ar_t [NT-1:0] m_ar;  logic [NT-1:0] m_arvalid, m_arready;
  axi_r_t  [NT-1:0] m_r;   logic [NT-1:0] m_rvalid,  m_rready;
  axi_aw_t [NT-1:0] m_aw;  logic [NT-1:0] m_awvalid, m_awready;
  axi_w_t  [NT-1:0] m_w;   logic [NT-1:0] m_wvalid,  m_wready;
  axi_b_t  [NT-1:0] m_b;   logic [NT-1:0] m_bvalid,  m_bready;

  topsort_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .log2_nt(log2_nt),
    .busy(busy), .done(done), .phase2(phase2), .pass_idx(pass_idx), .out_par(out_par),
    .m_ar(m_ar), .m_arvalid(m_arvalid), .m_arready(m_arready),
    .m_r(m_r), .m_rvalid(m_rvalid), .m_rready(m_rready),
    .m_aw(m_aw), .m_awvalid(m_awvalid), .m_awready(m_awready),
    .m_w(m_w), .m_wvalid(m_wvalid), .m_wready(m_wready),
    .m_b(m_b), .m_bvalid(m_bvalid), .m_bready(m_bready));

  hbm_model #(.NP(NT), .STALL_PCT(15)) u_hbm (
    .clk(clk), .rst_n(rst_n),
    .s_ar(m_ar), .s_arvalid(m_arvalid), .s_arready(m_arready),
    .s_r(m_r), .s_rvalid(m_rvalid), .s_rready(m_rready),
    .s_aw(m_aw), .s_awvalid(m_awvalid), .s_awready(m_awready),
    .s_w(m_w), .s_wvalid(m_wvalid), .s_wready(m_wready),
    .s_b(m_b), .s_bvalid(m_bvalid), .s_bready(m_bready));

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- mechanism counters ----------------
  int n_pass_start = 0, n_phase_switch = 0, n_par0 = 0, n_par1 = 0;
  int n_empty_tok = 0, n_root_stall = 0, n_axi_stall = 0;
  int n_demux_switch = 0, n_skid = 0, n_slr_xfer = 0, n_tuned_pass = 0;
  logic phase2_q = 1'b0;
  logic [1:0] sel_q = '0;

  always @(posedge clk) if (rst_n) begin
    if (dut.tree_start) begin
      n_pass_start++;
      if (dut.cfg.par) n_par1++; else n_par0++;
      if (!dut.cfg.phase2 && dut.cfg.m < 16) n_tuned_pass++;
    end
    phase2_q <= phase2;
    if (phase2 && !phase2_q) n_phase_switch++;
    // empty tokens leaving the leaves of tree 1 (inactive leaves in a tuned pass)
    for (int j = 0; j < 16; j++)
      if (dut.g_tree[1].u_tree.lin_valid[0][j] && dut.g_tree[1].u_tree.lin_ready[0][j] &&
          dut.g_tree[1].u_tree.lin_empty[0][j]) n_empty_tok++;
    if (dut.g_tree[5].u_tree.rt_valid && !dut.g_tree[5].u_tree.rt_ready) n_root_stall++;
    if (dut.g_tree[0].u_tree.rt_valid && !dut.g_tree[0].u_tree.rt_ready) n_root_stall++;
    for (int t = 0; t < NT; t++) begin
      if (m_arvalid[t] && !m_arready[t]) n_axi_stall++;
      if (m_wvalid[t] && !m_wready[t]) n_axi_stall++;
    end
    sel_q <= dut.dm_sel;
    if (dut.dm_sel != sel_q) n_demux_switch++;
    if (dut.g_tree[5].u_p_r.g_stage[0].s_v || dut.g_tree[5].u_p_w.g_stage[0].s_v ||
        dut.g_tree[4].g_reuse.u_p_root.g_stage[0].s_v) n_skid++;
    if (dut.g_tree[5].u_p_r.o_valid && dut.g_tree[5].u_p_r.o_ready) n_slr_xfer++;
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] val_of(input logic [31:0] k);
    return (k * 32'h9E3779B1) ^ 32'h5A5A0F0F;
  endfunction

  task automatic run_sort(input int l2);
    int nt, n, pos, ch, bi, nb, prev, b;
    int unsigned keys [];
    bit seen [];
    logic [AXI_DATA_W-1:0] beat;
    elem_t e;
    longint t0;
    int errs;
    nt = 1 << l2;
    n  = NT * nt;
    keys = new[n];
    seen = new[n + 1];
    for (int i = 0; i < n; i++) keys[i] = i + 1;
    for (int i = n - 1; i > 0; i--) begin
      int j; int unsigned tmp;
      j = $urandom_range(i);
      tmp = keys[i]; keys[i] = keys[j]; keys[j] = tmp;
    end
    u_hbm.mem.delete();
    for (int t = 0; t < NT; t++)
      for (int w = 0; w < nt / ELEMS_PER_BEAT; w++) begin
        beat = '0;
        for (int k = 0; k < ELEMS_PER_BEAT; k++) begin
          pos = t * nt + w * ELEMS_PER_BEAT + k;
          e.key = keys[pos];
          e.value = val_of(keys[pos]);
          beat[k*ELEM_W +: ELEM_W] = e;
        end
        u_hbm.poke(longint'(mkaddr(CH_W'(2 * t), CH_OFF_W'(w * BEAT_BYTES))) >> 6, beat);
      end
    @(posedge clk);
    log2_nt <= 5'(l2);
    start   <= 1'b1;
    @(posedge clk);
    start   <= 1'b0;
    t0 = cycles;
    while (!done) @(posedge clk);
    $display("log2_nt=%0d N=%0d sorted in %0d cycles (%0d phase-1 passes, out_par=%0d)",
             l2, n, cycles - t0, pass_idx, out_par);
    // expected phase-1 pass count: ceil((log2_nt-2)/4)
    checks++;
    if (int'(pass_idx) != (l2 - 2 + 3) / 4) begin
      failures++;
      $display("FAIL pass count %0d, expected %0d", pass_idx, (l2 - 2 + 3) / 4);
    end
    // read back in batch order
    nb   = n * ELEM_W / 8 / BATCH_BYTES;
    prev = 0;
    errs = 0;
    pos  = 0;
    for (b = 0; b < nb; b++) begin
      ch = 8 * (b % 4) + 2 * ((b / 4) % 4) + (1 - int'(out_par));
      for (int w = 0; w < BATCH_BEATS; w++) begin
        bi = int'(longint'(mkaddr(CH_W'(ch), CH_OFF_W'((b / 16) * BATCH_BYTES + w * BEAT_BYTES))) >> 6);
        beat = u_hbm.peek(longint'(bi));
        for (int k = 0; k < ELEMS_PER_BEAT; k++) begin
          e = beat[k*ELEM_W +: ELEM_W];
          checks++;
          if (e.key == 0 || e.key > n || seen[e.key] || e.key <= prev || e.value != val_of(e.key)) begin
            failures++;
            if (errs < 10)
              $display("FAIL pos %0d: key %0d value %h (previous key %0d)", pos, e.key, e.value, prev);
            errs++;
          end else begin
            seen[e.key] = 1'b1;
          end
          prev = e.key;
          pos++;
        end
      end
    end
    checks++;
    if (pos != n) begin
      failures++;
      $display("FAIL read back %0d of %0d elements", pos, n);
    end
  endtask

  task automatic need(input string what, input int cnt);
    checks++;
    $display("  mechanism %-34s : %0d", what, cnt);
    if (cnt == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    start   = 1'b0;
    log2_nt = 5'd7;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    run_sort(7);
    repeat (20) @(posedge clk);
    run_sort(9);
    need("tree passes launched",            n_pass_start);
    need("phase 1 -> phase 2 switches",     n_phase_switch);
    need("passes reading even channels",    n_par0);
    need("passes reading odd channels",     n_par1);
    need("tuned last passes (m < 16)",      n_tuned_pass);
    need("empty tokens from inactive leaves", n_empty_tok);
    need("tree root stalled",               n_root_stall);
    need("AXI stalls from memory",          n_axi_stall);
    need("write-demux batch switches",      n_demux_switch);
    need("die-crossing skid register used", n_skid);
    need("die-crossing transfers",          n_slr_xfer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
