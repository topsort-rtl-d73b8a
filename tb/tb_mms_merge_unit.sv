// tb_mms_merge_unit -- checks the streaming merge unit at E = 4 and E = 8.
//
// A driver feeds pairs of ascending runs into inputs a and b: run lengths of
// 0..6 batches (a zero-length run is one token with 'empty' set), distinct
// random keys, values tied to keys, random valid gaps and random output
// back pressure. For each pair the output must be the sorted union of the
// two runs, E elements per beat, with 'last' on the final beat; a pair of
// empty runs must give exactly one empty token. A second phase keeps both
// inputs always valid and the output always ready and checks the rate: a
// pair of n_a + n_b batches needs n_a + n_b + 1 issue slots, so K pairs
// must finish within sum(n_a + n_b + 1) + 2*log2(2E) + a small margin cycles.
module tb_mms_merge_unit;
  import topsort_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic stress = 1'b0;
  int   gap_pct = 30, stall_pct = 30;

  // one unit per width; same stimulus structure
  typedef struct { elem_t e [8]; bit last; bit empty; } beat_t;

  function automatic int unsigned vof(input int unsigned k);
    return k ^ 32'hC0FFEE11;
  endfunction

  // ---------------- E = 4 ----------------
  `define MMS_INST(EE, SUF) \
  logic a_valid``SUF, a_ready``SUF, a_last``SUF, a_empty``SUF; \
  logic b_valid``SUF, b_ready``SUF, b_last``SUF, b_empty``SUF; \
  logic o_valid``SUF, o_ready``SUF, o_last``SUF, o_empty``SUF; \
  elem_t [EE-1:0] a_data``SUF, b_data``SUF, o_data``SUF; \
  mms_merge_unit #(.E(EE)) u``SUF ( \
    .clk(clk), .rst_n(rst_n), \
    .a_valid(a_valid``SUF), .a_ready(a_ready``SUF), .a_data(a_data``SUF), .a_last(a_last``SUF), .a_empty(a_empty``SUF), \
    .b_valid(b_valid``SUF), .b_ready(b_ready``SUF), .b_data(b_data``SUF), .b_last(b_last``SUF), .b_empty(b_empty``SUF), \
    .o_valid(o_valid``SUF), .o_ready(o_ready``SUF), .o_data(o_data``SUF), .o_last(o_last``SUF), .o_empty(o_empty``SUF));

  `MMS_INST(4, _4)
  `MMS_INST(8, _8)

  // stimulus queues
  beat_t qa [2][$], qb [2][$];
  // expected output beats
  beat_t qe [2][$];
  int n_out [2];

  task automatic make_pair(input int u, input int e, input int na, input int nb);
    int unsigned keys [$], ka [$], kb [$];
    beat_t bt;
    int unsigned base;
    base = $urandom_range(1000);
    for (int i = 0; i < (na + nb) * e; i++) keys.push_back(base + i * ($urandom_range(3) + 1) + 1);
    keys.shuffle();
    for (int i = 0; i < na * e; i++) ka.push_back(keys[i]);
    for (int i = na * e; i < (na + nb) * e; i++) kb.push_back(keys[i]);
    ka.sort(); kb.sort(); keys.sort();
    // inputs
    if (na == 0) begin bt = '{default: '0}; bt.last = 1; bt.empty = 1; qa[u].push_back(bt); end
    for (int i = 0; i < na; i++) begin
      bt = '{default: '0};
      for (int k = 0; k < e; k++) begin bt.e[k].key = ka[i*e+k]; bt.e[k].value = vof(ka[i*e+k]); end
      bt.last = (i == na - 1); bt.empty = 0;
      qa[u].push_back(bt);
    end
    if (nb == 0) begin bt = '{default: '0}; bt.last = 1; bt.empty = 1; qb[u].push_back(bt); end
    for (int i = 0; i < nb; i++) begin
      bt = '{default: '0};
      for (int k = 0; k < e; k++) begin bt.e[k].key = kb[i*e+k]; bt.e[k].value = vof(kb[i*e+k]); end
      bt.last = (i == nb - 1); bt.empty = 0;
      qb[u].push_back(bt);
    end
    // expected
    if (na + nb == 0) begin bt = '{default: '0}; bt.last = 1; bt.empty = 1; qe[u].push_back(bt); end
    for (int i = 0; i < na + nb; i++) begin
      bt = '{default: '0};
      for (int k = 0; k < e; k++) begin bt.e[k].key = keys[i*e+k]; bt.e[k].value = vof(keys[i*e+k]); end
      bt.last = (i == na + nb - 1); bt.empty = 0;
      qe[u].push_back(bt);
    end
  endtask

  // drivers: present the head of the queue; hold it until taken
  `define MMS_DRV(EE, SUF, U) \
  logic a_fired``SUF = 1'b0, b_fired``SUF = 1'b0; \
  always @(negedge clk) if (rst_n) begin \
    if (!a_valid``SUF || a_fired``SUF) begin \
      a_valid``SUF = (qa[U].size() > 0) && (stress || $urandom_range(99) >= gap_pct); \
      if (qa[U].size() > 0) begin \
        for (int k = 0; k < EE; k++) a_data``SUF[k] = qa[U][0].e[k]; \
        a_last``SUF = qa[U][0].last; a_empty``SUF = qa[U][0].empty; \
      end \
    end \
    if (!b_valid``SUF || b_fired``SUF) begin \
      b_valid``SUF = (qb[U].size() > 0) && (stress || $urandom_range(99) >= gap_pct); \
      if (qb[U].size() > 0) begin \
        for (int k = 0; k < EE; k++) b_data``SUF[k] = qb[U][0].e[k]; \
        b_last``SUF = qb[U][0].last; b_empty``SUF = qb[U][0].empty; \
      end \
    end \
    o_ready``SUF = stress || ($urandom_range(99) >= stall_pct); \
    a_fired``SUF = 1'b0; b_fired``SUF = 1'b0; \
  end \
  always @(posedge clk) if (rst_n) begin \
    if (a_valid``SUF && a_ready``SUF) begin void'(qa[U].pop_front()); a_fired``SUF = 1'b1; end \
    if (b_valid``SUF && b_ready``SUF) begin void'(qb[U].pop_front()); b_fired``SUF = 1'b1; end \
    if (o_valid``SUF && o_ready``SUF) begin \
      beat_t ex; bit bad; \
      n_out[U]++; \
      checks++; \
      if (qe[U].size() == 0) begin failures++; $display("FAIL E=%0d unexpected output", EE); end \
      else begin \
        ex = qe[U].pop_front(); \
        bad = (o_last``SUF != ex.last) || (o_empty``SUF != ex.empty); \
        if (!ex.empty) for (int k = 0; k < EE; k++) bad |= (o_data``SUF[k] != ex.e[k]); \
        if (bad) begin \
          failures++; \
          if (failures < 8) $display("FAIL E=%0d out beat %0d: key0 %0d exp %0d last %b/%b empty %b/%b", \
            EE, n_out[U], o_data``SUF[0].key, ex.e[0].key, o_last``SUF, ex.last, o_empty``SUF, ex.empty); \
        end \
      end \
    end \
  end

  `MMS_DRV(4, _4, 0)
  `MMS_DRV(8, _8, 1)

  initial begin
    int slots;
    longint t0;
    a_valid_4 = 0; b_valid_4 = 0; o_ready_4 = 0; a_data_4 = '0; b_data_4 = '0; a_last_4 = 0; b_last_4 = 0; a_empty_4 = 0; b_empty_4 = 0;
    a_valid_8 = 0; b_valid_8 = 0; o_ready_8 = 0; a_data_8 = '0; b_data_8 = '0; a_last_8 = 0; b_last_8 = 0; a_empty_8 = 0; b_empty_8 = 0;
    n_out[0] = 0; n_out[1] = 0;
    // random phase
    for (int p = 0; p < 150; p++) begin
      make_pair(0, 4, $urandom_range(6), $urandom_range(6));
      make_pair(1, 8, $urandom_range(6), $urandom_range(6));
    end
    make_pair(0, 4, 0, 0);
    make_pair(1, 8, 0, 0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (qe[0].size() > 0 || qe[1].size() > 0) @(posedge clk);
    // rate phase (E = 8 only)
    repeat (30) @(posedge clk);
    slots = 0;
    for (int p = 0; p < 50; p++) begin
      int na, nb;
      na = $urandom_range(1, 6); nb = $urandom_range(1, 6);
      slots += na + nb + 1;
      make_pair(1, 8, na, nb);
    end
    @(negedge clk);
    stress = 1'b1;
    t0 = cyc;
    while (qe[1].size() > 0) @(posedge clk);
    checks++;
    $display("rate: %0d issue slots finished in %0d cycles", slots, cyc - t0);
    if (cyc - t0 > slots + 2 * 4 + 4) begin
      failures++;
      $display("FAIL initiation interval: %0d slots took %0d cycles", slots, cyc - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
