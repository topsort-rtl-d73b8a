// mms_merge_unit -- E-rate streaming merge unit with an initiation interval of 1.
//
// Merges pairs of ascending runs, one run from stream a and one from stream b,
// into one ascending output run, E elements per cycle. The structure is the
// feedback-free two-merger arrangement: bitonic merger L and bitonic merger S
// plus a multiplexer steered by comparing the head elements of the two inputs
// (a_i <= b_j picks a).
//
// How it works. The unit remembers the last batch it consumed from each
// input (cur_a, cur_b; a -inf batch before the first one). The E largest of
// those two batches are exactly the elements that have been consumed but not
// yet output, so L merges cur_a with cur_b and keeps the upper half. In the
// same issue slot the multiplexer takes the next batch X from the input whose
// head is smaller; X is delayed alongside L and S merges it with L's upper
// half and outputs the lower E elements. Only the input-selection control
// loops back; the data path has no feedback.
//
// Run framing. The first batch of a run pair produces no output (its slot is
// a bubble). After both runs are exhausted one flush slot merges L with a
// +inf batch, which outputs the remaining upper half with 'last' set. A run
// of length zero arrives as one token with 'empty' set; if both runs are
// empty the unit sends one empty token. So a pair of runs of n_a and n_b
// batches takes n_a + n_b + 1 issue slots and yields n_a + n_b batches.
//
// Timing. Issue to output takes 2*log2(2E) cycles (L then S). The whole
// pipeline advances when the output register is empty or being taken, so a
// stalled consumer freezes the unit without losing data. Input valid must not
// depend on ready. The framing and the control are this design's own; the
// L/S/Mux topology follows the published merge unit.
module mms_merge_unit #(
  parameter int E = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                            a_valid,
  output logic                            a_ready,
  input  topsort_pkg::elem_t [E-1:0]      a_data,
  input  logic                            a_last,
  input  logic                            a_empty,
  input  logic                            b_valid,
  output logic                            b_ready,
  input  topsort_pkg::elem_t [E-1:0]      b_data,
  input  logic                            b_last,
  input  logic                            b_empty,
  output logic                            o_valid,
  input  logic                            o_ready,
  output topsort_pkg::elem_t [E-1:0]      o_data,
  output logic                            o_last,
  output logic                            o_empty
);
  import topsort_pkg::*;

  localparam int NS  = $clog2(2 * E);
  localparam int LAT = 2 * NS;

  typedef enum logic [1:0] {OP_NONE, OP_DATA, OP_FLUSH, OP_EMPTY} op_e;

  typedef struct packed {
    op_e  op;
    logic first;    // first batch of a run pair: no output
  } side_t;

  mrec_t [E-1:0] cur_a, cur_b;
  logic          a_done, b_done, started;

  // decision of this cycle
  logic          adv;
  logic          take_a, take_b, drop_a, drop_b;
  op_e           op;
  mrec_t [E-1:0] x_vec;

  function automatic mrec_t [E-1:0] fill(input logic [1:0] cls);
    mrec_t [E-1:0] v;
    for (int k = 0; k < E; k++) begin
      v[k].cls = cls;
      v[k].e   = '0;
    end
    return v;
  endfunction

  function automatic mrec_t [E-1:0] wrap(input elem_t [E-1:0] d);
    mrec_t [E-1:0] v;
    for (int k = 0; k < E; k++) begin
      v[k].cls = CLS_REAL;
      v[k].e   = d[k];
    end
    return v;
  endfunction

  side_t side [LAT+1];
  mrec_t [E-1:0] xdly [NS+1];
  logic [2*E-1:0][MREC_W-1:0] l_out, s_out;
  logic [E-1:0][MREC_W-1:0]   s_in_l, s_in_x;
  mrec_t [2*E-1:0]            s_rec;

  assign adv = !o_valid || o_ready;

  always_comb begin
    take_a = 1'b0; take_b = 1'b0; drop_a = 1'b0; drop_b = 1'b0;
    op     = OP_NONE;
    x_vec  = fill(CLS_POS);
    if (!a_done && a_valid && a_empty) begin
      drop_a = 1'b1;
    end else if (!b_done && b_valid && b_empty) begin
      drop_b = 1'b1;
    end else if (a_done && b_done) begin
      op = started ? OP_FLUSH : OP_EMPTY;
    end else if (a_done) begin
      take_b = b_valid;
    end else if (b_done) begin
      take_a = a_valid;
    end else if (a_valid && b_valid) begin
      if (a_data[0].key <= b_data[0].key) take_a = 1'b1;
      else                                take_b = 1'b1;
    end
    if (take_a) begin op = OP_DATA; x_vec = wrap(a_data); end
    if (take_b) begin op = OP_DATA; x_vec = wrap(b_data); end
  end

  assign a_ready = adv && (take_a || drop_a);
  assign b_ready = adv && (take_b || drop_b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_a   <= fill(CLS_NEG);
      cur_b   <= fill(CLS_NEG);
      a_done  <= 1'b0;
      b_done  <= 1'b0;
      started <= 1'b0;
    end else if (adv) begin
      if (drop_a) a_done <= 1'b1;
      if (drop_b) b_done <= 1'b1;
      if (take_a) begin cur_a <= x_vec; a_done <= a_last; started <= 1'b1; end
      if (take_b) begin cur_b <= x_vec; b_done <= b_last; started <= 1'b1; end
      if (op == OP_FLUSH || op == OP_EMPTY) begin
        cur_a   <= fill(CLS_NEG);
        cur_b   <= fill(CLS_NEG);
        a_done  <= 1'b0;
        b_done  <= 1'b0;
        started <= 1'b0;
      end
    end
  end

  // L: upper half of merge(cur_a, cur_b), issued in the same slot as X
  bitonic_merge #(.E(E), .W(MREC_W)) u_l (
    .clk(clk), .en(adv), .in_a(cur_a), .in_b(cur_b), .out(l_out));

  // X and the slot's side information travel alongside L
  assign side[0] = '{op: op, first: !started};
  assign xdly[0] = x_vec;
  for (genvar s = 0; s < LAT; s++) begin : g_side
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   side[s+1] <= '{op: OP_NONE, first: 1'b0};
      else if (adv) side[s+1] <= side[s];
    end
  end
  for (genvar s = 0; s < NS; s++) begin : g_x
    always_ff @(posedge clk) begin
      if (adv) xdly[s+1] <= xdly[s];
    end
  end

  assign s_in_l = l_out[2*E-1:E];
  assign s_in_x = xdly[NS];

  // S: lower half of merge(upper half of L, X)
  bitonic_merge #(.E(E), .W(MREC_W)) u_s (
    .clk(clk), .en(adv), .in_a(s_in_l), .in_b(s_in_x), .out(s_out));

  assign s_rec = s_out;

  always_comb begin
    o_valid = (side[LAT].op == OP_DATA && !side[LAT].first) ||
              side[LAT].op == OP_FLUSH || side[LAT].op == OP_EMPTY;
    o_last  = side[LAT].op == OP_FLUSH || side[LAT].op == OP_EMPTY;
    o_empty = side[LAT].op == OP_EMPTY;
    for (int k = 0; k < E; k++) o_data[k] = s_rec[k].e;
  end

  // an output batch of real data never carries fill values
  always_ff @(posedge clk) begin
    if (rst_n && o_valid && !o_empty)
      for (int k = 0; k < E; k++)
        assert (s_rec[k].cls == CLS_REAL)
          else $error("mms_merge_unit: fill value on the output lane %0d", k);
  end
endmodule
