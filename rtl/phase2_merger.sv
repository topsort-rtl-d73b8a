// phase2_merger -- the extra merge logic that exists only for phase 2.
//
// The four reused trees (0, 4, 8, 12) each deliver one sorted run of N/4
// elements, eight elements per cycle. Two merge units of rate P/2 = 16 and
// one of rate P = 32 stack on top of them, so the four 8-rate trees plus
// these three units form one 64-leaf tree that emits 32 elements (256 B)
// per cycle. Couplers double the stream width in front of each unit (8->16,
// 16->32). Trees 0 and 4 meet in the first 16-rate unit, trees 8 and 12 in
// the second. Input and output use the run framing of mms_merge_unit.
module phase2_merger #(
  parameter int P = topsort_pkg::P2_RATE
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [3:0]                         t_valid,
  output logic [3:0]                         t_ready,
  input  topsort_pkg::elem_t [3:0][P/4-1:0]  t_data,
  input  logic [3:0]                         t_last,
  input  logic [3:0]                         t_empty,
  output logic                               o_valid,
  input  logic                               o_ready,
  output topsort_pkg::elem_t [P-1:0]         o_data,
  output logic                               o_last,
  output logic                               o_empty
);
  import topsort_pkg::*;

  localparam int Q = P / 4;   // tree root rate
  localparam int H = P / 2;   // first extra level

  logic [3:0]             c1_valid, c1_ready, c1_last, c1_empty;
  elem_t [3:0][H-1:0]     c1_data;
  logic [1:0]             m1_valid, m1_ready, m1_last, m1_empty;
  elem_t [1:0][H-1:0]     m1_data;
  logic [1:0]             c2_valid, c2_ready, c2_last, c2_empty;
  elem_t [1:0][P-1:0]     c2_data;

  for (genvar t = 0; t < 4; t++) begin : g_c1
    stream_coupler #(.E(Q)) u_cpl (
      .clk(clk), .rst_n(rst_n),
      .i_valid(t_valid[t]), .i_ready(t_ready[t]), .i_data(t_data[t]),
      .i_last(t_last[t]), .i_empty(t_empty[t]),
      .o_valid(c1_valid[t]), .o_ready(c1_ready[t]), .o_data(c1_data[t]),
      .o_last(c1_last[t]), .o_empty(c1_empty[t]));
  end

  for (genvar u = 0; u < 2; u++) begin : g_m1
    mms_merge_unit #(.E(H)) u_mu (
      .clk(clk), .rst_n(rst_n),
      .a_valid(c1_valid[2*u]), .a_ready(c1_ready[2*u]), .a_data(c1_data[2*u]),
      .a_last(c1_last[2*u]), .a_empty(c1_empty[2*u]),
      .b_valid(c1_valid[2*u+1]), .b_ready(c1_ready[2*u+1]), .b_data(c1_data[2*u+1]),
      .b_last(c1_last[2*u+1]), .b_empty(c1_empty[2*u+1]),
      .o_valid(m1_valid[u]), .o_ready(m1_ready[u]), .o_data(m1_data[u]),
      .o_last(m1_last[u]), .o_empty(m1_empty[u]));
    stream_coupler #(.E(H)) u_cpl (
      .clk(clk), .rst_n(rst_n),
      .i_valid(m1_valid[u]), .i_ready(m1_ready[u]), .i_data(m1_data[u]),
      .i_last(m1_last[u]), .i_empty(m1_empty[u]),
      .o_valid(c2_valid[u]), .o_ready(c2_ready[u]), .o_data(c2_data[u]),
      .o_last(c2_last[u]), .o_empty(c2_empty[u]));
  end

  mms_merge_unit #(.E(P)) u_root (
    .clk(clk), .rst_n(rst_n),
    .a_valid(c2_valid[0]), .a_ready(c2_ready[0]), .a_data(c2_data[0]),
    .a_last(c2_last[0]), .a_empty(c2_empty[0]),
    .b_valid(c2_valid[1]), .b_ready(c2_ready[1]), .b_data(c2_data[1]),
    .b_last(c2_last[1]), .b_empty(c2_empty[1]),
    .o_valid(o_valid), .o_ready(o_ready), .o_data(o_data),
    .o_last(o_last), .o_empty(o_empty));
endmodule
