// topsort_top -- the two-phase HBM merge sorter.
//
// Sixteen merge trees (8 elements per cycle, 16 leaves each) each own one AXI
// master port and the HBM channel pair 2t / 2t+1. In phase 1 all sixteen
// sort their N/16 elements in parallel, pass after pass, until every tree
// has four sorted sub sequences of N/64 elements. In phase 2 trees 0, 4, 8
// and 12 are reused as the lower levels of one 64-leaf tree: their root
// streams enter phase2_merger (two 16-rate and one 32-rate merge unit), and
// write_demux deals the 256 B/cycle result out in 4 KB batches to output
// buffers drained through the write channels of AXI-0, -4, -8 and -12.
//
// Floorplan-driven pipelining: trees 0 and 8 sit on the die next to the
// HBM, trees 1-3 and 9-11 one die up and the other eight two dies up. Every
// AXI channel of a tree, and the phase-2 streams of the reused trees, pass
// through slr_pipe with 0, 2 or 4 register slices accordingly.
//
// Interface: 'start' with log2_nt = log2(N/16) (7..25) begins a sort of the
// data already in the even channels (part t in channel 2t from offset 0);
// 'done' pulses when the last write response of phase 2 is back. The m_*
// ports are the 16 AXI4 masters (512-bit data, 33-bit address {channel,
// 28-bit offset}, 4-bit read ID); AXI rate converters, crossbars and HBM are
// outside this design. The sorted result is batch b (4 KB, ascending order)
// at channel 8(b mod 4) + 2((b/4) mod 4) + (1-par), offset (b/16)*4 KB, where
// par is the parity of the number of phase-1 passes (out_par).
module topsort_top (
  input  logic clk,
  input  logic rst_n,
  input  logic       start,
  input  logic [4:0] log2_nt,
  output logic       busy,
  output logic       done,
  output logic       phase2,
  output logic [3:0] pass_idx,
  output logic       out_par,
  output topsort_pkg::axi_ar_t [topsort_pkg::NUM_TREES-1:0] m_ar,
  output logic [topsort_pkg::NUM_TREES-1:0]                 m_arvalid,
  input  logic [topsort_pkg::NUM_TREES-1:0]                 m_arready,
  input  topsort_pkg::axi_r_t  [topsort_pkg::NUM_TREES-1:0] m_r,
  input  logic [topsort_pkg::NUM_TREES-1:0]                 m_rvalid,
  output logic [topsort_pkg::NUM_TREES-1:0]                 m_rready,
  output topsort_pkg::axi_aw_t [topsort_pkg::NUM_TREES-1:0] m_aw,
  output logic [topsort_pkg::NUM_TREES-1:0]                 m_awvalid,
  input  logic [topsort_pkg::NUM_TREES-1:0]                 m_awready,
  output topsort_pkg::axi_w_t  [topsort_pkg::NUM_TREES-1:0] m_w,
  output logic [topsort_pkg::NUM_TREES-1:0]                 m_wvalid,
  input  logic [topsort_pkg::NUM_TREES-1:0]                 m_wready,
  input  topsort_pkg::axi_b_t  [topsort_pkg::NUM_TREES-1:0] m_b,
  input  logic [topsort_pkg::NUM_TREES-1:0]                 m_bvalid,
  output logic [topsort_pkg::NUM_TREES-1:0]                 m_bready
);
  import topsort_pkg::*;

  localparam int NT = NUM_TREES;
  localparam int Q  = P1_RATE;
  localparam int RS_W = Q * ELEM_W + 2;      // root stream payload

  // die (SLR) of each tree, from the published floorplan
  function automatic int slr_of(input int t);
    case (t)
      0, 8:                 return 0;
      1, 2, 3, 9, 10, 11:   return 1;
      default:              return 2;
    endcase
  endfunction

  tree_cfg_t     cfg;
  logic          tree_start;
  logic [NT-1:0] tree_done;

  topsort_ctrl #(.NT(NT)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .log2_nt(log2_nt),
    .cfg(cfg), .tree_start(tree_start), .tree_done(tree_done),
    .busy(busy), .done(done), .phase2(phase2), .pass_idx(pass_idx));

  assign out_par = cfg.par;

  // phase-2 streams of the reused trees (index i = tree 4i)
  logic [3:0]            rt_valid, rt_ready, rt_last, rt_empty;
  elem_t [3:0][Q-1:0]    rt_data;
  logic [3:0]            pw_valid, pw_ready;
  logic [3:0][AXI_DATA_W-1:0] pw_data;

  for (genvar t = 0; t < NT; t++) begin : g_tree
    localparam int  ST  = 2 * slr_of(t);
    localparam bit  RU  = (t % 4) == 0;

    // tree-side AXI
    axi_ar_t ar; logic ar_v, ar_r;
    axi_r_t  rr; logic r_v,  r_r;
    axi_aw_t aw; logic aw_v, aw_r;
    axi_w_t  ww; logic w_v,  w_r;
    axi_b_t  bb; logic b_v,  b_r;
    // tree-side phase-2 streams
    logic          ro_v, ro_r, ro_l, ro_e;
    elem_t [Q-1:0] ro_d;
    logic          pi_v, pi_r;
    logic [AXI_DATA_W-1:0] pi_d;

    merge_tree #(.TREE_ID(t), .REUSED(RU)) u_tree (
      .clk(clk), .rst_n(rst_n), .cfg(cfg), .start(tree_start), .done(tree_done[t]),
      .ar(ar), .ar_valid(ar_v), .ar_ready(ar_r),
      .r(rr), .r_valid(r_v), .r_ready(r_r),
      .aw(aw), .aw_valid(aw_v), .aw_ready(aw_r),
      .w(ww), .w_valid(w_v), .w_ready(w_r),
      .b(bb), .b_valid(b_v), .b_ready(b_r),
      .root_valid(ro_v), .root_ready(ro_r), .root_data(ro_d),
      .root_last(ro_l), .root_empty(ro_e),
      .p2w_valid(pi_v), .p2w_ready(pi_r), .p2w_data(pi_d));

    slr_pipe #(.W($bits(axi_ar_t)), .STAGES(ST)) u_p_ar (
      .clk(clk), .rst_n(rst_n), .i_valid(ar_v), .i_ready(ar_r), .i_data(ar),
      .o_valid(m_arvalid[t]), .o_ready(m_arready[t]), .o_data(m_ar[t]));
    slr_pipe #(.W($bits(axi_r_t)), .STAGES(ST)) u_p_r (
      .clk(clk), .rst_n(rst_n), .i_valid(m_rvalid[t]), .i_ready(m_rready[t]), .i_data(m_r[t]),
      .o_valid(r_v), .o_ready(r_r), .o_data(rr));
    slr_pipe #(.W($bits(axi_aw_t)), .STAGES(ST)) u_p_aw (
      .clk(clk), .rst_n(rst_n), .i_valid(aw_v), .i_ready(aw_r), .i_data(aw),
      .o_valid(m_awvalid[t]), .o_ready(m_awready[t]), .o_data(m_aw[t]));
    slr_pipe #(.W($bits(axi_w_t)), .STAGES(ST)) u_p_w (
      .clk(clk), .rst_n(rst_n), .i_valid(w_v), .i_ready(w_r), .i_data(ww),
      .o_valid(m_wvalid[t]), .o_ready(m_wready[t]), .o_data(m_w[t]));
    slr_pipe #(.W($bits(axi_b_t)), .STAGES(ST)) u_p_b (
      .clk(clk), .rst_n(rst_n), .i_valid(m_bvalid[t]), .i_ready(m_bready[t]), .i_data(m_b[t]),
      .o_valid(b_v), .o_ready(b_r), .o_data(bb));

    if (RU) begin : g_reuse
      localparam int I = t / 4;
      logic [RS_W-1:0] rs_o;
      slr_pipe #(.W(RS_W), .STAGES(ST)) u_p_root (
        .clk(clk), .rst_n(rst_n),
        .i_valid(ro_v), .i_ready(ro_r), .i_data({ro_l, ro_e, ro_d}),
        .o_valid(rt_valid[I]), .o_ready(rt_ready[I]), .o_data(rs_o));
      assign {rt_last[I], rt_empty[I], rt_data[I]} = rs_o;
      slr_pipe #(.W(AXI_DATA_W), .STAGES(ST)) u_p_pw (
        .clk(clk), .rst_n(rst_n),
        .i_valid(pw_valid[I]), .i_ready(pw_ready[I]), .i_data(pw_data[I]),
        .o_valid(pi_v), .o_ready(pi_r), .o_data(pi_d));
    end else begin : g_plain
      assign ro_r = 1'b0;
      assign pi_v = 1'b0;
      assign pi_d = '0;
    end
  end

  // ---------------- phase-2 extra logic (bottom die) ----------------
  logic                      p2_valid, p2_ready, p2_last, p2_empty;
  elem_t [P2_RATE-1:0]       p2_data;
  logic [1:0]                dm_sel;

  phase2_merger #(.P(P2_RATE)) u_p2 (
    .clk(clk), .rst_n(rst_n),
    .t_valid(rt_valid), .t_ready(rt_ready), .t_data(rt_data),
    .t_last(rt_last), .t_empty(rt_empty),
    .o_valid(p2_valid), .o_ready(p2_ready), .o_data(p2_data),
    .o_last(p2_last), .o_empty(p2_empty));

  logic dm_ready;
  // the final run framing is not needed any more; empty tokens carry no data
  assign p2_ready = p2_empty || dm_ready;

  write_demux u_demux (
    .clk(clk), .rst_n(rst_n),
    .i_valid(p2_valid && !p2_empty), .i_ready(dm_ready), .i_data(p2_data),
    .o_valid(pw_valid), .o_ready(pw_ready), .o_data(pw_data), .sel(dm_sel));
endmodule
