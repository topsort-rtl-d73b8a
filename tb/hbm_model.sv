// hbm_model -- behavioural stand-in for the HBM memory subsystem (AXI rate
// converters, crossbars and 32 pseudo channels) used by the testbenches.
//
// One sparse memory of 512-bit beats serves NP AXI4 slave ports. Every port
// takes one read burst and one write burst at a time from small queues and
// moves at most one beat per cycle on R and on W. Ready and valid signals are
// dropped at random (STALL_PCT percent of the cycles) to exercise back
// pressure. Bursts are INCR; the address is {channel, offset} and is only used
// as a byte address here. Reads of never-written beats return zero. Not
// synthesizable.
module hbm_model #(
  parameter int NP        = 16,
  parameter int STALL_PCT = 20
) (
  input  logic clk,
  input  logic rst_n,
  input  topsort_pkg::axi_ar_t [NP-1:0] s_ar,
  input  logic [NP-1:0]                 s_arvalid,
  output logic [NP-1:0]                 s_arready,
  output topsort_pkg::axi_r_t  [NP-1:0] s_r,
  output logic [NP-1:0]                 s_rvalid,
  input  logic [NP-1:0]                 s_rready,
  input  topsort_pkg::axi_aw_t [NP-1:0] s_aw,
  input  logic [NP-1:0]                 s_awvalid,
  output logic [NP-1:0]                 s_awready,
  input  topsort_pkg::axi_w_t  [NP-1:0] s_w,
  input  logic [NP-1:0]                 s_wvalid,
  output logic [NP-1:0]                 s_wready,
  output topsort_pkg::axi_b_t  [NP-1:0] s_b,
  output logic [NP-1:0]                 s_bvalid,
  input  logic [NP-1:0]                 s_bready
);
  import topsort_pkg::*;

  logic [AXI_DATA_W-1:0] mem [longint];

  // active bursts per port
  logic [NP-1:0]        rd_act, wr_act;
  longint               rd_addr [NP];
  int                   rd_left [NP];
  logic [AXI_ID_W-1:0]  rd_id   [NP];
  longint               wr_addr [NP];
  int                   b_pend  [NP];
  int unsigned          n_stall_cycles;

  function automatic longint beat_index(input longint a);
    return a >> 6;
  endfunction

  function automatic logic [AXI_DATA_W-1:0] peek(input longint bi);
    if (mem.exists(bi)) return mem[bi];
    return '0;
  endfunction

  task automatic poke(input longint bi, input logic [AXI_DATA_W-1:0] d);
    mem[bi] = d;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_arready <= '0; s_rvalid <= '0; s_awready <= '0; s_wready <= '0; s_bvalid <= '0;
      rd_act <= '0; wr_act <= '0;
      s_r <= '0; s_b <= '0;
      n_stall_cycles <= 0;
      for (int p = 0; p < NP; p++) begin
        rd_left[p] <= 0; b_pend[p] <= 0; rd_addr[p] <= 0; wr_addr[p] <= 0; rd_id[p] <= '0;
      end
    end else begin
      for (int p = 0; p < NP; p++) begin
        logic st;
        st = ($urandom_range(99) < STALL_PCT);
        if (st) n_stall_cycles <= n_stall_cycles + 1;
        // ---- read address
        if (s_arvalid[p] && s_arready[p]) begin
          rd_act[p]  <= 1'b1;
          rd_addr[p] <= longint'(s_ar[p].addr);
          rd_left[p] <= int'(s_ar[p].len) + 1;
          rd_id[p]   <= s_ar[p].id;
        end
        s_arready[p] <= !rd_act[p] && !(s_arvalid[p] && s_arready[p]) && !st;
        // ---- read data
        if (s_rvalid[p] && s_rready[p]) begin
          s_rvalid[p] <= 1'b0;
        end
        if (rd_act[p] && (!s_rvalid[p] || s_rready[p]) && !st) begin
          s_rvalid[p]    <= 1'b1;
          s_r[p].data    <= peek(beat_index(rd_addr[p]));
          s_r[p].id      <= rd_id[p];
          s_r[p].last    <= (rd_left[p] == 1);
          rd_addr[p]     <= rd_addr[p] + 64;
          rd_left[p]     <= rd_left[p] - 1;
          if (rd_left[p] == 1) rd_act[p] <= 1'b0;
        end
        // ---- write address
        if (s_awvalid[p] && s_awready[p]) begin
          wr_act[p]  <= 1'b1;
          wr_addr[p] <= longint'(s_aw[p].addr);
        end
        s_awready[p] <= !wr_act[p] && !(s_awvalid[p] && s_awready[p]) && !st;
        // ---- write data
        if (s_wvalid[p] && s_wready[p]) begin
          poke(beat_index(wr_addr[p]), s_w[p].data);
          wr_addr[p] <= wr_addr[p] + 64;
          if (s_w[p].last) begin
            wr_act[p] <= 1'b0;
            b_pend[p] <= b_pend[p] + 1;
          end
        end
        s_wready[p] <= wr_act[p] && !(s_wvalid[p] && s_wready[p] && s_w[p].last) && !st;
        // ---- write response
        if (s_bvalid[p] && s_bready[p]) begin
          s_bvalid[p] <= 1'b0;
          b_pend[p]   <= b_pend[p] - 1 + ((s_wvalid[p] && s_wready[p] && s_w[p].last) ? 1 : 0);
        end else if (!s_bvalid[p] && b_pend[p] > 0 && !st) begin
          s_bvalid[p] <= 1'b1;
        end
      end
    end
  end
endmodule
