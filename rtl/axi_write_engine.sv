// axi_write_engine -- output buffer and AXI write master of one merge tree.
//
// Result beats (512 bits, eight sorted elements) enter a FIFO output buffer.
// As soon as a full burst of BURST_BEATS beats is buffered (or the remaining
// beats of the job, for the final burst) the engine issues a write address
// and streams that many beats on W, flagging the final one with wlast. The
// next address may be issued while the previous burst's data is still
// streaming; burst lengths wait in a small queue so W knows where each burst
// ends. The job is done when every write response has come back.
//
// Addresses: in phase 1 (mode_p2 = 0) bursts go back to back from base_addr.
// In phase 2 a reused tree's port writes 4 KB batches; its burst k goes to
// channel 8*grp + 2*(k mod 4) + (1-par) at offset (k/4)*4 KB, so one port
// spreads its share of the sorted output over its four nearby channels.
// That needs BURST_BEATS*64 = 4 KB, the burst size of the reused trees.
module axi_write_engine #(
  parameter int BURST_BEATS = 16,
  parameter int BUF_DEPTH   = 2 * BURST_BEATS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                                 start,
  input  logic                                 mode_p2,
  input  logic [1:0]                           grp,
  input  logic                                 par,
  input  logic [topsort_pkg::AXI_ADDR_W-1:0]   base_addr,
  input  logic [31:0]                          total_beats,
  output logic                                 done,
  input  logic                                 in_valid,
  output logic                                 in_ready,
  input  logic [topsort_pkg::AXI_DATA_W-1:0]   in_data,
  output topsort_pkg::axi_aw_t                 aw,
  output logic                                 aw_valid,
  input  logic                                 aw_ready,
  output topsort_pkg::axi_w_t                  w,
  output logic                                 w_valid,
  input  logic                                 w_ready,
  input  topsort_pkg::axi_b_t                  b,
  input  logic                                 b_valid,
  output logic                                 b_ready
);
  import topsort_pkg::*;

  localparam int CW = $clog2(BUF_DEPTH + 1);

  logic                  ob_full, ob_empty, ob_pop;
  logic [CW-1:0]         ob_count;
  logic [AXI_DATA_W-1:0] ob_data;

  logic [31:0] beats_left;      // beats not yet covered by an address
  logic [31:0] committed;       // beats covered by an address, not yet sent
  logic [31:0] bursts_out;      // responses outstanding
  logic [31:0] burst_idx;
  logic [AXI_ADDR_W-1:0] seq_addr;
  logic        mode, par_q;
  logic [1:0]  grp_q;
  logic        busy;

  logic [31:0] nxt_len;
  logic        can_issue, aw_fire, w_fire, b_fire;

  // burst-length queue between AW and W
  logic       lq_full, lq_empty, lq_pop;
  logic [8:0] lq_head;
  logic [1:0] lq_count;
  logic [8:0] wbeat;

  assign nxt_len   = (beats_left > 32'(BURST_BEATS)) ? 32'(BURST_BEATS) : beats_left;
  assign can_issue = busy && beats_left != 0 && !lq_full &&
                     32'(ob_count) >= committed + nxt_len;
  assign aw_fire   = aw_valid && aw_ready;
  assign w_fire    = w_valid && w_ready;
  assign b_fire    = b_valid && b_ready;
  assign b_ready   = 1'b1;
  assign in_ready  = !ob_full;

  sync_fifo #(.W(AXI_DATA_W), .DEPTH(BUF_DEPTH)) u_obuf (
    .clk(clk), .rst_n(rst_n),
    .wr_en(in_valid && in_ready), .wr_data(in_data), .full(ob_full),
    .rd_en(ob_pop), .rd_data(ob_data), .empty(ob_empty), .count(ob_count));

  sync_fifo #(.W(9), .DEPTH(2)) u_lenq (
    .clk(clk), .rst_n(rst_n),
    .wr_en(aw_fire), .wr_data(9'(aw.len) + 9'd1), .full(lq_full),
    .rd_en(lq_pop), .rd_data(lq_head), .empty(lq_empty), .count(lq_count));

  // W: stream the head burst
  assign w_valid = !lq_empty && !ob_empty;
  assign w.data  = ob_data;
  assign w.last  = (wbeat + 9'd1 == lq_head);
  assign ob_pop  = w_fire;
  assign lq_pop  = w_fire && w.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      beats_left <= '0;
      committed  <= '0;
      bursts_out <= '0;
      burst_idx  <= '0;
      seq_addr   <= '0;
      mode       <= 1'b0;
      par_q      <= 1'b0;
      grp_q      <= '0;
      aw_valid   <= 1'b0;
      aw         <= '0;
      wbeat      <= '0;
      done       <= 1'b0;
    end else begin
      if (start) begin
        busy       <= 1'b1;
        done       <= 1'b0;
        beats_left <= total_beats;
        burst_idx  <= '0;
        seq_addr   <= base_addr;
        mode       <= mode_p2;
        par_q      <= par;
        grp_q      <= grp;
      end else begin
        if (aw_fire) aw_valid <= 1'b0;
        if ((!aw_valid || aw_ready) && can_issue) begin
          aw_valid   <= 1'b1;
          aw.len     <= 8'(nxt_len - 1);
          aw.addr    <= mode ? p2_out_addr(int'(grp_q), longint'(burst_idx), par_q) : seq_addr;
          seq_addr   <= seq_addr + AXI_ADDR_W'(nxt_len * BEAT_BYTES);
          burst_idx  <= burst_idx + 1;
          beats_left <= beats_left - nxt_len;
        end
        if (busy && beats_left == 0 && !aw_valid && lq_empty && bursts_out == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      committed  <= committed + (((!aw_valid || aw_ready) && can_issue && !start) ? nxt_len : 0)
                              - (w_fire ? 1 : 0);
      bursts_out <= bursts_out + (aw_fire ? 1 : 0) - (b_fire ? 1 : 0);
      if (w_fire) wbeat <= w.last ? '0 : wbeat + 9'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(b_fire && bursts_out == 0 && !aw_fire)) else $error("axi_write_engine: unexpected response");
      assert (!(start && mode_p2 && BURST_BEATS * BEAT_BYTES != BATCH_BYTES))
        else $error("axi_write_engine: phase-2 writes need 4 KB bursts");
    end
  end
endmodule
