// axi_read_engine -- AXI read master that fills the leaf input buffers of one
// merge tree.
//
// On 'start' every leaf j gets a start address and a length in 512-bit beats
// (zero for an unused leaf). The engine then walks the leaves round-robin and
// issues one read burst at a time (ARID = leaf index, at most BURST_BEATS
// beats) for the next leaf that still has data to fetch and whose buffer has
// room for the whole burst, counting data already in flight. Because space
// is reserved before a burst is requested, read data is always accepted
// (rready is tied high) and is steered into the buffer named by RID. Each
// leaf buffer is a FIFO of BUF_DEPTH beats, two bursts by default, and its
// head is offered on lb_valid/lb_data.
//
// The per-leaf round-robin and the credit rule are this design's choice; the
// buffer width (512 bits) and depth (two bursts) follow the published design.
module axi_read_engine #(
  parameter int NL          = 16,
  parameter int BURST_BEATS = 16,
  parameter int BUF_DEPTH   = 2 * BURST_BEATS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                                     start,
  input  logic [NL-1:0][topsort_pkg::AXI_ADDR_W-1:0] leaf_addr,
  input  logic [NL-1:0][31:0]                      leaf_beats,
  output logic                                     all_issued,
  // AXI read address / data
  output topsort_pkg::axi_ar_t                     ar,
  output logic                                     ar_valid,
  input  logic                                     ar_ready,
  input  topsort_pkg::axi_r_t                      r,
  input  logic                                     r_valid,
  output logic                                     r_ready,
  // leaf buffer heads
  output logic [NL-1:0]                            lb_valid,
  input  logic [NL-1:0]                            lb_ready,
  output logic [NL-1:0][topsort_pkg::AXI_DATA_W-1:0] lb_data
);
  import topsort_pkg::*;

  localparam int LW = (NL > 1) ? $clog2(NL) : 1;
  localparam int CW = $clog2(BUF_DEPTH + 1);

  logic [NL-1:0][AXI_ADDR_W-1:0] addr;
  logic [NL-1:0][31:0]           rem;
  logic [NL-1:0][CW:0]           resv;      // stored + in flight
  logic [NL-1:0]                 full, empty;
  logic [NL-1:0][CW-1:0]         count;
  logic [LW-1:0]                 rr;

  logic          pick_ok;
  logic [LW-1:0] pick;
  logic [31:0]   pick_len;

  function automatic logic [31:0] burst_of(input logic [31:0] r_beats);
    return (r_beats > 32'(BURST_BEATS)) ? 32'(BURST_BEATS) : r_beats;
  endfunction

  // next eligible leaf, round-robin from rr
  always_comb begin
    pick_ok  = 1'b0;
    pick     = '0;
    pick_len = '0;
    for (int k = 0; k < NL; k++) begin
      int j;
      j = (int'(rr) + k) % NL;
      if (!pick_ok && rem[j] != 0 &&
          32'(BUF_DEPTH) - 32'(resv[j]) >= burst_of(rem[j])) begin
        pick_ok  = 1'b1;
        pick     = LW'(j);
        pick_len = burst_of(rem[j]);
      end
    end
  end

  assign r_ready = 1'b1;

  always_comb begin
    all_issued = !ar_valid;
    for (int j = 0; j < NL; j++) if (rem[j] != 0) all_issued = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_valid <= 1'b0;
      ar       <= '0;
      rr       <= '0;
      rem      <= '0;
      addr     <= '0;
      resv     <= '0;
    end else begin
      if (ar_valid && ar_ready) ar_valid <= 1'b0;
      for (int j = 0; j < NL; j++) begin
        resv[j] <= resv[j] - ((lb_valid[j] && lb_ready[j]) ? 1'b1 : 1'b0);
      end
      if (start) begin
        addr <= leaf_addr;
        rem  <= leaf_beats;
      end else if ((!ar_valid || ar_ready) && pick_ok) begin
        ar_valid    <= 1'b1;
        ar.addr     <= addr[pick];
        ar.len      <= 8'(pick_len - 1);
        ar.id       <= AXI_ID_W'(pick);
        addr[pick]  <= addr[pick] + AXI_ADDR_W'(pick_len * BEAT_BYTES);
        rem[pick]   <= rem[pick] - pick_len;
        resv[pick]  <= resv[pick] + (CW+1)'(pick_len)
                       - ((lb_valid[pick] && lb_ready[pick]) ? 1'b1 : 1'b0);
        rr          <= (int'(pick) == NL - 1) ? '0 : pick + 1'b1;
      end
    end
  end

  for (genvar j = 0; j < NL; j++) begin : g_leaf
    logic wr;
    assign wr          = r_valid && (int'(r.id) == j);
    assign lb_valid[j] = !empty[j];
    sync_fifo #(.W(AXI_DATA_W), .DEPTH(BUF_DEPTH)) u_buf (
      .clk(clk), .rst_n(rst_n),
      .wr_en(wr), .wr_data(r.data), .full(full[j]),
      .rd_en(lb_valid[j] && lb_ready[j]), .rd_data(lb_data[j]), .empty(empty[j]),
      .count(count[j]));
    always_ff @(posedge clk) begin
      if (rst_n) assert (!(wr && full[j])) else $error("axi_read_engine: leaf buffer overflow");
    end
  end
endmodule
