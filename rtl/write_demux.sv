// write_demux -- splits the phase-2 output into 4 KB batches for four AXI ports.
//
// The phase-2 tree emits 256 B (32 elements) per cycle, four times what one
// AXI port can write. The demux sends the first 4 KB of sorted output (16
// input beats) to output buffer 0, the next 4 KB to buffer 1, and so on
// round-robin over NOUT = 4 buffers; buffer i drains as 512-bit beats to the
// write engine of AXI-4i. Each buffer holds BUF_BATCHES whole batches, so
// one batch can drain while the next fills. The demux waits (i_ready low)
// while the buffer it is filling is full. The 4 KB batch size and the round
// robin over four buffers follow the published write scheme; the buffer
// depth is this design's choice.
module write_demux #(
  parameter int IN_W        = topsort_pkg::P2_RATE * topsort_pkg::ELEM_W,   // 2048
  parameter int OUT_W       = topsort_pkg::AXI_DATA_W,                      // 512
  parameter int NOUT        = 4,
  parameter int BATCH_BYTES = topsort_pkg::BATCH_BYTES,
  parameter int BUF_BATCHES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                       i_valid,
  output logic                       i_ready,
  input  logic [IN_W-1:0]            i_data,
  output logic [NOUT-1:0]            o_valid,
  input  logic [NOUT-1:0]            o_ready,
  output logic [NOUT-1:0][OUT_W-1:0] o_data,
  output logic [$clog2(NOUT)-1:0]    sel
);
  localparam int BATCH_IN = BATCH_BYTES / (IN_W / 8);     // input beats per batch
  localparam int RATIO    = IN_W / OUT_W;                 // output beats per input beat
  localparam int DEPTH    = BUF_BATCHES * BATCH_IN;
  localparam int BW       = $clog2(BATCH_IN + 1);
  localparam int RW       = (RATIO > 1) ? $clog2(RATIO) : 1;

  logic [BW-1:0]          in_cnt;
  logic [NOUT-1:0]        full, empty;
  logic [NOUT-1:0][IN_W-1:0] head;

  assign i_ready = !full[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt <= '0;
      sel    <= '0;
    end else if (i_valid && i_ready) begin
      if (int'(in_cnt) == BATCH_IN - 1) begin
        in_cnt <= '0;
        sel    <= (int'(sel) == NOUT - 1) ? '0 : sel + 1'b1;
      end else begin
        in_cnt <= in_cnt + 1'b1;
      end
    end
  end

  for (genvar i = 0; i < NOUT; i++) begin : g_buf
    logic [RW-1:0] part;
    logic          pop;
    logic [$clog2(DEPTH+1)-1:0] cnt;

    assign pop        = o_valid[i] && o_ready[i] && (int'(part) == RATIO - 1);
    assign o_valid[i] = !empty[i];
    assign o_data[i]  = head[i][part*OUT_W +: OUT_W];

    sync_fifo #(.W(IN_W), .DEPTH(DEPTH)) u_obuf (
      .clk(clk), .rst_n(rst_n),
      .wr_en(i_valid && i_ready && (int'(sel) == i)), .wr_data(i_data), .full(full[i]),
      .rd_en(pop), .rd_data(head[i]), .empty(empty[i]), .count(cnt));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                       part <= '0;
      else if (o_valid[i] && o_ready[i]) part <= (int'(part) == RATIO - 1) ? '0 : part + 1'b1;
    end
  end
endmodule
