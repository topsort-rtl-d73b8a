// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// Used for every buffer of the sorter: the 512-bit leaf input buffers (two
// AXI bursts deep), the tree output buffer and the phase-2 output buffers.
// rd_data shows the oldest entry whenever empty is low; rd_en pops it.
// Writing when full or reading when empty is a protocol error (asserted).
// count is the number of stored entries. Storage is a plain register array;
// whether it becomes block RAM or LUT shift registers is left to synthesis.
module sync_fifo #(
  parameter int W     = 512,
  parameter int DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  assign full    = int'(count) == DEPTH;
  assign empty   = count == '0;
  assign rd_data = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wr_en) wptr <= inc(wptr);
      if (rd_en) rptr <= inc(rptr);
      count <= count + (wr_en ? 1'b1 : 1'b0) - (rd_en ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(wr_en && full))  else $error("sync_fifo: write when full");
      assert (!(rd_en && empty)) else $error("sync_fifo: read when empty");
    end
  end
endmodule
