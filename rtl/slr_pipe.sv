// slr_pipe -- pipeline for a valid/ready channel that crosses FPGA dies.
//
// Long die-crossing wires get STAGES register slices: two when a channel
// crosses one die boundary, four when it crosses two, as in the published
// floorplan. Each slice is a two-entry elastic buffer (a main register and a
// skid register) whose valid and ready are both registered, so the channel
// keeps one transfer per cycle and no combinational path crosses the slice.
// Latency is STAGES cycles; STAGES = 0 is a plain wire.
module slr_pipe #(
  parameter int W      = 64,
  parameter int STAGES = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         i_valid,
  output logic         i_ready,
  input  logic [W-1:0] i_data,
  output logic         o_valid,
  input  logic         o_ready,
  output logic [W-1:0] o_data
);
  logic [STAGES:0]        v, rdy;
  logic [STAGES:0][W-1:0] d;

  assign v[0]        = i_valid;
  assign d[0]        = i_data;
  assign i_ready     = rdy[0];
  assign o_valid     = v[STAGES];
  assign o_data      = d[STAGES];
  assign rdy[STAGES] = o_ready;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    logic         m_v, s_v;
    logic [W-1:0] m_d, s_d;

    assign rdy[s]   = !s_v;
    assign v[s+1]   = m_v;
    assign d[s+1]   = m_d;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        m_v <= 1'b0;
        s_v <= 1'b0;
      end else if (!m_v || rdy[s+1]) begin
        // main register free or draining
        if (s_v) begin
          m_v <= 1'b1;
          s_v <= 1'b0;
        end else begin
          m_v <= v[s];
        end
      end else if (v[s] && !s_v) begin
        s_v <= 1'b1;   // downstream stalled: park the incoming word
      end
    end

    always_ff @(posedge clk) begin
      if (!m_v || rdy[s+1]) begin
        m_d <= s_v ? s_d : d[s];
      end else if (v[s] && !s_v) begin
        s_d <= d[s];
      end
    end
  end
endmodule
