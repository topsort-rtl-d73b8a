// leaf_feeder -- turns the 512-bit beats of one leaf buffer into the
// one-element-wide run stream that enters a 1-rate merge unit.
//
// For each pass the leaf holds G sorted runs of R elements back to back
// (R = 2^cfg_run_log2, G = 2^cfg_runs_log2); in the first pass R = 1, so
// every element is a run of its own. The feeder sends the elements of a beat
// one per cycle, lowest lane first, and flags the final element of each run
// with 'last'. A leaf that is not used in this pass (cfg_active low) sends G
// empty-run tokens instead, one per merge round, and reads nothing. 'start'
// loads the configuration; 'idle' is high once all G runs have been sent.
// Output is a register stage (valid does not depend on ready).
module leaf_feeder (
  input  logic clk,
  input  logic rst_n,
  input  logic       start,
  input  logic [4:0] cfg_run_log2,
  input  logic [4:0] cfg_runs_log2,
  input  logic       cfg_active,
  output logic       idle,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [topsort_pkg::AXI_DATA_W-1:0] in_data,
  output logic                              o_valid,
  input  logic                              o_ready,
  output topsort_pkg::elem_t [0:0]          o_data,
  output logic                              o_last,
  output logic                              o_empty
);
  import topsort_pkg::*;

  logic        active;
  logic [31:0] run_len, runs;      // R, G
  logic [31:0] elem_cnt, run_cnt;  // position inside the pass
  logic [2:0]  lane;
  logic        busy;
  logic        take;               // move one element / token to the output
  elem_t [ELEMS_PER_BEAT-1:0] beat;

  assign beat     = in_data;
  assign idle     = !busy;
  assign take     = busy && (!o_valid || o_ready) && (!active || in_valid);
  assign in_ready = take && active && (lane == 3'(ELEMS_PER_BEAT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      active   <= 1'b0;
      run_len  <= 32'd1;
      runs     <= 32'd1;
      elem_cnt <= '0;
      run_cnt  <= '0;
      lane     <= '0;
      o_valid  <= 1'b0;
      o_last   <= 1'b0;
      o_empty  <= 1'b0;
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        active   <= cfg_active;
        run_len  <= 32'd1 << cfg_run_log2;
        runs     <= 32'd1 << cfg_runs_log2;
        elem_cnt <= '0;
        run_cnt  <= '0;
        lane     <= '0;
      end else if (take) begin
        o_valid <= 1'b1;
        if (!active) begin
          o_last  <= 1'b1;
          o_empty <= 1'b1;
          run_cnt <= run_cnt + 1;
          if (run_cnt + 1 == runs) busy <= 1'b0;
        end else begin
          o_empty <= 1'b0;
          lane    <= lane + 1'b1;
          if (elem_cnt + 1 == run_len) begin
            o_last   <= 1'b1;
            elem_cnt <= '0;
            run_cnt  <= run_cnt + 1;
            if (run_cnt + 1 == runs) busy <= 1'b0;
          end else begin
            o_last   <= 1'b0;
            elem_cnt <= elem_cnt + 1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!start && take && active) o_data[0] <= beat[lane];
  end
endmodule
