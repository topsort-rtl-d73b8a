// stream_coupler -- joins two consecutive E-wide batches of a run into one
// 2E-wide batch, so that a 2E-rate merge unit can take the output of an
// E-rate merge unit one level below it in the tree.
//
// The first batch of a pair waits in a holding register; when the second one
// arrives both leave together in the output register (first batch in the
// lower lanes), carrying the second batch's 'last' flag. An empty-run token
// passes through unchanged. Runs must hold an even number of E-wide batches,
// which holds for the power-of-two run lengths the sorter uses. The coupler
// is a full register stage: output valid never depends on output ready.
module stream_coupler #(
  parameter int E = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                         i_valid,
  output logic                         i_ready,
  input  topsort_pkg::elem_t [E-1:0]   i_data,
  input  logic                         i_last,
  input  logic                         i_empty,
  output logic                         o_valid,
  input  logic                         o_ready,
  output topsort_pkg::elem_t [2*E-1:0] o_data,
  output logic                         o_last,
  output logic                         o_empty
);
  import topsort_pkg::*;

  logic               have_half;
  elem_t [E-1:0]      half;

  assign i_ready = !o_valid || o_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_half <= 1'b0;
      o_valid   <= 1'b0;
      o_last    <= 1'b0;
      o_empty   <= 1'b0;
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      if (i_valid && i_ready) begin
        if (i_empty) begin
          o_valid <= 1'b1;
          o_last  <= 1'b1;
          o_empty <= 1'b1;
        end else if (!have_half) begin
          have_half <= 1'b1;
        end else begin
          have_half <= 1'b0;
          o_valid   <= 1'b1;
          o_last    <= i_last;
          o_empty   <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (i_valid && i_ready && !i_empty) begin
      if (!have_half) half <= i_data;
      else            o_data <= {i_data, half};
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && i_valid && i_ready) begin
      assert (!(i_empty && have_half)) else $error("stream_coupler: empty token inside a run");
      assert (!(i_last && !i_empty && !have_half)) else $error("stream_coupler: odd run length");
    end
  end
endmodule
