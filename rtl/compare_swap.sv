// compare_swap -- the compare-swap cell of a sorting network.
//
// One comparator and a pair of 2:1 multiplexers: the record with the smaller
// compared field leaves on 'lo', the other on 'hi'. The compared field is the
// top CMP_W bits of a record (for mrec_t: class and key), so records that tie
// keep their order (a goes to lo). Purely combinational; the bitonic merger
// puts registers between columns of these cells.
module compare_swap #(
  parameter int W     = topsort_pkg::MREC_W,
  parameter int CMP_W = topsort_pkg::CMP_W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] lo,
  output logic [W-1:0] hi
);
  logic swap;
  always_comb begin
    swap = b[W-1 -: CMP_W] < a[W-1 -: CMP_W];
    lo   = swap ? b : a;
    hi   = swap ? a : b;
  end
endmodule
