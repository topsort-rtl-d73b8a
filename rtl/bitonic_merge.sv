// bitonic_merge -- E-rate bitonic merger of two ascending E-element vectors.
//
// The two inputs form one 2E vector v = {a_0..a_E-1, b_0..b_E-1}. The first
// column compares a_i with b_(E-1-i), which turns the pair into two bitonic
// halves where every element of the lower half is <= every element of the
// upper half. The following log2(E) columns are half cleaners of stride
// E/2, E/4, .. 1 inside each half. That is log2(2E) columns in all, each
// followed by a register, so 'out' (ascending, out[0] smallest) appears
// log2(2E) cycles after the inputs. With E = 4 this is the 3-column network
// of the published 4-rate example.
//
// 'en' advances every column at once; with en low the pipeline holds.
module bitonic_merge #(
  parameter int E = 4,
  parameter int W = topsort_pkg::MREC_W
) (
  input  logic               clk,
  input  logic               en,
  input  logic [E-1:0][W-1:0]   in_a,
  input  logic [E-1:0][W-1:0]   in_b,
  output logic [2*E-1:0][W-1:0] out
);
  localparam int N  = 2 * E;
  localparam int NS = $clog2(N);

  // st[s] is the input of column s; st[NS] is the output register
  logic [N-1:0][W-1:0] st [NS+1];
  logic [N-1:0][W-1:0] nx [NS];

  assign st[0] = {in_b, in_a};

  for (genvar s = 0; s < NS; s++) begin : g_col
    if (s == 0) begin : g_first
      for (genvar i = 0; i < E; i++) begin : g_cs
        compare_swap #(.W(W)) u_cs (
          .a (st[0][i]), .b (st[0][N-1-i]),
          .lo(nx[0][i]), .hi(nx[0][N-1-i]));
      end
    end else begin : g_clean
      localparam int D = E >> s;          // stride of this column
      for (genvar i = 0; i < N; i++) begin : g_cs
        if ((i % (2 * D)) < D) begin : g_pair
          compare_swap #(.W(W)) u_cs (
            .a (st[s][i]), .b (st[s][i+D]),
            .lo(nx[s][i]), .hi(nx[s][i+D]));
        end
      end
    end

    always_ff @(posedge clk) begin
      if (en) st[s+1] <= nx[s];
    end
  end

  assign out = st[NS];
endmodule
