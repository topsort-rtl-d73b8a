// tb_compare_swap -- checks the compare-and-swap cell.
//
// Random record pairs (class, key and value all random, with many equal
// keys) are applied; lo must be the record with the smaller {class, key}
// field and hi the other one, and equal fields must pass through unswapped.
// The cell is combinational, so outputs are sampled after a 1-time-unit delay.
module tb_compare_swap;
  import topsort_pkg::*;
  logic [MREC_W-1:0] a, b, lo, hi;
  int checks = 0, failures = 0;

  compare_swap dut (.a(a), .b(b), .lo(lo), .hi(hi));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CMP_W-1:0] fa, fb;
    for (int i = 0; i < 2000; i++) begin
      a = {$urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom};
      if (i % 4 == 0) b[MREC_W-1 -: CMP_W] = a[MREC_W-1 -: CMP_W];       // equal keys
      if (i % 8 == 1) b[MREC_W-1 -: CMP_W] = a[MREC_W-1 -: CMP_W] + 1'b1;
      #1;
      fa = a[MREC_W-1 -: CMP_W];
      fb = b[MREC_W-1 -: CMP_W];
      checks++;
      if (fb < fa) begin
        if (lo !== b || hi !== a) failures++;
      end else begin
        if (lo !== a || hi !== b) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
