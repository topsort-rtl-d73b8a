// tb_stream_coupler -- checks the 1-to-2 batch width coupler (E = 1 and E = 4).
//
// Runs of an even number of input batches (and empty-run tokens) are fed
// with random valid gaps and random output back pressure. Each output beat
// must be two consecutive input batches, first one in the low lanes, with
// 'last' on the beat that holds the last input batch of the run; an empty
// token must pass through as one empty beat.
module tb_stream_coupler;
  import topsort_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `define CPL(EE, SUF) \
  logic iv``SUF, ir``SUF, il``SUF, ie``SUF, ov``SUF, orr``SUF, ol``SUF, oe``SUF; \
  elem_t [EE-1:0] id``SUF; elem_t [2*EE-1:0] od``SUF; \
  stream_coupler #(.E(EE)) u``SUF (.clk(clk), .rst_n(rst_n), \
    .i_valid(iv``SUF), .i_ready(ir``SUF), .i_data(id``SUF), .i_last(il``SUF), .i_empty(ie``SUF), \
    .o_valid(ov``SUF), .o_ready(orr``SUF), .o_data(od``SUF), .o_last(ol``SUF), .o_empty(oe``SUF)); \
  typedef struct { elem_t d [2*EE]; bit last; bit empty; } ib``SUF``_t; \
  ib``SUF``_t qi``SUF [$]; \
  ib``SUF``_t qo``SUF [$]; \
  logic fired``SUF = 1'b0; \
  int nout``SUF = 0; \
  task automatic gen``SUF(input int nruns); \
    for (int r = 0; r < nruns; r++) begin \
      int n; ib``SUF``_t x, y; \
      n = 2 * $urandom_range(0, 4); \
      if (n == 0) begin \
        x = '{default: '0}; x.last = 1; x.empty = 1; qi``SUF.push_back(x); qo``SUF.push_back(x); \
      end \
      for (int i = 0; i < n; i++) begin \
        x = '{default: '0}; \
        for (int k = 0; k < EE; k++) begin x.d[k].key = $urandom; x.d[k].value = $urandom; end \
        x.last = (i == n - 1); \
        qi``SUF.push_back(x); \
        if (i % 2 == 0) y = x; \
        else begin \
          for (int k = 0; k < EE; k++) y.d[EE + k] = x.d[k]; \
          y.last = x.last; y.empty = 0; \
          qo``SUF.push_back(y); \
        end \
      end \
    end \
  endtask \
  always @(negedge clk) if (rst_n) begin \
    if (!iv``SUF || fired``SUF) begin \
      iv``SUF = qi``SUF.size() > 0 && $urandom_range(99) < 70; \
      if (qi``SUF.size() > 0) begin \
        for (int k = 0; k < EE; k++) id``SUF[k] = qi``SUF[0].d[k]; \
        il``SUF = qi``SUF[0].last; ie``SUF = qi``SUF[0].empty; \
      end \
    end \
    fired``SUF = 1'b0; \
    orr``SUF = $urandom_range(99) < 70; \
  end \
  always @(posedge clk) if (rst_n) begin \
    if (iv``SUF && ir``SUF) begin void'(qi``SUF.pop_front()); fired``SUF = 1'b1; end \
    if (ov``SUF && orr``SUF) begin \
      ib``SUF``_t ex; bit bad; \
      checks++; nout``SUF++; \
      if (qo``SUF.size() == 0) failures++; \
      else begin \
        ex = qo``SUF.pop_front(); \
        bad = (ol``SUF != ex.last) || (oe``SUF != ex.empty); \
        if (!ex.empty) for (int k = 0; k < 2 * EE; k++) bad |= (od``SUF[k] != ex.d[k]); \
        if (bad) begin failures++; if (failures < 6) $display("FAIL E=%0d beat %0d", EE, nout``SUF); end \
      end \
    end \
  end

  `CPL(1, _1)
  `CPL(4, _4)

  initial begin
    iv_1 = 0; orr_1 = 0; id_1 = '0; il_1 = 0; ie_1 = 0;
    iv_4 = 0; orr_4 = 0; id_4 = '0; il_4 = 0; ie_4 = 0;
    gen_1(300);
    gen_4(300);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (qo_1.size() > 0 || qo_4.size() > 0) @(posedge clk);
    checks++;
    if (qi_1.size() != 0 || qi_4.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
