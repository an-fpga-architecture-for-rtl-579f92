// tb_cv_mapper: for every one of the 120 orderings, the block permutation
// is recomputed independently (k-th permutation in lexicographic order by
// enumerating all 5-tuples) and every (set, row) of the three sets is
// checked, together with the in-range flag.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_cv_mapper;
  import tm_pkg::*;
  logic [6:0] order; set_e set; logic [6:0] row; logic [2:0] blk; logic [4:0] addr; logic in_range;
  int checks = 0, failures = 0;
  cv_mapper dut (.order, .set, .row, .blk, .addr, .in_range);
  int perms [120][5];
  initial begin
    #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int n; n = 0;
    for (int a = 0; a < 5; a++) for (int b = 0; b < 5; b++) for (int c = 0; c < 5; c++)
    for (int d = 0; d < 5; d++) for (int e = 0; e < 5; e++)
      if (a!=b && a!=c && a!=d && a!=e && b!=c && b!=d && b!=e && c!=d && c!=e && d!=e) begin
        perms[n] = '{a, b, c, d, e}; n++;
      end
    for (int o = 0; o < 120; o++) begin
      order = 7'(o);
      for (int s = 0; s < 3; s++) begin
        int base, len;
        set = set_e'(s);
        base = (s == 0) ? 0 : (s == 1) ? 1 : 3;
        len  = (s == 0) ? 30 : 60;
        for (int r = 0; r < 64; r += 1) begin
          row = 7'(r); #1;
          checks++;
          if (in_range != (r < len)) begin failures++; $display("FAIL range o=%0d s=%0d r=%0d", o, s, r); end
          if (r < len && (blk != 3'(perms[o][base + r / 30]) || addr != 5'(r % 30))) begin
            failures++; $display("FAIL o=%0d s=%0d r=%0d blk=%0d addr=%0d", o, s, r, blk, addr);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
