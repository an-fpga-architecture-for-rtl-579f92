// tb_tm_clause: a 4-feature clause. The clause output is compared with a
// reference built from the fault masks (and_mask=0, or_mask=pattern fixes
// the composition), then the feedback rules are driven with chosen random
// words and thresholds and the resulting include vector is checked:
// Type II includes the false literals, Type I with clause 0 and s=1 (always)
// forgets, Type I with clause 1 and s very large memorises the true
// literals, a disabled clause outputs 0 and ignores feedback.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_clause;
  import tm_pkg::*;
  localparam int NF = 4, L = 2 * NF;
  logic clk = 0, rst_n = 0, clear = 0, enable = 1, train = 0;
  logic [NF-1:0] x; logic [L-1:0] lit, am, om, incl; logic clause_out;
  fb_e fb; logic [L*16-1:0] rnd; logic [16:0] thr_s;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  assign lit = {~x, x};
  tm_clause #(.NF(NF), .STATE_BITS(4)) dut (.clk, .rst_n, .clear, .enable, .train, .lit, .fb, .rnd,
    .thr_s, .and_mask(am), .or_mask(om), .clause_out, .incl);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s x=%b incl=%b out=%b", what, x, incl, clause_out); end
  endtask
  function automatic bit ref_clause(logic [L-1:0] inc, logic [L-1:0] l, bit tr, bit en);
    return en && ((inc & ~l) == 0) && (tr || inc != 0);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    fb = FB_NONE; rnd = '0; thr_s = 17'h10000; am = '1; om = '0; x = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    // composition forced through the fault masks
    for (int t = 0; t < 300; t++) begin
      am = '0; om = L'($urandom); x = NF'($urandom); train = $urandom % 2; enable = ($urandom % 8) != 0;
      #1;
      check(incl == om, "forced include");
      check(clause_out == ref_clause(om, lit, train, enable), "clause output");
    end
    am = '1; om = '0; enable = 1;
    // fresh TAs: empty clause
    train = 0; x = 4'b1010; #1; check(clause_out == 0, "empty clause in inference");
    train = 1; #1; check(clause_out == 1, "empty clause in training");
    // Type II with clause 1: every false literal becomes included
    fb = FB_TYPE2; @(negedge clk); fb = FB_NONE; #1;
    check(incl == ~lit, "type II includes false literals");
    check(clause_out == 0, "clause now rejects the input");
    // Type I with clause 0 and s=1: every TA forgets (one step back to exclude)
    fb = FB_TYPE1; thr_s = 17'h10000; @(negedge clk); fb = FB_NONE; #1;
    check(incl == '0, "type I forget");
    // Type I with clause 1 and s huge: true literals are memorised
    // (the forget step also moved the true literals one state deeper, so two steps)
    thr_s = 17'h0; fb = FB_TYPE1; @(negedge clk); #1;
    check(incl == '0, "one memorise step is not yet enough");
    @(negedge clk); fb = FB_NONE; #1;
    check(incl == lit, "type I memorise true literals");
    check(clause_out == 1, "clause accepts its pattern");
    // random draw decides: rnd below thr_s means the 1/s event
    x = 4'b0000; thr_s = 17'd100;          // clause now 0 for this input
    for (int k = 0; k < L; k++) rnd[16*k +: 16] = (k % 2) ? 16'd50 : 16'd200;
    begin
      logic [L-1:0] prev_incl; prev_incl = incl;
      fb = FB_TYPE1; @(negedge clk); fb = FB_NONE; #1;
      for (int k = 0; k < L; k++)
        check(incl[k] == ((k % 2) ? 1'b0 : prev_incl[k]), "only low draws forget");
    end
    // disabled clause: output 0 and no learning
    enable = 0; x = '1; train = 1; #1; check(clause_out == 0, "disabled clause output");
    begin
      logic [L-1:0] prev_incl; prev_incl = incl;
      fb = FB_TYPE2; @(negedge clk); fb = FB_NONE; #1;
      check(incl == prev_incl, "disabled clause ignores feedback");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
