// tb_tm_class: 4-feature, 6-clause class. (1) Composition forced through
// the fault masks: the vote is compared with a reference polarity sum
// clamped to +-T, for random inputs, T and clause numbers. (2) Feedback:
// with all clause draws 0 (every clause selected) one target step teaches
// the positive clauses the input and the negative clauses its complement,
// so the vote for that input becomes +3 (clamped by T); a negative step
// with draws 0xFFFF selects nothing and changes nothing.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_class;
  import tm_pkg::*;
  localparam int NF = 4, L = 2 * NF, CL = 6;
  logic clk = 0, rst_n = 0, clear = 0, train = 0;
  logic [NF-1:0] x; logic [L-1:0] lit;
  logic [2:0] clause_cnt; role_e role; logic [7:0] T; logic [16:0] thr_s;
  logic [CL*L*16-1:0] rnd_ta; logic [CL*16-1:0] rnd_cl;
  logic [CL*L-1:0] am, om; logic signed [9:0] vote; logic [CL-1:0] clause_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  assign lit = {~x, x};
  tm_class #(.NF(NF), .CLAUSES(CL), .STATE_BITS(4)) dut (.clk, .rst_n, .clear, .train, .lit,
    .clause_cnt, .role, .T, .thr_s, .rnd_ta, .rnd_cl, .and_mask(am), .or_mask(om), .vote, .clause_out);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s vote=%0d", what, vote); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    role = ROLE_NONE; T = 8'd15; thr_s = 17'h0; rnd_ta = '0; rnd_cl = '0; am = '1; om = '0;
    clause_cnt = 3'd6; x = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      int s, tt;
      am = '0; om = (CL*L)'({$urandom, $urandom}) & (CL*L)'({$urandom, $urandom});
      x = NF'($urandom); train = $urandom % 2; T = 8'($urandom_range(1, 4));
      clause_cnt = 3'($urandom_range(0, 6));
      #1;
      s = 0;
      for (int j = 0; j < CL; j++) begin
        logic [L-1:0] inc; bit c;
        inc = om[j*L +: L];
        c = (j < clause_cnt) && ((inc & ~lit) == 0) && (train || inc != 0);
        check(clause_out[j] == c, "clause output");
        if (c) s += (j % 2 == 0) ? 1 : -1;
      end
      tt = T;
      if (s > tt) s = tt; if (s < -tt) s = -tt;
      check(vote == 10'(s), "clamped vote");
    end
    // learning
    am = '1; om = '0; T = 8'd15; clause_cnt = 3'd6; x = 4'b0110; train = 1; #1;
    check(vote == 0 && clause_out == '1, "fresh clauses all fire in training");
    role = ROLE_NEG; rnd_cl = '1; @(negedge clk); role = ROLE_NONE; #1;
    check(clause_out == '1, "unselected clauses unchanged");
    role = ROLE_TARGET; rnd_cl = '0; @(negedge clk); role = ROLE_NONE;
    train = 0; #1;
    check(vote == 3, "positive clauses learned the input");
    check(clause_out == 6'b010101, "negative clauses reject it");
    T = 8'd2; #1; check(vote == 2, "vote clamped to T");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
