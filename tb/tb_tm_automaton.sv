// tb_tm_automaton: checks the Tsetlin automaton against a reference
// saturating counter: random inc/dec/en/clear sequences, the include
// boundary at the middle states, saturation at both ends, and the AND/OR
// fault gates on the output.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_automaton;
  localparam int SB = 4;
  logic clk = 0, rst_n = 0, clear = 0, en = 0, inc = 0, dec = 0, am = 1, om = 0;
  logic incl, incl_raw;
  int checks = 0, failures = 0, ref_state;
  always #5 clk = ~clk;

  tm_automaton #(.STATE_BITS(SB)) dut (.clk, .rst_n, .clear, .en, .inc, .dec,
    .and_mask(am), .or_mask(om), .incl, .incl_raw);

  task automatic check(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0b exp %0b (state %0d)", what, got, exp, ref_state); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ref_state = (1 << (SB-1)) - 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(incl_raw, 0, "reset exclude");
    // one reward towards include crosses the boundary from the last exclude state
    en = 1; inc = 1; @(negedge clk); ref_state++;
    check(incl_raw, 1, "middle inc flips");
    inc = 0; dec = 1; @(negedge clk); ref_state--;
    check(incl_raw, 0, "middle dec flips");
    dec = 0;
    for (int i = 0; i < 3000; i++) begin
      en = ($urandom % 8) != 0; inc = $urandom % 2; dec = $urandom % 2;
      clear = ($urandom % 200) == 0;
      am = ($urandom % 10) != 0; om = ($urandom % 10) == 0;
      #1;
      check(incl, (ref_state >= (1 << (SB-1)) ? am : 1'b0) | om, "fault gating");
      @(negedge clk);
      if (clear) ref_state = (1 << (SB-1)) - 1;
      else if (en && inc && !dec && ref_state < (1 << SB) - 1) ref_state++;
      else if (en && dec && !inc && ref_state > 0) ref_state--;
      check(incl_raw, ref_state >= (1 << (SB-1)), "state action");
    end
    // saturation: 40 incs then exactly 2**(SB-1) decs -> just below middle
    clear = 0; en = 1; inc = 1; dec = 0; repeat (40) @(negedge clk);
    inc = 0; dec = 1; repeat ((1 << (SB-1)) - 1) @(negedge clk);
    check(incl_raw, 1, "saturated top");
    @(negedge clk); check(incl_raw, 0, "after 2^(B-1) decs");
    repeat (40) @(negedge clk); dec = 0; inc = 1;
    repeat ((1 << (SB-1)) - 1) @(negedge clk); check(incl_raw, 0, "saturated bottom");
    @(negedge clk); check(incl_raw, 1, "after 2^(B-1) incs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
