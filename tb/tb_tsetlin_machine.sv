// tb_tsetlin_machine: the full-size machine (16 features, 3 classes, 16
// clauses per class).
//  1. Latency and throughput: a row produces its result exactly two clock
//     edges later; back-to-back rows give one result per clock.
//  2. Inference: every TA is forced through the fault maps (AND=0, OR=
//     random pattern) so clause composition is known; confidences, their
//     clamp to T, the clause-number port and argmax are compared with a
//     reference model.
//  3. Learning: with faults cleared the machine is trained on a noisy
//     3-class pattern task and must then classify fresh rows with at least
//     85% accuracy; a stuck-at-0 fault on every TA must reduce it to the
//     all-empty-clause answer (class 0).
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tsetlin_machine;
  import tm_pkg::*;
  localparam int NF = 16, NC = 3, CL = 16, L = 2 * NF, NTA = NC * CL * L;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [7:0] T = 8'd15, s_q44 = 8'd48; logic [4:0] clause_cnt = 5'd16;
  logic [NTA-1:0] and_map, or_map;
  logic in_valid = 0, in_train = 0; logic [NF-1:0] in_x = '0; logic [1:0] in_label = '0;
  logic out_valid, out_train; logic [1:0] out_pred, out_label; logic signed [9:0] out_conf [NC];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tsetlin_machine dut (.clk, .rst_n, .clear, .T, .s_q44, .clause_cnt, .and_map, .or_map,
    .in_valid, .in_x, .in_label, .in_train, .out_valid, .out_pred, .out_label, .out_train, .out_conf);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [NF-1:0] sample(int c);
    logic [NF-1:0] x;
    for (int f = 0; f < NF; f++) begin
      if (f / 4 == c) x[f] = ($urandom % 100) < 90;
      else            x[f] = ($urandom % 100) < 15;
    end
    return x;
  endfunction

  // present one row and wait for its result (returns prediction)
  task automatic run_one(input logic [NF-1:0] x, input logic [1:0] y, input bit tr,
                         output logic [1:0] pred);
    @(negedge clk); in_valid = 1; in_x = x; in_label = y; in_train = tr;
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    pred = out_pred;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] p; int lat, correct, nres;
    and_map = '1; or_map = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1. latency
    @(negedge clk); in_valid = 1; in_x = 16'h1234; in_label = 2'd2; in_train = 0;
    @(posedge clk); lat = 0; @(negedge clk); in_valid = 0;
    while (!out_valid && lat < 10) begin lat++; @(posedge clk); #1; end
    check(lat == 1, $sformatf("result two edges after the row (got %0d)", lat + 1));
    check(out_label == 2'd2, "label carried through");
    // throughput: 20 rows back to back -> 20 consecutive results
    nres = 0;
    fork
      begin
        for (int i = 0; i < 20; i++) begin @(negedge clk); in_valid = 1; in_x = 16'(i); end
        @(negedge clk); in_valid = 0;
      end
      begin
        repeat (25) begin @(posedge clk); #1; if (out_valid) nres++; end
      end
    join
    check(nres == 20, $sformatf("one result per clock (%0d)", nres));
    // 2. inference with forced composition
    for (int t = 0; t < 200; t++) begin
      int s [NC]; int best; logic [L-1:0] lit;
      and_map = '0;
      for (int i = 0; i < NTA; i++) or_map[i] = ($urandom % 100) < 4;
      T = 8'($urandom_range(1, 15)); clause_cnt = 5'($urandom_range(0, 16));
      in_x = NF'($urandom);
      run_one(in_x, 2'd0, 1'b0, p);
      lit = {~in_x, in_x}; best = 0;
      for (int c = 0; c < NC; c++) begin
        s[c] = 0;
        for (int j = 0; j < clause_cnt; j++) begin
          logic [L-1:0] inc; inc = or_map[(c*CL + j)*L +: L];
          if (((inc & ~lit) == 0) && inc != 0) s[c] += (j % 2 == 0) ? 1 : -1;
        end
        if (s[c] > int'(T)) s[c] = int'(T); if (s[c] < -int'(T)) s[c] = -int'(T);
        check(out_conf[c] == 10'(s[c]), $sformatf("confidence class %0d: %0d vs %0d", c, out_conf[c], s[c]));
        if (s[c] > s[best]) best = c;
      end
      check(p == 2'(best), "argmax prediction");
    end
    // 3. learning
    and_map = '1; or_map = '0; T = 8'd15; clause_cnt = 5'd16; s_q44 = 8'd48;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 900; i++) begin
      int c; c = $urandom % NC;
      @(negedge clk); in_valid = 1; in_x = sample(c); in_label = 2'(c); in_train = 1;
    end
    @(negedge clk); in_valid = 0;
    correct = 0;
    for (int i = 0; i < 150; i++) begin
      int c; c = i % NC;
      run_one(sample(c), 2'(c), 1'b0, p);
      if (p == 2'(c)) correct++;
    end
    $display("accuracy after training: %0d/150", correct);
    check(correct >= 128, $sformatf("learned the task (%0d/150)", correct));
    // stuck-at-0 on every TA: all clauses empty -> votes 0 -> class 0
    and_map = '0;
    run_one(sample(2), 2'd2, 1'b0, p);
    check(p == 2'd0 && out_conf[2] == 0, "all TAs stuck at 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
