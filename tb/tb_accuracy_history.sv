// tb_accuracy_history: random appends, clears and reads of a small (8-entry)
// history RAM against a queue model. Checks count and the full flag after
// every cycle, the one-cycle read latency, that every stored entry reads back
// exactly, and that writes beyond the depth are dropped without disturbing
// the stored entries.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_accuracy_history;
  localparam int unsigned D = 8;
  logic clk = 0, rst_n = 0, clear = 0, wr = 0, full;
  tm_pkg::phase_e phase, rd_phase;
  logic [7:0] iteration, rd_iteration;
  logic [15:0] errors, total, rd_errors, rd_total;
  logic [2:0] rd_idx; logic [3:0] count;
  int checks = 0, failures = 0;
  logic [42:0] model [$];
  bit mfull;
  always #5 clk = ~clk;
  accuracy_history #(.DEPTH(D)) dut (.clk, .rst_n, .clear, .wr, .phase, .iteration, .errors, .total,
    .rd_idx, .rd_phase, .rd_iteration, .rd_errors, .rd_total, .count, .full);
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    phase = tm_pkg::PH_IDLE; iteration = 0; errors = 0; total = 0; rd_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      clear = ($urandom % 60) == 0; wr = ($urandom % 3) == 0;
      phase = tm_pkg::phase_e'(3'($urandom % 7)); iteration = 8'($urandom);
      errors = 16'($urandom); total = 16'($urandom);
      @(posedge clk); #1;
      if (clear) begin model.delete(); mfull = 0; end
      else if (wr) begin
        if (model.size() < D) model.push_back({3'(phase), iteration, errors, total});
        else mfull = 1;
      end
      check(count == 4'(model.size()) && full == mfull, "count/full");
      // read back every stored entry (write disabled meanwhile)
      if ((t % 25) == 0 || model.size() == D) begin
        @(negedge clk); wr = 0; clear = 0;
        for (int k = 0; k < model.size(); k++) begin
          rd_idx = 3'(k);
          @(posedge clk); #1;
          check({3'(rd_phase), rd_iteration, rd_errors, rd_total} == model[k], "entry read-back");
          @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
