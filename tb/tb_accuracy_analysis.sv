// tb_accuracy_analysis: random result streams against reference error and
// datapoint counts, with clears and the count enable.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_accuracy_analysis;
  logic clk = 0, rst_n = 0, clear = 0, count_en = 0, res_valid = 0;
  logic [1:0] pred, label; logic [15:0] errors, total;
  int checks = 0, failures = 0, e = 0, n = 0;
  always #5 clk = ~clk;
  accuracy_analysis dut (.clk, .rst_n, .clear, .count_en, .res_valid, .pred, .label, .errors, .total);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    pred = 0; label = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clear = ($urandom % 300) == 0; count_en = ($urandom % 5) != 0; res_valid = $urandom % 2;
      pred = $urandom % 3; label = $urandom % 3;
      @(posedge clk); #1;
      if (clear) begin e = 0; n = 0; end
      else if (count_en && res_valid) begin n++; if (pred != label) e++; end
      checks++;
      if (errors != 16'(e) || total != 16'(n)) begin failures++; $display("FAIL t=%0d %0d/%0d exp %0d/%0d", t, errors, total, e, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
