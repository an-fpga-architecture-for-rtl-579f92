// tb_tm_argmax: random signed confidences against a reference argmax with
// ties resolved to the lowest index.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_argmax;
  localparam int N = 5;
  logic signed [9:0] val [N];
  logic [2:0] idx;
  int checks = 0, failures = 0;
  tm_argmax #(.N(N), .W(10)) dut (.val, .idx);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int best_i; int best_v;
      for (int i = 0; i < N; i++) val[i] = 10'($signed($urandom_range(0, 20)) - 10);
      #1;
      best_i = 0; best_v = val[0];
      for (int i = 1; i < N; i++) if (val[i] > best_v) begin best_v = val[i]; best_i = i; end
      checks++;
      if (idx != 3'(best_i)) begin failures++; $display("FAIL t=%0d got %0d exp %0d", t, idx, best_i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
