// tb_tm_randomizer: every word must follow the xorshift16 recurrence
// (7, 9, 8) when enabled, hold when disabled, never reach 0 and differ
// from the other words.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_randomizer;
  localparam int N = 6;
  logic clk = 0, rst_n = 0, en = 0;
  logic [N*16-1:0] rnd, prev;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  tm_randomizer #(.N_WORDS(N), .SEED(16'h1234)) dut (.clk, .rst_n, .en, .rnd);

  function automatic logic [15:0] xs(logic [15:0] x);
    x = x ^ (x << 7); x = x ^ (x >> 9); x = x ^ (x << 8); return x;
  endfunction
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) check(rnd[16*i +: 16] != rnd[16*j +: 16], "distinct seeds");
    for (int t = 0; t < 1000; t++) begin
      prev = rnd; en = ($urandom % 4) != 0;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        check(rnd[16*i +: 16] == (en ? xs(prev[16*i +: 16]) : prev[16*i +: 16]), "recurrence");
        check(rnd[16*i +: 16] != 0, "non-zero");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
