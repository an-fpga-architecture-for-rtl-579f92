// tb_online_buffer: random pushes and pops, including pushes while full,
// pops while empty and flushes, against a reference queue; head, empty,
// full and count are checked every cycle.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_online_buffer;
  import tm_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0, full, empty;
  row_t din, head; logic [3:0] count;
  row_t q [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  online_buffer #(.DEPTH(D)) dut (.clk, .rst_n, .flush, .push, .din, .full, .pop, .head, .empty, .count);
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    din = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      check(count == 4'(q.size()) && empty == (q.size() == 0) && full == (q.size() == D), "flags");
      if (q.size() > 0) check(head == q[0], "head");
      push = $urandom % 2; pop = $urandom % 2; flush = ($urandom % 500) == 0;
      din = row_t'($urandom);
      @(posedge clk);
      if (flush) q.delete();
      else begin
        int sz; sz = q.size();
        if (pop && sz > 0) void'(q.pop_front());
        if (push && sz < D) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
