// tb_online_data_manager: a reference queue stands in for the buffer. After
// start, the manager must pass rows in order, pop exactly the rows taken,
// apply the class filter to keep, stop after the row marked last and stall
// (valid low) while the buffer is empty.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_online_data_manager;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, filter_en = 0, pop; logic [1:0] filter_cls = 0;
  row_t head; logic empty;
  row_t q [$];
  int checks = 0, failures = 0, stalls = 0;
  always #5 clk = ~clk;
  row_stream_if rs (.clk, .rst_n);
  assign empty = q.size() == 0;
  assign head  = empty ? '0 : q[0];
  online_data_manager dut (.clk, .rst_n, .start, .filter_en, .filter_cls, .head, .empty, .pop, .out(rs));
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rs.ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 20; pass++) begin
      int n, got; bit taken; row_t exp [$];
      n = $urandom_range(1, 12);
      for (int i = 0; i < n; i++) begin
        row_t r; r = row_t'($urandom); r.last = (i == n - 1); r.keep = 1; exp.push_back(r);
      end
      filter_en = $urandom % 2; filter_cls = 2'($urandom % 3);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      got = 0;
      for (int c = 0; c < 300 && got < n; c++) begin
        // rows trickle into the buffer
        if (exp.size() > 0 && ($urandom % 3) != 0) q.push_back(exp.pop_front());
        rs.ready = 1'($urandom % 4 != 0);
        #1;
        if (empty) begin stalls++; check(!rs.valid, "stall on empty buffer"); end
        @(posedge clk);
        check(pop == (rs.valid && rs.ready), "pop only on a taken row");
        taken = rs.valid && rs.ready;
        #1;
        if (taken) begin
          row_t h; h = q.pop_front();
          check(rs.row.s == h.s && rs.row.last == h.last, "row order");
          check(rs.row.keep == !(filter_en && h.s.label == filter_cls), "filter");
          got++;
        end
        @(negedge clk);
      end
      check(got == n, "whole pass delivered");
      // a following row must not be taken before the next start
      q.push_back(row_t'(0)); rs.ready = 1; #1;
      check(!rs.valid, "stops after last");
      q.delete();
    end
    check(stalls > 0, "empty-buffer stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
