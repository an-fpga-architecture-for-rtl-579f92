// tb_offline_input: offline input with the real block ROMs. For random
// orderings, sets, lengths and filter settings the received stream must
// be exactly the set's rows in order (from an independent reference), with
// keep cleared for the filtered class and last on the final row only.
// With ready held high, rows arrive one per clock.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_offline_input;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, filter_en = 0; set_e set; logic [6:0] len, order;
  logic [1:0] filter_cls = 0;
  logic mem_en; logic [2:0] mem_blk; logic [4:0] mem_addr; sample_t mem_q;
  logic busy_rd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  row_stream_if rs (.clk, .rst_n);
  tb_dataset_ref ds ();
  offline_input dut (.clk, .rst_n, .start, .set, .len, .order, .filter_en, .filter_cls,
    .mem_en, .mem_blk, .mem_addr, .mem_q, .out(rs));
  onboard_memory mem (.clk, .rst_n, .en_a(mem_en), .blk_a(mem_blk), .addr_a(mem_addr), .q_a(mem_q),
    .en_b(1'b0), .blk_b(3'd0), .addr_b(5'd0), .q_b());
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rs.ready = 0; set = SET_OFFLINE; len = 7'd1; order = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int s, n, r, cyc; bit full_speed;
      s = $urandom % 3; n = (s == 0) ? $urandom_range(1, 30) : $urandom_range(1, 60);
      full_speed = (t % 2 == 0);
      @(negedge clk);
      order = 7'($urandom % 120); set = set_e'(s); len = 7'(n);
      filter_en = $urandom % 2; filter_cls = 2'($urandom % 3);
      start = 1; @(negedge clk); start = 0;
      r = 0; cyc = 0;
      while (r < n && cyc < 1000) begin
        rs.ready = full_speed ? 1'b1 : 1'($urandom % 2);
        @(posedge clk); cyc++;
        if (rs.valid && rs.ready) begin
          logic [17:0] e; e = ds.row(order, s, r);
          check(rs.row.s == sample_t'(e), $sformatf("row %0d of set %0d", r, s));
          check(rs.row.keep == !(filter_en && e[17:16] == filter_cls), "filter keep flag");
          check(rs.row.last == (r == n - 1), "last flag");
          r++;
        end
        @(negedge clk);
      end
      if (full_speed) check(cyc == n + 1, $sformatf("one row per clock (%0d cycles for %0d)", cyc, n));
      rs.ready = 1; repeat (3) @(posedge clk); #1;
      check(!rs.valid, "nothing after the set");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
