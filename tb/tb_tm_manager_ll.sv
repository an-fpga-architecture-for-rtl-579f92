// tb_tm_manager_ll: the low-level manager with both stream inputs driven
// by the testbench. For offline and online passes it must start the right
// source, forward every kept row (and no filtered row) to the machine with
// the pass's train flag, hold the stream while paused, and pulse done
// exactly DRAIN cycles after the last row.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_manager_ll;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, src_online = 0, train = 0, pause = 0;
  set_e set = SET_VALID; logic [6:0] len = 7'd5;
  logic busy, done, off_start, onl_start, tm_valid, tm_train; set_e off_set; logic [6:0] off_len;
  logic [15:0] tm_x; logic [1:0] tm_label;
  int checks = 0, failures = 0, paused = 0;
  always #5 clk = ~clk;
  row_stream_if offs (.clk, .rst_n);
  row_stream_if onls (.clk, .rst_n);
  tm_manager_ll dut (.clk, .rst_n, .start, .src_online, .set, .len, .train, .pause, .busy, .done,
    .off_start, .off_set, .off_len, .onl_start, .off_in(offs), .onl_in(onls),
    .tm_valid, .tm_x, .tm_label, .tm_train);
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    offs.valid = 0; onls.valid = 0; offs.row = '0; onls.row = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 30; pass++) begin
      int n, sent, fwd, exp_fwd, wait_done; bit on, tk;
      row_t rows [$];
      on = pass % 2; n = $urandom_range(1, 10);
      exp_fwd = 0; rows.delete();
      for (int i = 0; i < n; i++) begin
        row_t r; r = row_t'($urandom); r.last = (i == n - 1); r.keep = ($urandom % 4) != 0;
        if (r.keep) exp_fwd++; rows.push_back(r);
      end
      @(negedge clk);
      src_online = on; train = $urandom % 2; set = set_e'($urandom % 3); len = 7'(n);
      start = 1; #1;
      check(off_start == !on && onl_start == on, "source start");
      check(off_set == set && off_len == len, "set and length passed on");
      @(negedge clk); start = 0;
      sent = 0; fwd = 0;
      while (sent < n) begin
        pause = ($urandom % 5) == 0;
        if (on) begin onls.valid = 1; onls.row = rows[sent]; end
        else    begin offs.valid = 1; offs.row = rows[sent]; end
        #1;
        if (pause) begin paused++; check(!(on ? onls.ready : offs.ready), "pause holds stream"); end
        check(!(on ? offs.ready : onls.ready), "other source idle");
        if (tm_valid) begin
          fwd++;
          check(tm_x == rows[sent].s.x && tm_label == rows[sent].s.label && tm_train == train, "row to TM");
        end
        if (!(on ? onls.ready : offs.ready)) check(!tm_valid, "nothing forwarded without handshake");
        if ((on ? onls.ready : offs.ready) && !rows[sent].keep) check(!tm_valid, "filtered row dropped");
        tk = on ? onls.ready : offs.ready;
        @(posedge clk);
        if (tk) sent++;
        @(negedge clk);
      end
      onls.valid = 0; offs.valid = 0; pause = 0;
      check(fwd == exp_fwd, "all kept rows forwarded");
      wait_done = 0;
      while (!done && wait_done < 20) begin @(posedge clk); #1; wait_done++; end
      check(wait_done == 3, $sformatf("done after drain (%0d)", wait_done));
      @(negedge clk); check(!busy, "idle after done");
    end
    check(paused > 0, "pause exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
