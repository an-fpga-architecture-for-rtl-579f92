// tb_online_input_parser: the parser with the real block ROMs and a small
// online buffer. The buffer is drained at random; every row written must be
// the next row of the online set (cycling over 60 rows) with last on row 59,
// nothing may be lost while the buffer is full, and restart returns to row 0.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_online_input_parser;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, restart = 0; logic [6:0] order = 7'd37;
  logic mem_en; logic [2:0] mem_blk; logic [4:0] mem_addr; sample_t mem_q;
  logic push, full, pop, empty; row_t dout, head; logic [3:0] count;
  int checks = 0, failures = 0, nfull = 0;
  always #5 clk = ~clk;
  tb_dataset_ref ds ();
  online_input_parser dut (.clk, .rst_n, .run, .restart, .len(7'd60), .order,
    .mem_en, .mem_blk, .mem_addr, .mem_q, .push, .dout, .full);
  onboard_memory mem (.clk, .rst_n, .en_a(1'b0), .blk_a(3'd0), .addr_a(5'd0), .q_a(),
    .en_b(mem_en), .blk_b(mem_blk), .addr_b(mem_addr), .q_b(mem_q));
  online_buffer #(.DEPTH(8)) buffer (.clk, .rst_n, .flush(restart), .push, .din(dout), .full,
    .pop, .head, .empty, .count);
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int r; r = 0; pop = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); run = 1;
    for (int t = 0; t < 2000; t++) begin
      if (t == 1000) begin restart = 1; r = 0; pop = 0; @(negedge clk); restart = 0; end
      pop = (t % 300 < 100) ? 1'b0 : 1'($urandom % 2);
      @(posedge clk);
      if (full) nfull++;
      if (pop && !empty) begin
        check(head.s == sample_t'(ds.row(order, 2, r)), $sformatf("online row %0d", r));
        check(head.last == (r == 59), "last on the final row of the set");
        r = (r + 1) % 60;
      end
      @(negedge clk);
    end
    check(nfull > 0, "buffer-full stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
