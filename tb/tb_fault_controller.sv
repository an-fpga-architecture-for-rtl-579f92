// tb_fault_controller: fault-free reset values, random single-TA writes
// against a reference map, read-back and clear-all.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_fault_controller;
  localparam int NTA = 40;
  logic clk = 0, rst_n = 0, clear_all = 0, wr_en = 0, and_val = 0, or_val = 0;
  logic [5:0] wr_addr = 0;
  logic [NTA-1:0] and_map, or_map, ref_and, ref_or;
  logic rd_and, rd_or;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fault_controller #(.NTA(NTA)) dut (.clk, .rst_n, .clear_all, .wr_en, .wr_addr, .and_val, .or_val,
                                     .and_map, .or_map, .rd_and, .rd_or);
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ref_and = '1; ref_or = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(and_map == '1 && or_map == '0, "fault-free after reset");
    for (int t = 0; t < 1000; t++) begin
      wr_en = $urandom % 2; clear_all = ($urandom % 100) == 0;
      wr_addr = 6'($urandom % (NTA + 4)); and_val = $urandom % 2; or_val = $urandom % 2;
      @(negedge clk);
      if (clear_all) begin ref_and = '1; ref_or = '0; end
      else if (wr_en && wr_addr < NTA) begin ref_and[wr_addr] = and_val; ref_or[wr_addr] = or_val; end
      check(and_map == ref_and && or_map == ref_or, "maps");
      if (wr_addr < NTA) check(rd_and == ref_and[wr_addr] && rd_or == ref_or[wr_addr], "read-back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
