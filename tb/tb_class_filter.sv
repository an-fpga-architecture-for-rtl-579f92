// tb_class_filter: all label/class/enable combinations; only keep may
// change and only for the filtered class.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_class_filter;
  import tm_pkg::*;
  row_t ri, ro; logic en; logic [1:0] cls;
  int checks = 0, failures = 0;
  class_filter dut (.row_in(ri), .en, .cls, .row_out(ro));
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      row_t exp;
      ri = row_t'($urandom); en = $urandom % 2; cls = $urandom % 4;
      #1;
      exp = ri; if (en && ri.s.label == cls) exp.keep = 0;
      checks++; if (ro !== exp) begin failures++; $display("FAIL %h -> %h", ri, ro); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
