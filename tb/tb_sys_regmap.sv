// tb_sys_regmap: random register contents must appear in the documented
// control fields; command writes produce go, ack (only while a report is
// pending), fault write and fault clear; status and results are packed
// into the read-only registers as documented, including the result-history
// read-back registers.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_sys_regmap;
  import tm_pkg::*;
  localparam int N = 16;
  logic [31:0] reg_q [N], ro_in [N]; logic [N-1:0] wr_pulse;
  logic online_learn_en, test_val_en, test_onl_en, filter_en; logic [1:0] filter_cls;
  logic [7:0] T, s_offline, s_online, offline_epochs, online_iters; logic [4:0] clause_cnt;
  logic [6:0] offline_len, order; logic go, fault_wr, fault_and, fault_or, fault_clear;
  logic [10:0] fault_addr; logic fault_rd_and, fault_rd_or, report_req, report_ack, busy, done;
  phase_e phase; logic [7:0] iteration; logic [15:0] errors, total;
  logic [7:0] hist_idx, hist_iteration, hist_count; logic [15:0] hist_errors, hist_total;
  phase_e hist_phase; logic hist_full;
  int checks = 0, failures = 0;
  sys_regmap dut (.*);
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) reg_q[i] = $urandom;
      wr_pulse = N'($urandom);
      fault_rd_and = $urandom % 2; fault_rd_or = $urandom % 2; report_req = $urandom % 2;
      busy = $urandom % 2; done = $urandom % 2; phase = phase_e'($urandom % 7);
      iteration = 8'($urandom); errors = 16'($urandom); total = 16'($urandom);
      hist_phase = phase_e'($urandom % 7); hist_iteration = 8'($urandom); hist_count = 8'($urandom);
      hist_errors = 16'($urandom); hist_total = 16'($urandom); hist_full = $urandom % 2;
      #1;
      check(online_learn_en == reg_q[0][0] && test_val_en == reg_q[0][1] && test_onl_en == reg_q[0][2]
            && filter_en == reg_q[0][3] && filter_cls == reg_q[0][5:4], "CTRL fields");
      check(T == reg_q[1][7:0] && s_offline == reg_q[1][15:8] && s_online == reg_q[1][23:16], "HYPER");
      check(clause_cnt == reg_q[2][4:0] && offline_len == reg_q[2][14:8] &&
            offline_epochs == reg_q[2][23:16] && online_iters == reg_q[2][31:24], "SIZES");
      check(order == reg_q[3][6:0], "ORDER");
      check(go == (wr_pulse[4] && reg_q[4][0]), "go");
      check(report_ack == (wr_pulse[4] && reg_q[4][1] && report_req), "ack only while pending");
      check(fault_wr == (wr_pulse[5] && !reg_q[5][31]) && fault_clear == (wr_pulse[5] && reg_q[5][31]), "fault cmd");
      check(fault_addr == reg_q[5][10:0] && fault_and == reg_q[5][16] && fault_or == reg_q[5][17], "fault fields");
      check(ro_in[8] == {16'h0, iteration, 1'b0, 3'(phase), 1'b0, done, busy, report_req}, "STATUS");
      check(ro_in[9] == {total, errors}, "RESULT");
      check(hist_idx == reg_q[6][7:0], "HISTIDX");
      check(ro_in[11] == {hist_total, hist_errors}, "HIST0");
      check(ro_in[12][2:0] == 3'(hist_phase) && ro_in[12][15:8] == hist_iteration &&
            ro_in[12][23:16] == hist_count && ro_in[12][31] == hist_full &&
            ro_in[12][30:24] == 0 && ro_in[12][7:3] == 0, "HIST1");
      check(ro_in[10] == {30'h0, fault_rd_or, fault_rd_and}, "FAULTRD");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
