// tb_tm_manager_hl: the high-level manager with a model of the low-level
// manager (done a random time after each start) and of the processor
// (acknowledges each report after a random delay). For several
// configurations the sequence of passes it starts must match the execution
// flow: offline_epochs offline training passes, then rounds of tests
// (offline set, validation and online set when enabled, each reported) and
// one online pass per round, online_iters times, then a final round of tests.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_manager_hl;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0, go = 0;
  logic [7:0] offline_epochs, online_iters; logic test_val_en, test_onl_en, online_learn_en;
  logic ll_start, ll_src_online, ll_train, ll_done = 0; set_e ll_set; logic [6:0] ll_len;
  logic tm_clear, online_restart, s_sel_online, acc_clear, acc_count_en, report_req, report_ack = 0;
  phase_e phase; logic [7:0] epoch, iteration; logic busy, done;
  int checks = 0, failures = 0, reports = 0, clears = 0;
  string got [$], exp [$];
  always #5 clk = ~clk;
  tm_manager_hl dut (.clk, .rst_n, .go, .offline_epochs, .online_iters, .offline_len(7'd20),
    .valid_len(7'd60), .online_len(7'd61), .test_val_en, .test_onl_en, .online_learn_en,
    .ll_start, .ll_src_online, .ll_set, .ll_len, .ll_train, .ll_done, .tm_clear, .online_restart,
    .s_sel_online, .acc_clear, .acc_count_en, .report_req, .report_ack, .phase, .epoch, .iteration,
    .busy, .done);
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // low-level manager and processor models, recording what was started
  always @(posedge clk) begin
    if (rst_n && ll_start) begin
      got.push_back($sformatf("%s set%0d len%0d train%0d s%0d", ll_src_online ? "onl" : "off",
                              ll_set, ll_len, ll_train, s_sel_online));
      check(acc_clear == (phase inside {PH_TEST_OFF, PH_TEST_VAL, PH_TEST_ONL}), "acc_clear with each test");
      fork begin
        repeat ($urandom_range(2, 6)) @(posedge clk);
        check(acc_count_en == (phase inside {PH_TEST_OFF, PH_TEST_VAL, PH_TEST_ONL}), "counting only in tests");
        ll_done <= 1; @(posedge clk); ll_done <= 0;
      end join_none
    end
    if (tm_clear) clears++;
  end
  always @(posedge clk) begin
    if (rst_n && report_req && !report_ack) begin
      reports++;
      fork begin
        repeat ($urandom_range(0, 4)) @(posedge clk);
        report_ack <= 1; @(posedge clk); report_ack <= 0;
      end join_none
      @(posedge clk); // one report counted per request
      while (report_req && !report_ack) @(posedge clk);
      @(posedge clk);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cfg = 0; cfg < 6; cfg++) begin
      int nrep, waitc;
      offline_epochs = 8'($urandom_range(0, 3)); online_iters = 8'($urandom_range(0, 3));
      test_val_en = $urandom % 2; test_onl_en = $urandom % 2; online_learn_en = $urandom % 2;
      exp.delete(); got.delete(); reports = 0; clears = 0; nrep = 0;
      for (int e = 0; e < offline_epochs; e++) exp.push_back("off set0 len20 train1 s0");
      for (int it = 0; it <= online_iters; it++) begin
        exp.push_back("off set0 len20 train0 s0"); nrep++;
        if (test_val_en) begin exp.push_back("off set1 len60 train0 s0"); nrep++; end
        if (test_onl_en) begin exp.push_back("off set2 len61 train0 s0"); nrep++; end
        if (it < online_iters) exp.push_back($sformatf("onl set2 len61 train%0d s1", online_learn_en));
      end
      @(negedge clk); go = 1; @(negedge clk); go = 0;
      waitc = 0;
      while (!done && waitc < 5000) begin @(posedge clk); waitc++; end
      repeat (3) @(posedge clk);
      check(done && !busy && phase == PH_DONE, "run completes");
      check(clears == 1, "machine cleared once at the start");
      check(reports == nrep, $sformatf("reports %0d exp %0d", reports, nrep));
      check(got.size() == exp.size(), $sformatf("pass count %0d exp %0d", got.size(), exp.size()));
      for (int i = 0; i < exp.size() && i < got.size(); i++)
        check(got[i] == exp[i], $sformatf("pass %0d: %s vs %s", i, got[i], exp[i]));
      check(iteration == online_iters, "iteration count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
