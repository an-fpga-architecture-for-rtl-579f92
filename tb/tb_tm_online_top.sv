// tb_tm_online_top: end-to-end run of the whole system at its default
// sizes, driven through the AXI4-Lite port by a behavioural processor.
// The run follows the evaluated scenario: 20-row offline training set,
// 10 offline epochs with s = 1.375, T = 15, 16 online iterations with
// s = 1, tests of all three sets after every iteration. On top of that it
// exercises every mechanism of the design at least once and counts them:
//   - class 0 filtered out during offline training and the first 5
//     iterations, then introduced (filter switched off at a report pause);
//   - clause over-provisioning: 12 clauses at first, raised to 16;
//   - 20% of the TAs forced stuck-at-0 after iteration 8, read back;
//   - report handshake pauses and online-buffer-full stalls (the
//     buffer-empty stall is counted but need not occur: the parser
//     refills the buffer as fast as the manager drains it).
// After the run every entry of the result history is read back through
// the registers and compared with the results read at the reports.
// Each report's datapoint count is compared with the set size worked out
// from the dataset files (minus filtered rows); the final validation
// accuracy must reach 70%.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_tm_online_top;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [5:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic arvalid, arready, rvalid, rready; logic [31:0] wdata, rdata; logic [3:0] wstrb;
  logic [1:0] bresp, rresp; logic report_ready;
  int checks = 0, failures = 0;
  int n_offtrain = 0, n_online = 0, n_filtered = 0, n_buf_full = 0, n_buf_empty = 0, n_pause = 0;
  int n_faulty = 0, n_clause_change = 0, n_class_intro = 0, n_hist = 0;
  always #5 clk = ~clk;

  tm_online_top dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready), .s_axi_wdata(wdata),
    .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready), .s_axi_bresp(bresp),
    .s_axi_bvalid(bvalid), .s_axi_bready(bready), .s_axi_araddr(araddr), .s_axi_arvalid(arvalid),
    .s_axi_arready(arready), .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid),
    .s_axi_rready(rready), .report_ready);
  tb_axi_master cpu (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp,
    .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);
  tb_dataset_ref ds ();

  // mechanism counters, observed inside the design
  always @(posedge clk) if (rst_n) begin
    if (dut.u_hl.ll_start && dut.u_hl.phase == PH_OFF_TRAIN) n_offtrain++;
    if (dut.u_hl.ll_start && dut.u_hl.phase == PH_ONLINE && dut.u_hl.ll_train) n_online++;
    if (dut.u_ll.take && !dut.u_ll.row.keep) n_filtered++;
    if (dut.u_parser.pend && dut.buf_full) n_buf_full++;
    if (dut.u_onl.active && dut.buf_empty) n_buf_empty++;
    if (dut.report_req) n_pause++;
  end

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam logic [5:0] A_CTRL = 6'h00, A_HYPER = 6'h04, A_SIZES = 6'h08, A_ORDER = 6'h0C,
                         A_CMD = 6'h10, A_FAULT = 6'h14, A_STATUS = 6'h20, A_RESULT = 6'h24,
                         A_FAULTRD = 6'h28, A_HISTIDX = 6'h18, A_HIST0 = 6'h2C,
                         A_HIST1 = 6'h30;
  localparam int ORDER = 17, OFF_LEN = 20, ITERS = 16;

  function automatic int expected_total(int set, int len, bit filt);
    int n; n = 0;
    for (int r = 0; r < len; r++) begin
      logic [17:0] e; e = ds.row(ORDER, set, r);
      if (!(filt && e[17:16] == 2'd0)) n++;
    end
    return n;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] st, res; bit filt; int last_val_err, last_val_tot, reports, guard;
    bit first_online_report;
    logic [31:0] rep_res [$]; logic [31:0] rep_st [$];
    filt = 1; reports = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // configuration: online learning, test all sets, filter class 0
    cpu.write(A_CTRL, 32'h0000_000F);
    cpu.write(A_HYPER, {8'h0, 8'd16, 8'd22, 8'd15});           // s_on=1, s_off=1.375, T=15
    cpu.write(A_SIZES, {8'(ITERS), 8'd10, 1'b0, 7'(OFF_LEN), 8'd12});
    cpu.write(A_ORDER, ORDER);
    cpu.write(A_CMD, 32'h1);                                    // start
    forever begin
      guard = 0;
      while (!report_ready && guard < 100000) begin @(posedge clk); guard++; end
      cpu.read(A_STATUS, st);
      if (st[2]) break;                                         // done
      check(st[0], "ready flag with report");
      cpu.read(A_RESULT, res);
      reports++; rep_res.push_back(res); rep_st.push_back(st);
      begin
        int set, len, it; phase_e ph;
        ph = phase_e'(st[6:4]); it = st[15:8];
        set = (ph == PH_TEST_OFF) ? 0 : (ph == PH_TEST_VAL) ? 1 : 2;
        len = (set == 0) ? OFF_LEN : 60;
        check(ph inside {PH_TEST_OFF, PH_TEST_VAL, PH_TEST_ONL}, "report from a test phase");
        check(res[31:16] == 16'(expected_total(set, len, filt)),
              $sformatf("it %0d set %0d total %0d exp %0d", it, set, res[31:16], expected_total(set, len, filt)));
        check(res[15:0] <= res[31:16], "errors within total");
        $display("iteration %0d set %0d: %0d errors / %0d", it, set, res[15:0], res[31:16]);
        if (set == 1) begin last_val_err = res[15:0]; last_val_tot = res[31:16]; end
        // changes made while the system is paused, after the online-set test
        if (set == 2 && it == 3) begin
          cpu.write(A_SIZES, {8'(ITERS), 8'd10, 1'b0, 7'(OFF_LEN), 8'd16}); n_clause_change++;
        end
        if (set == 2 && it == 5) begin
          cpu.write(A_CTRL, 32'h0000_0007); filt = 0; n_class_intro++;
        end
        if (set == 2 && it == 8) begin
          // stuck-at-0 on every fifth TA (20%)
          for (int i = 0; i < NUM_TA; i += 5) begin
            cpu.write(A_FAULT, {14'h0, 1'b0, 1'b0, 16'(i)}); n_faulty++;
          end
          cpu.read(A_FAULTRD, res);
          check(res[1:0] == 2'b00, "fault mapping read back");
          check(dut.and_map[5] == 0 && dut.and_map[6] == 1, "fault map in place");
        end
      end
      cpu.write(A_CMD, 32'h2);                                  // acknowledge
    end
    check(reports == 3 * (ITERS + 1), $sformatf("reports %0d", reports));
    check(st[15:8] == ITERS, "all online iterations run");
    // the result history must hold every report of the run, in order
    for (int k = 0; k < rep_res.size(); k++) begin
      logic [31:0] h0, h1;
      cpu.write(A_HISTIDX, k);
      cpu.read(A_HIST0, h0); cpu.read(A_HIST1, h1);
      check(h0 == rep_res[k], $sformatf("history entry %0d result", k));
      check(h1[2:0] == rep_st[k][6:4] && h1[15:8] == rep_st[k][15:8], $sformatf("history entry %0d tag", k));
      check(h1[23:16] == 8'(rep_res.size()) && !h1[31], "history count, no overflow");
      n_hist++;
    end
    $display("final validation accuracy %0d/%0d", last_val_tot - last_val_err, last_val_tot);
    check((last_val_tot - last_val_err) * 10 >= last_val_tot * 7, "online learning reaches 70% on validation");
    $display("mechanisms: offline passes %0d, online training passes %0d, filtered rows %0d, buffer-full stalls %0d, buffer-empty stalls %0d, pause cycles %0d, faults %0d, clause changes %0d, class introductions %0d, history entries read %0d",
             n_offtrain, n_online, n_filtered, n_buf_full, n_buf_empty, n_pause, n_faulty, n_clause_change, n_class_intro, n_hist);
    check(n_offtrain == 10, "offline training epochs");
    check(n_online == ITERS, "online training passes");
    check(n_filtered > 0, "class filter used");
    check(n_buf_full > 0, "buffer-full stall");
    check(n_pause > 0, "handshake pause");
    check(n_hist == 3 * (ITERS + 1), "result history read back");
    check(n_faulty > 0 && n_clause_change > 0 && n_class_intro > 0, "runtime reconfiguration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
