// tb_axi_lite_regs: random AXI4-Lite writes (with byte strobes) and reads
// against a reference register file: read/write registers keep what was
// written, read-only registers show their inputs and ignore writes, and
// each write pulses its register's wr_pulse exactly once.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_axi_lite_regs;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [5:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic arvalid, arready, rvalid, rready; logic [31:0] wdata, rdata; logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic [31:0] reg_q [N], ro_in [N], model [N]; logic [N-1:0] wr_pulse;
  int checks = 0, failures = 0, pulses [N];
  always #5 clk = ~clk;
  axi_lite_regs #(.NREGS(N), .N_RW(8)) dut (.clk, .rst_n, .s_awaddr(awaddr), .s_awvalid(awvalid),
    .s_awready(awready), .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid),
    .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .reg_q, .wr_pulse, .ro_in);
  tb_axi_master m (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp,
    .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);
  always @(posedge clk) for (int i = 0; i < N; i++) if (wr_pulse[i]) pulses[i]++;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < N; i++) begin model[i] = 0; ro_in[i] = 32'hA5000000 + i; pulses[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int r; logic [31:0] d, got; logic [3:0] s; int prev_cnt;
      r = $urandom % N; d = $urandom; s = 4'($urandom);
      if ($urandom % 2) begin
        prev_cnt = pulses[r];
        m.write(6'(r * 4), d, s);
        if (r < 8) for (int b = 0; b < 4; b++) if (s[b]) model[r][8*b +: 8] = d[8*b +: 8];
        @(posedge clk);
        check(pulses[r] == prev_cnt + 1, "one write pulse");
        check(bresp == 2'b00, "OKAY response");
      end else begin
        m.read(6'(r * 4), got);
        check(got == ((r < 8) ? model[r] : ro_in[r]), $sformatf("read reg %0d: %h", r, got));
      end
      for (int i = 0; i < 8; i++) check(reg_q[i] == model[i], "register outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
