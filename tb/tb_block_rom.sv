// tb_block_rom: both ports of block 3 read every address, in random
// orders, with enable gaps; data must match the hex file one cycle after
// the read and hold while the port is idle.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_block_rom;
  logic clk = 0, en_a = 0, en_b = 0; logic [4:0] addr_a = 0, addr_b = 0; logic [17:0] q_a, q_b;
  logic [17:0] ref_mem [30];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  block_rom #(.INIT_FILE("rtl/iris_like_block3.hex")) dut (.clk, .en_a, .addr_a, .q_a, .en_b, .addr_b, .q_b);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [17:0] ea, eb;
    $readmemh("rtl/iris_like_block3.hex", ref_mem);
    ea = 0; eb = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      en_a = $urandom % 2; en_b = $urandom % 2;
      addr_a = 5'($urandom % 30); addr_b = 5'($urandom % 30);
      if (en_a) ea = ref_mem[addr_a];
      if (en_b) eb = ref_mem[addr_b];
      @(posedge clk); #1;
      if (t > 0) begin
        checks += 2;
        if (q_a != ea) begin failures++; $display("FAIL A t=%0d", t); end
        if (q_b != eb) begin failures++; $display("FAIL B t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
