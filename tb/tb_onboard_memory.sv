// tb_onboard_memory: random reads of all five blocks on both ports are
// compared with the five hex files, one cycle after the read.
// Reference values are computed independently of the design; stimulus and
// check choices are this testbench's own, not from the paper.
module tb_onboard_memory;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0, en_a = 0, en_b = 0;
  logic [2:0] blk_a = 0, blk_b = 0; logic [4:0] addr_a = 0, addr_b = 0; sample_t q_a, q_b;
  logic [17:0] m0 [30], m1 [30], m2 [30], m3 [30], m4 [30];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  onboard_memory dut (.clk, .rst_n, .en_a, .blk_a, .addr_a, .q_a, .en_b, .blk_b, .addr_b, .q_b);
  function automatic logic [17:0] rd(int b, int a);
    case (b) 0: return m0[a]; 1: return m1[a]; 2: return m2[a]; 3: return m3[a]; default: return m4[a]; endcase
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [17:0] ea, eb;
    $readmemh("rtl/iris_like_block0.hex", m0); $readmemh("rtl/iris_like_block1.hex", m1);
    $readmemh("rtl/iris_like_block2.hex", m2); $readmemh("rtl/iris_like_block3.hex", m3);
    $readmemh("rtl/iris_like_block4.hex", m4);
    repeat (2) @(posedge clk); rst_n = 1;
    ea = 0; eb = 0;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      en_a = ($urandom % 4) != 0; en_b = ($urandom % 4) != 0;
      blk_a = 3'($urandom % 5); blk_b = 3'($urandom % 5);
      addr_a = 5'($urandom % 30); addr_b = 5'($urandom % 30);
      if (en_a) ea = rd(blk_a, addr_a);
      if (en_b) eb = rd(blk_b, addr_b);
      @(posedge clk); #1;
      if (t > 4) begin
        checks += 2;
        if (q_a != ea) begin failures++; $display("FAIL A t=%0d %h %h", t, q_a, ea); end
        if (q_b != eb) begin failures++; $display("FAIL B t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
