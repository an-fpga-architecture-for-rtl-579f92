// tb_axi_master: behavioural AXI4-Lite master standing in for the
// processor in testbenches. write()/read() run one transfer each, with a
// few random idle cycles on the response channels.
// Behavioural stand-in for the on-board processor; its bus timing is this
// design's choice.
module tb_axi_master #(parameter int AW = 6) (
  input  logic          clk,
  output logic [AW-1:0] awaddr,
  output logic          awvalid,
  input  logic          awready,
  output logic [31:0]   wdata,
  output logic [3:0]    wstrb,
  output logic          wvalid,
  input  logic          wready,
  input  logic [1:0]    bresp,
  input  logic          bvalid,
  output logic          bready,
  output logic [AW-1:0] araddr,
  output logic          arvalid,
  input  logic          arready,
  input  logic [31:0]   rdata,
  input  logic [1:0]    rresp,
  input  logic          rvalid,
  output logic          rready
);
  initial begin
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = '0; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  end

  task automatic write(input logic [AW-1:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wstrb = s; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    bready = 1;
    do @(posedge clk); while (!bvalid);
    @(negedge clk); bready = 0;
  endtask

  task automatic read(input logic [AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask
endmodule
