// axi_lite_regs: general AXI4-Lite slave giving a processor access to
// NREGS 32-bit I/O registers at byte addresses 4*i. Registers below N_RW
// are read/write and held here (byte strobes honoured); the others are
// read-only and show ro_in. Every accepted write also pulses wr_pulse[i]
// for one cycle so command registers can act on a write.
// Protocol choices: a write is accepted when address and data are both
// valid (awready and wready rise together for one cycle); one write and
// one read response may be outstanding; responses are always OKAY.
// Timing: reg_q and wr_pulse change on the clock edge that accepts the
// write; read data appears with rvalid the cycle after arvalid is taken.
module axi_lite_regs #(
  parameter int unsigned NREGS = 16,
  parameter int unsigned N_RW  = 8,
  localparam int unsigned IW   = $clog2(NREGS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic [IW+1:0]      s_awaddr,
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  input  logic               s_wvalid,
  output logic               s_wready,
  output logic [1:0]         s_bresp,
  output logic               s_bvalid,
  input  logic               s_bready,
  input  logic [IW+1:0]      s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready,
  // register side
  output logic [31:0]        reg_q    [NREGS],
  output logic [NREGS-1:0]   wr_pulse,
  input  logic [31:0]        ro_in    [NREGS]
);
  logic         wr_acc, rd_acc;
  logic [IW-1:0] widx, ridx;

  assign widx    = s_awaddr[IW+1:2];
  assign ridx    = s_araddr[IW+1:2];
  assign wr_acc  = s_awvalid && s_wvalid && !s_bvalid;
  assign rd_acc  = s_arvalid && !s_rvalid;
  assign s_awready = wr_acc;
  assign s_wready  = wr_acc;
  assign s_arready = rd_acc;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0; wr_pulse <= '0;
      for (int i = 0; i < NREGS; i++) reg_q[i] <= '0;
    end else begin
      wr_pulse <= '0;
      if (wr_acc) begin
        s_bvalid <= 1'b1;
        wr_pulse[widx] <= 1'b1;
        if (int'(widx) < N_RW)
          for (int b = 0; b < 4; b++)
            if (s_wstrb[b]) reg_q[widx][8*b +: 8] <= s_wdata[8*b +: 8];
      end else if (s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (rd_acc) begin
        s_rvalid <= 1'b1;
        s_rdata  <= (int'(ridx) < N_RW) ? reg_q[ridx] : ro_in[ridx];
      end else if (s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response is held until it is accepted.
  logic bwait_q, rwait_q;
  logic [31:0] rdata_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bwait_q <= 1'b0; rwait_q <= 1'b0; rdata_q <= '0;
    end else begin
      bwait_q <= s_bvalid && !s_bready;
      rwait_q <= s_rvalid && !s_rready;
      rdata_q <= s_rdata;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      if (bwait_q) assert (s_bvalid) else $error("bvalid dropped before bready");
      if (rwait_q) assert (s_rvalid && s_rdata == rdata_q)
        else $error("rvalid/rdata changed before rready");
    end
  end
endmodule
