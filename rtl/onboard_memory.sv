// onboard_memory: the NB block ROMs of the dataset with a block-select
// multiplexer on each of the two ports. A read on port A or B names a block
// and an address; the row is available one cycle later and holds while the
// port is idle. ROM i is loaded from rtl/iris_like_block<i>.hex.
// Five separate dual-port block ROMs follow the paper; the registered block
// select is this design's choice.
module onboard_memory #(
  parameter int unsigned NB = tm_pkg::NUM_BLOCKS,
  parameter int unsigned BL = tm_pkg::BLOCK_LEN,
  localparam int unsigned BW = $clog2(NB),
  localparam int unsigned AW = $clog2(BL)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en_a,
  input  logic [BW-1:0]   blk_a,
  input  logic [AW-1:0]   addr_a,
  output tm_pkg::sample_t q_a,
  input  logic            en_b,
  input  logic [BW-1:0]   blk_b,
  input  logic [AW-1:0]   addr_b,
  output tm_pkg::sample_t q_b
);
  localparam int unsigned W = $bits(tm_pkg::sample_t);
  logic [W-1:0]  qa [NB];
  logic [W-1:0]  qb [NB];
  logic [BW-1:0] sel_a, sel_b;

  for (genvar i = 0; i < NB; i++) begin : g_rom
    localparam string FN = $sformatf("rtl/iris_like_block%0d.hex", i);
    block_rom #(.DEPTH(BL), .W(W), .INIT_FILE(FN)) u_rom (
      .clk,
      .en_a(en_a && blk_a == BW'(i)), .addr_a, .q_a(qa[i]),
      .en_b(en_b && blk_b == BW'(i)), .addr_b, .q_b(qb[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_a <= '0; sel_b <= '0;
    end else begin
      if (en_a) sel_a <= blk_a;
      if (en_b) sel_b <= blk_b;
    end
  end

  assign q_a = tm_pkg::sample_t'(qa[sel_a]);
  assign q_b = tm_pkg::sample_t'(qb[sel_b]);
endmodule
