// block_rom: one dual-port block ROM holding DEPTH dataset rows (one
// cross-validation block). Both ports read synchronously: with en high the
// row at addr appears on q after the clock edge; with en low q holds. The
// two ports let the online set be streamed for online training while the
// same rows are read for accuracy analysis. Contents come from INIT_FILE
// (one hex row per line: label in bits [17:16], features in [15:0]).
// The paper stores each 30-row block in its own dual-port block ROM; the row
// format and the synchronous read with hold are this design's choice.
module block_rom #(
  parameter int unsigned DEPTH     = tm_pkg::BLOCK_LEN,
  parameter int unsigned W         = tm_pkg::LABEL_W + tm_pkg::NUM_FEATURES,
  parameter string       INIT_FILE = "rtl/iris_like_block0.hex",
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en_a,
  input  logic [AW-1:0] addr_a,
  output logic [W-1:0]  q_a,
  input  logic          en_b,
  input  logic [AW-1:0] addr_b,
  output logic [W-1:0]  q_b
);
  logic [W-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk) begin
    if (en_a) q_a <= (int'(addr_a) < DEPTH) ? mem[addr_a] : '0;
    if (en_b) q_b <= (int'(addr_b) < DEPTH) ? mem[addr_b] : '0;
  end
endmodule
