// tm_randomizer: bank of N_WORDS independent 16-bit xorshift generators
// (x ^= x<<7; x ^= x>>9; x ^= x<<8; period 65535), all advancing once per
// enabled clock. Generator i starts from a distinct non-zero seed derived
// from SEED and i. The design names a randomizer feeding the TA teams but
// does not describe it; the xorshift bank is this implementation's choice.
// Timing: rnd is the registered state, a new set of words every cycle.
module tm_randomizer #(
  parameter int unsigned   N_WORDS = 4,
  parameter logic [15:0]   SEED    = 16'hACE1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  output logic [N_WORDS*16-1:0]  rnd
);
  function automatic logic [15:0] seed_of(int unsigned i);
    logic [31:0] h;
    h = (i + 1) * 32'h9E37_79B1 ^ {16'h0, SEED};
    h = h ^ (h >> 15);
    seed_of = (h[15:0] == '0) ? 16'h1 : h[15:0];
  endfunction

  function automatic logic [15:0] step(logic [15:0] x);
    logic [15:0] y;
    y = x ^ (x << 7);
    y = y ^ (y >> 9);
    y = y ^ (y << 8);
    step = y;
  endfunction

  for (genvar i = 0; i < N_WORDS; i++) begin : g_gen
    logic [15:0] x;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  x <= seed_of(i);
      else if (en) x <= step(x);
    end
    assign rnd[16*i +: 16] = x;
  end
endmodule
