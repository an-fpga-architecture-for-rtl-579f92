// online_buffer: cyclic buffer (circular FIFO) of DEPTH rows in RAM. Online
// rows are written while the manager is busy with accuracy analysis, so
// none is lost; the manager drains it during online training. First-word
// fall-through: head shows the oldest row whenever empty is low, pop
// removes it at the clock edge. push while full and pop while empty are
// ignored. flush empties the buffer. DEPTH must be a power of two.
// The paper calls for a cyclic buffer in RAM; its depth of 64 and the
// first-word-fall-through form are this design's choice.
module online_buffer #(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic          push,
  input  tm_pkg::row_t  din,
  output logic          full,
  input  logic          pop,
  output tm_pkg::row_t  head,
  output logic          empty,
  output logic [AW:0]   count
);
  tm_pkg::row_t mem [DEPTH];
  logic [AW:0]  wp, rp;
  logic         do_push, do_pop;

  assign count   = wp - rp;
  assign full    = count == (AW+1)'(DEPTH);
  assign empty   = count == '0;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign head    = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
    end
  end
endmodule
