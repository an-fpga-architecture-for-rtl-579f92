// online_input_parser: the online data source used for experiments. While
// run is high it reads the online training set row by row from port B of
// the block ROMs (through cv_mapper) and writes each row into the online
// buffer, wrapping to row 0 after row len-1 and marking that row last=1,
// so the buffer receives the set over and over like a live data stream.
// It stalls while the buffer is full. restart returns it to row 0. Only
// this module knows where online rows come from; another source (e.g. the
// microcontroller) can replace it. The ROM read takes one cycle; the row
// read is held in the ROM output until the buffer accepts it.
// Reading the online set from ROM through the cross-validation mapping
// follows the paper; replaying it cyclically and the flow control are this
// design's choice.
module online_input_parser #(
  parameter int unsigned RW = tm_pkg::ROW_IDX_W,
  parameter int unsigned OW = 7,
  localparam int unsigned BW = $clog2(tm_pkg::NUM_BLOCKS),
  localparam int unsigned AW = $clog2(tm_pkg::BLOCK_LEN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            run,
  input  logic            restart,
  input  logic [RW-1:0]   len,
  input  logic [OW-1:0]   order,
  // ROM port B
  output logic            mem_en,
  output logic [BW-1:0]   mem_blk,
  output logic [AW-1:0]   mem_addr,
  input  tm_pkg::sample_t mem_q,
  // buffer write side
  output logic            push,
  output tm_pkg::row_t    dout,
  input  logic            full
);
  logic [RW-1:0] idx;
  logic          pend, last_q, in_range;

  cv_mapper #(.OW(OW), .RW(RW)) u_map (
    .order, .set(tm_pkg::SET_ONLINE), .row(idx),
    .blk(mem_blk), .addr(mem_addr), .in_range
  );

  assign push   = pend && !full;
  assign mem_en = run && !restart && (!pend || !full);
  assign dout   = '{last: last_q, keep: 1'b1, s: mem_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; pend <= 1'b0; last_q <= 1'b0;
    end else if (restart) begin
      idx <= '0; pend <= 1'b0; last_q <= 1'b0;
    end else if (mem_en) begin
      pend   <= 1'b1;
      last_q <= (idx == len - 1'b1);
      idx    <= (idx >= len - 1'b1) ? '0 : idx + 1'b1;
    end else if (push) begin
      pend <= 1'b0;
    end
  end
endmodule
