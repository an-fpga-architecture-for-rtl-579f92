// offline_input: memory management for the offline data path. On start it
// streams the len rows of one cross-validation set (offline training,
// validation or online training set) out of port A of the block ROMs, in
// row order, through the class filter. The block and address of each row
// come from cv_mapper for the current ordering. The last row of the set
// carries last=1. One row per cycle while the consumer is ready; the ROM's
// one-cycle read latency is hidden by reading the next row whenever the
// output register is empty or being taken. len must be at least 1.
// The paper describes this block only by its function (retrieve, parse and
// present offline rows); the sequencing and the row stream are this design's
// choice.
module offline_input #(
  parameter int unsigned RW = tm_pkg::ROW_IDX_W,
  parameter int unsigned OW = 7,
  localparam int unsigned BW = $clog2(tm_pkg::NUM_BLOCKS),
  localparam int unsigned AW = $clog2(tm_pkg::BLOCK_LEN)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  tm_pkg::set_e               set,
  input  logic [RW-1:0]              len,
  input  logic [OW-1:0]              order,
  input  logic                       filter_en,
  input  logic [tm_pkg::LABEL_W-1:0] filter_cls,
  // ROM port A
  output logic                       mem_en,
  output logic [BW-1:0]              mem_blk,
  output logic [AW-1:0]              mem_addr,
  input  tm_pkg::sample_t            mem_q,
  // rows out
  row_stream_if.src                  out
);
  logic          active, valid_q, last_q;
  logic [RW-1:0] idx, len_q;
  tm_pkg::set_e  set_q;
  logic          in_range;
  tm_pkg::row_t  raw;

  cv_mapper #(.OW(OW), .RW(RW)) u_map (
    .order, .set(set_q), .row(idx), .blk(mem_blk), .addr(mem_addr), .in_range
  );

  assign mem_en = active && (!valid_q || out.ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; valid_q <= 1'b0; last_q <= 1'b0;
      idx <= '0; len_q <= '0; set_q <= tm_pkg::SET_OFFLINE;
    end else if (start) begin
      active <= 1'b1; valid_q <= 1'b0; last_q <= 1'b0;
      idx <= '0; len_q <= len; set_q <= set;
    end else if (mem_en) begin
      valid_q <= 1'b1;
      last_q  <= (idx == len_q - 1'b1);
      idx     <= idx + 1'b1;
      if (idx == len_q - 1'b1) active <= 1'b0;
    end else if (out.ready) begin
      valid_q <= 1'b0;
    end
  end

  assign raw = '{last: last_q, keep: 1'b1, s: mem_q};
  class_filter u_filter (.row_in(raw), .en(filter_en), .cls(filter_cls), .row_out(out.row));
  assign out.valid = valid_q;
endmodule
