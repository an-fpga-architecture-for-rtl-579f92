// class_filter: removes one class from a row stream. While en is high, a
// row whose label equals cls has its keep flag cleared; the row itself
// (and its end-of-set flag) still travels, so set boundaries are kept and
// the consumer simply skips it. Combinational.
// The enable-controlled removal of one class is from the paper; clearing keep
// instead of deleting the row is this design's choice.
module class_filter (
  input  tm_pkg::row_t                row_in,
  input  logic                        en,
  input  logic [tm_pkg::LABEL_W-1:0]  cls,
  output tm_pkg::row_t                row_out
);
  always_comb begin
    row_out = row_in;
    if (en && row_in.s.label == cls) row_out.keep = 1'b0;
  end
endmodule
