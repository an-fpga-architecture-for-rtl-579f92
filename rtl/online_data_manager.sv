// online_data_manager: hands the manager one pass of the online set out of
// the cyclic buffer. After start it presents the buffer head as a row
// stream (through the class filter), pops each row as it is taken and
// stops after the row marked last. Rows are taken one per cycle while the
// buffer holds data; an empty buffer simply stalls the stream. Filtering
// here, at the point of use, makes a change of the filter setting act on
// the very next row (own choice).
module online_data_manager (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       filter_en,
  input  logic [tm_pkg::LABEL_W-1:0] filter_cls,
  // buffer read side
  input  tm_pkg::row_t               head,
  input  logic                       empty,
  output logic                       pop,
  // rows out
  row_stream_if.src                  out
);
  logic active;

  class_filter u_filter (.row_in(head), .en(filter_en), .cls(filter_cls), .row_out(out.row));
  assign out.valid = active && !empty;
  assign pop       = out.valid && out.ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 active <= 1'b0;
    else if (start)             active <= 1'b1;
    else if (pop && head.last)  active <= 1'b0;
  end
endmodule
