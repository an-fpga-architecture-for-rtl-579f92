// row_stream_if: valid/ready stream of dataset rows (tm_pkg::row_t) from a
// data source to its consumer. A row moves on a cycle where valid and ready
// are both high; a source holds valid and the row stable until then.
// The paper only says that the manager requests rows from its data sources
// with request signals; the valid/ready form, the row_t record and the
// assertion below (checked on the registered wait flag, which is cleared by
// reset) are this design's choice.
interface row_stream_if (input logic clk, input logic rst_n);
  import tm_pkg::*;
  logic valid;
  logic ready;
  row_t row;

  modport src (output valid, output row, input ready);
  modport dst (input valid, input row, output ready);

  // Handshake rule: a presented row is held until it is taken.
  logic wait_q;
  row_t row_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q <= 1'b0; row_q <= '0;
    end else begin
      wait_q <= valid && !ready;
      row_q  <= row;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (wait_q) assert (valid && row == row_q)
      else $error("row_stream_if: row dropped or changed before ready");
  end
endinterface
