// fault_controller: holds the two fault mappings of every TA. and_map bits
// reset to 1 and or_map bits to 0 (fault-free). A write (wr_en) sets the
// AND and OR bit of the TA at wr_addr; clear_all returns every TA to
// fault-free. Index order is the one used by tsetlin_machine. rd_and/rd_or
// return the mapping at wr_addr for read-back by the microcontroller.
// All updates take effect on the next clock edge.
// The two per-TA mappings and their reset values (AND 1, OR 0) follow the
// paper; the TA addressing and the clear-all command are this design's
// choice.
module fault_controller #(
  parameter int unsigned NTA = tm_pkg::NUM_TA,
  localparam int unsigned AW = $clog2(NTA)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear_all,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic           and_val,
  input  logic           or_val,
  output logic [NTA-1:0] and_map,
  output logic [NTA-1:0] or_map,
  output logic           rd_and,
  output logic           rd_or
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      and_map <= '1;
      or_map  <= '0;
    end else if (clear_all) begin
      and_map <= '1;
      or_map  <= '0;
    end else if (wr_en && int'(wr_addr) < NTA) begin
      and_map[wr_addr] <= and_val;
      or_map[wr_addr]  <= or_val;
    end
  end

  assign rd_and = (int'(wr_addr) < NTA) ? and_map[wr_addr] : 1'b1;
  assign rd_or  = (int'(wr_addr) < NTA) ? or_map[wr_addr]  : 1'b0;
endmodule
