// accuracy_history: RAM that keeps the history of accuracy results of one
// run, one entry per accuracy test: {phase, iteration, errors, datapoints}.
// Each wr pulse appends the current inputs at index count. When all DEPTH
// entries are used, later writes are dropped and full is set, so the first
// DEPTH results of a run are always intact. clear (start of a run) empties
// it. Reading is synchronous: rd_* show entry rd_idx one clock after rd_idx
// is applied (an index at or beyond count returns stale RAM contents).
// Following the paper, a block beside the accuracy counter records the
// history of the error and datapoint counts in RAM; the paper uses it in
// simulation and offloads each result to the processor on the FPGA. This
// design keeps both: the processor can read each result at its report and
// can also read the whole history back after the run. The entry format, the
// depth of 64 (a 16-iteration run with all three tests needs 51) and the
// stop-when-full policy are this design's choices. The RAM array has no
// reset (a plain block RAM); only count and full are reset.
module accuracy_history #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned CW    = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               wr,
  input  tm_pkg::phase_e     phase,
  input  logic [7:0]         iteration,
  input  logic [CW-1:0]      errors,
  input  logic [CW-1:0]      total,
  input  logic [AW-1:0]      rd_idx,
  output tm_pkg::phase_e     rd_phase,
  output logic [7:0]         rd_iteration,
  output logic [CW-1:0]      rd_errors,
  output logic [CW-1:0]      rd_total,
  output logic [AW:0]        count,
  output logic               full
);
  typedef struct packed {
    tm_pkg::phase_e  phase;
    logic [7:0]      iteration;
    logic [CW-1:0]   errors;
    logic [CW-1:0]   total;
  } entry_t;

  entry_t mem [DEPTH];
  entry_t rd_q;
  logic   room;

  assign room = count < (AW+1)'(DEPTH);

  always_ff @(posedge clk) begin
    if (wr && !clear && room) mem[count[AW-1:0]] <= '{phase, iteration, errors, total};
    rd_q <= mem[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; full <= 1'b0;
    end else if (clear) begin
      count <= '0; full <= 1'b0;
    end else if (wr) begin
      if (room) count <= count + 1'b1;
      else      full  <= 1'b1;
    end
  end

  assign rd_phase     = rd_q.phase;
  assign rd_iteration = rd_q.iteration;
  assign rd_errors    = rd_q.errors;
  assign rd_total     = rd_q.total;
endmodule
