// accuracy_analysis: counts, for one accuracy-analysis cycle, how many
// datapoints were classified and how many of them wrongly. clear starts a
// new cycle; a result (res_valid) is counted only while count_en is high.
// The counters saturate at their maximum. errors/total are registered and
// valid one cycle after the last counted result.
// Following the paper, it records errors and the number of datapoints per
// accuracy test; the counter width and saturation are this design's choice.
module accuracy_analysis #(
  parameter int unsigned LW = tm_pkg::LABEL_W,
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          count_en,
  input  logic          res_valid,
  input  logic [LW-1:0] pred,
  input  logic [LW-1:0] label,
  output logic [CW-1:0] errors,
  output logic [CW-1:0] total
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      errors <= '0; total <= '0;
    end else if (clear) begin
      errors <= '0; total <= '0;
    end else if (count_en && res_valid) begin
      if (total != '1) total <= total + 1'b1;
      if (pred != label && errors != '1) errors <= errors + 1'b1;
    end
  end
endmodule
