// tm_argmax: index of the largest signed class confidence. Ties go to the
// lowest class index (own choice; not specified). Purely combinational.
module tm_argmax #(
  parameter int unsigned N = tm_pkg::NUM_CLASSES,
  parameter int unsigned W = 10,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [W-1:0] val [N],
  output logic [IW-1:0]       idx
);
  logic signed [W-1:0] best;
  always_comb begin
    best = val[0];
    idx  = '0;
    for (int i = 1; i < N; i++) begin
      if (val[i] > best) begin
        best = val[i];
        idx  = IW'(i);
      end
    end
  end
endmodule
