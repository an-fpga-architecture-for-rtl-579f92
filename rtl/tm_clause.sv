// tm_clause: one clause with its team of 2*NF Tsetlin automata.
// Literals are the features and their complements, lit = {~x, x}. The
// clause is the AND of the literals its TAs include. In training an empty
// clause (nothing included) outputs 1, in inference 0, as in the standard
// Tsetlin Machine; a disabled clause (over-provisioned, beyond the clause
// number port) outputs 0 and takes no feedback.
// Feedback (standard TM rules, computed in the same cycle):
//   Type I, clause 1: literal 1 -> inc with probability (s-1)/s,
//                     literal 0 -> dec with probability 1/s.
//   Type I, clause 0: every TA -> dec with probability 1/s.
//   Type II, clause 1: literal 0 and TA excluding -> inc.
// "probability 1/s" is rnd < thr_s, with thr_s = 65536/s supplied by the
// machine (17 bits, 65536 meaning always); (s-1)/s is the complement.
// The TA outputs seen here are the fault-gated ones. Timing: clause_out is
// combinational; TA states move on the next clock edge.
// The paper defers the clause and feedback rules to the standard Tsetlin
// Machine, which is what is built here; the 16-bit random comparison is this
// design's choice.
module tm_clause
#(
  parameter int unsigned NF         = tm_pkg::NUM_FEATURES,
  parameter int unsigned STATE_BITS = tm_pkg::STATE_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 enable,      // clause in use
  input  logic                 train,       // training-mode evaluation
  input  logic [2*NF-1:0]      lit,
  input  tm_pkg::fb_e                  fb,          // feedback chosen for this clause
  input  logic [2*NF*16-1:0]   rnd,         // one 16-bit random word per TA
  input  logic [16:0]          thr_s,
  input  logic [2*NF-1:0]      and_mask,
  input  logic [2*NF-1:0]      or_mask,
  output logic                 clause_out,
  output logic [2*NF-1:0]      incl
);
  logic [2*NF-1:0] inc, dec, low;  // low: event of probability 1/s

  always_comb begin
    clause_out = enable && ((incl & ~lit) == '0) && (train || (incl != '0));
    for (int k = 0; k < 2*NF; k++) begin
      low[k] = {1'b0, rnd[16*k +: 16]} < thr_s;
      inc[k] = 1'b0;
      dec[k] = 1'b0;
      unique case (fb)
        tm_pkg::FB_TYPE1: begin
          if (clause_out) begin
            inc[k] = lit[k] && !low[k];
            dec[k] = !lit[k] && low[k];
          end else begin
            dec[k] = low[k];
          end
        end
        tm_pkg::FB_TYPE2: inc[k] = clause_out && !lit[k] && !incl[k];
        default: ;
      endcase
    end
  end

  for (genvar k = 0; k < 2*NF; k++) begin : g_ta
    tm_automaton #(.STATE_BITS(STATE_BITS)) u_ta (
      .clk, .rst_n, .clear,
      .en(enable),
      .inc(inc[k]), .dec(dec[k]),
      .and_mask(and_mask[k]), .or_mask(or_mask[k]),
      .incl(incl[k]), .incl_raw()
    );
  end
endmodule
