// tm_class: the clauses of one class, their majority vote and the choice of
// which clauses receive feedback.
// Even-numbered clauses vote +1, odd-numbered -1, so any active clause count
// keeps the two polarities balanced (own choice; the design only says half
// vote for and half against). Only clauses below clause_cnt are active. The
// sum is clamped to [-T, T] and is the class confidence.
// In a training step the class is the target class, a negative class, or
// idle. Each active clause is selected for feedback with probability
// (T - v)/(2T) (target) or (T + v)/(2T) (negative), using one random word
// per clause against p = ((T -/+ v) * 65536) / (2T). Selected clauses get
// Type I if their polarity agrees with the role (positive in target,
// negative in negative class) and Type II otherwise: standard TM rules.
// Timing: vote and feedback are combinational from lit; TA updates occur
// on the next clock edge.
module tm_class
#(
  parameter int unsigned NF         = tm_pkg::NUM_FEATURES,
  parameter int unsigned CLAUSES    = tm_pkg::MAX_CLAUSES,
  parameter int unsigned STATE_BITS = tm_pkg::STATE_BITS,
  localparam int unsigned CNT_W     = $clog2(CLAUSES + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         train,
  input  logic [2*NF-1:0]              lit,
  input  logic [CNT_W-1:0]             clause_cnt,
  input  tm_pkg::role_e                        role,
  input  logic [7:0]                   T,
  input  logic [16:0]                  thr_s,
  input  logic [CLAUSES*2*NF*16-1:0]   rnd_ta,
  input  logic [CLAUSES*16-1:0]        rnd_cl,
  input  logic [CLAUSES*2*NF-1:0]      and_mask,
  input  logic [CLAUSES*2*NF-1:0]      or_mask,
  output logic signed [9:0]            vote,       // clamped class confidence
  output logic [CLAUSES-1:0]           clause_out
);
  logic [CLAUSES-1:0] active;
  tm_pkg::fb_e                fb [CLAUSES];
  logic signed [9:0]  sum, t_s;
  logic [9:0]         num;
  logic [25:0]        p;

  always_comb begin
    for (int j = 0; j < CLAUSES; j++) active[j] = j < int'(clause_cnt);
  end

  always_comb begin
    sum = '0;
    for (int j = 0; j < CLAUSES; j++) begin
      if (clause_out[j]) sum = (j % 2 == 0) ? sum + 10'sd1 : sum - 10'sd1;
    end
    t_s  = signed'({2'b00, T});
    vote = (sum > t_s) ? t_s : (sum < -t_s) ? -t_s : sum;
    num  = (role == tm_pkg::ROLE_NEG) ? 10'(t_s + vote) : 10'(t_s - vote);
    p    = (T == '0) ? '0 : ({num, 16'h0} / {17'h0, T, 1'b0});
    for (int j = 0; j < CLAUSES; j++) begin
      fb[j] = tm_pkg::FB_NONE;
      if (role != tm_pkg::ROLE_NONE && active[j] && {10'h0, rnd_cl[16*j +: 16]} < p) begin
        if ((j % 2 == 0) == (role == tm_pkg::ROLE_TARGET)) fb[j] = tm_pkg::FB_TYPE1;
        else                                       fb[j] = tm_pkg::FB_TYPE2;
      end
    end
  end

  for (genvar j = 0; j < CLAUSES; j++) begin : g_clause
    tm_clause #(.NF(NF), .STATE_BITS(STATE_BITS)) u_clause (
      .clk, .rst_n, .clear,
      .enable(active[j]), .train, .lit,
      .fb(fb[j]),
      .rnd(rnd_ta[j*2*NF*16 +: 2*NF*16]),
      .thr_s,
      .and_mask(and_mask[j*2*NF +: 2*NF]),
      .or_mask(or_mask[j*2*NF +: 2*NF]),
      .clause_out(clause_out[j]),
      .incl()
    );
  end
endmodule
