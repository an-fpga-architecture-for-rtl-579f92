// tsetlin_machine: the complete multi-class Tsetlin Machine with on-chip
// learning, runtime hyperparameters and fault-injection inputs.
// Pipeline (two cycles, one datapoint per clock):
//   cycle 1  the input row (features, label, train flag) is registered;
//            this is the I/O buffer cycle.
//   cycle 2  all clauses, class votes and argmax are evaluated and, for a
//            training row, every TA's feedback is applied at the end of the
//            cycle. The prediction and confidences are registered, so
//            out_valid rises two clock edges after in_valid was sampled.
// Training follows the standard multi-class TM: the labelled class is the
// target, one other class drawn at random is the negative class.
// s arrives in Q4.4 (s_q44 = 16*s, e.g. 1.375 -> 22); the machine forms the
// threshold 65536/s once (a single divider) and shares it with every TA.
// T and clause_cnt are plain runtime ports, as in the design. The TA array
// is enabled only on cycles that carry a row, in place of the FPGA's clock
// gating. Fault masks come from the fault controller, one AND and one OR
// bit per TA, indexed ((class*CLAUSES)+clause)*2*NF + literal, where
// literal k < NF is feature k and literal NF+k its complement.
// The two-cycle latency, one-row-per-clock throughput, runtime s, T and
// clause-number ports, and per-TA fault gates follow the paper; the Q4.4
// encoding of s and the random negative-class choice are this design's
// choice.
module tsetlin_machine
#(
  parameter int unsigned NF         = tm_pkg::NUM_FEATURES,
  parameter int unsigned NC         = tm_pkg::NUM_CLASSES,
  parameter int unsigned CLAUSES    = tm_pkg::MAX_CLAUSES,
  parameter int unsigned STATE_BITS = tm_pkg::STATE_BITS,
  parameter logic [15:0] SEED       = 16'h1D2B,
  localparam int unsigned CNT_W     = $clog2(CLAUSES + 1),
  localparam int unsigned LW        = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned NTA       = NC * CLAUSES * 2 * NF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,        // return all TAs to initial state
  // runtime hyperparameters
  input  logic [7:0]           T,
  input  logic [7:0]           s_q44,
  input  logic [CNT_W-1:0]     clause_cnt,
  // fault injection mappings
  input  logic [NTA-1:0]       and_map,
  input  logic [NTA-1:0]       or_map,
  // input row
  input  logic                 in_valid,
  input  logic [NF-1:0]        in_x,
  input  logic [LW-1:0]        in_label,
  input  logic                 in_train,
  // result, two cycles later
  output logic                 out_valid,
  output logic [LW-1:0]        out_pred,
  output logic [LW-1:0]        out_label,
  output logic                 out_train,
  output logic signed [9:0]    out_conf [NC]
);
  localparam int unsigned NRND_TA = NTA;
  localparam int unsigned NRND    = NRND_TA + NC * CLAUSES + 1;

  // ---- cycle 1: input buffer
  logic            v_q, train_q;
  logic [NF-1:0]   x_q;
  logic [LW-1:0]   y_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; train_q <= 1'b0; x_q <= '0; y_q <= '0;
    end else begin
      v_q <= in_valid;
      if (in_valid) begin
        x_q <= in_x; y_q <= in_label; train_q <= in_train;
      end
    end
  end

  // ---- shared 1/s threshold
  logic [16:0] thr_s;
  logic [20:0] quot;  // top bits only matter for s < 1, which is clamped
  always_comb begin
    quot  = 21'h10_0000 / {13'h0, s_q44};
    thr_s = (s_q44 <= 8'd16) ? 17'h1_0000 : quot[16:0];
  end

  // ---- randomizer
  logic [NRND*16-1:0] rnd;
  tm_randomizer #(.N_WORDS(NRND), .SEED(SEED)) u_rand (
    .clk, .rst_n, .en(v_q && train_q), .rnd
  );

  // ---- class roles
  logic [LW-1:0] neg;
  tm_pkg::role_e         role [NC];
  logic [15:0]   rnd_neg;
  always_comb begin
    rnd_neg = rnd[NRND*16-16 +: 16];
    if (NC > 1) neg = LW'((int'(y_q) + 1 + int'(rnd_neg) % (NC - 1)) % NC);
    else        neg = '0;
    for (int c = 0; c < NC; c++) begin
      role[c] = tm_pkg::ROLE_NONE;
      if (v_q && train_q) begin
        if (c == int'(y_q))              role[c] = tm_pkg::ROLE_TARGET;
        else if (NC > 1 && c == int'(neg)) role[c] = tm_pkg::ROLE_NEG;
      end
    end
  end

  // ---- cycle 2: clauses, voting, feedback
  logic [2*NF-1:0]        lit;
  logic signed [9:0]      conf [NC];
  logic [LW-1:0]          pred;
  assign lit = {~x_q, x_q};

  for (genvar c = 0; c < NC; c++) begin : g_class
    tm_class #(.NF(NF), .CLAUSES(CLAUSES), .STATE_BITS(STATE_BITS)) u_class (
      .clk, .rst_n, .clear,
      .train(train_q), .lit, .clause_cnt,
      .role(role[c]), .T, .thr_s,
      .rnd_ta(rnd[c*CLAUSES*2*NF*16 +: CLAUSES*2*NF*16]),
      .rnd_cl(rnd[NRND_TA*16 + c*CLAUSES*16 +: CLAUSES*16]),
      .and_mask(and_map[c*CLAUSES*2*NF +: CLAUSES*2*NF]),
      .or_mask(or_map[c*CLAUSES*2*NF +: CLAUSES*2*NF]),
      .vote(conf[c]),
      .clause_out()
    );
  end

  tm_argmax #(.N(NC), .W(10)) u_argmax (.val(conf), .idx(pred));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pred <= '0; out_label <= '0; out_train <= 1'b0;
      for (int c = 0; c < NC; c++) out_conf[c] <= '0;
    end else begin
      out_valid <= v_q;
      if (v_q) begin
        out_pred  <= pred;
        out_label <= y_q;
        out_train <= train_q;
        for (int c = 0; c < NC; c++) out_conf[c] <= conf[c];
      end
    end
  end
endmodule
