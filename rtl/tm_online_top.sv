// tm_online_top: the online-learning Tsetlin Machine system. A processor
// on an AXI4-Lite port configures a run and collects results; everything
// else runs in the fabric:
//   axi_lite_regs + sys_regmap   processor registers and report handshake
//   tm_manager_hl                execution flow (offline training, tests,
//                                online training rounds)
//   tm_manager_ll                per-datapoint transfer into the machine
//   tsetlin_machine              the learning machine, runtime s/T/clauses
//   fault_controller             per-TA stuck-at fault mappings
//   accuracy_analysis            error and datapoint counts per test
//   accuracy_history             RAM of every test result of the run
//   offline_input                set rows from ROM port A (class filter)
//   online_input_parser -> online_buffer -> online_data_manager
//                                the online stream from ROM port B
//   onboard_memory               five dual-port block ROMs (cv_mapper
//                                orders the blocks into the three sets)
// The validation and online training sets are fixed at two blocks (60
// rows) each; the offline training set length is a register (up to 30).
// s applied to the machine is s_offline except during online passes.
// A test result is appended to the history on the cycle its report is
// raised (the counts are final then); the history is emptied by start.
// The block structure and connections follow the paper's system diagram; set
// lengths of 30/60/60 come from the paper; the interfaces between blocks are
// this design's choice.
module tm_online_top (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [5:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [5:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic        report_ready    // interrupt-style copy of STATUS.ready
);
  import tm_pkg::*;
  localparam int unsigned NREGS = 16;
  localparam int unsigned RWD   = ROW_IDX_W;
  localparam int unsigned CNT_W = $clog2(MAX_CLAUSES + 1);
  localparam logic [RWD-1:0] VALID_LEN  = RWD'(2 * BLOCK_LEN);
  localparam logic [RWD-1:0] ONLINE_LEN = RWD'(2 * BLOCK_LEN);

  // ---- processor interface
  logic [31:0]      reg_q [NREGS];
  logic [31:0]      ro_in [NREGS];
  logic [NREGS-1:0] wr_pulse;

  axi_lite_regs #(.NREGS(NREGS), .N_RW(8)) u_axi (
    .clk, .rst_n,
    .s_awaddr(s_axi_awaddr), .s_awvalid(s_axi_awvalid), .s_awready(s_axi_awready),
    .s_wdata(s_axi_wdata), .s_wstrb(s_axi_wstrb), .s_wvalid(s_axi_wvalid),
    .s_wready(s_axi_wready), .s_bresp(s_axi_bresp), .s_bvalid(s_axi_bvalid),
    .s_bready(s_axi_bready), .s_araddr(s_axi_araddr), .s_arvalid(s_axi_arvalid),
    .s_arready(s_axi_arready), .s_rdata(s_axi_rdata), .s_rresp(s_axi_rresp),
    .s_rvalid(s_axi_rvalid), .s_rready(s_axi_rready),
    .reg_q, .wr_pulse, .ro_in
  );

  logic                online_learn_en, test_val_en, test_onl_en, filter_en;
  logic [LABEL_W-1:0]  filter_cls;
  logic [7:0]          T, s_offline, s_online, offline_epochs, online_iters;
  logic [CNT_W-1:0]    clause_cnt;
  logic [RWD-1:0]      offline_len;
  logic [6:0]          order;
  logic                go, fault_wr, fault_and, fault_or, fault_clear, fault_rd_and, fault_rd_or;
  logic [TA_ADDR_W-1:0] fault_addr;
  logic                report_req, report_ack, busy, done;
  phase_e              phase;
  logic [7:0]          iteration, epoch;
  logic [15:0]         errors, total;
  logic [7:0]          hist_idx, hist_iteration, hist_count;
  logic [15:0]         hist_errors, hist_total;
  phase_e              hist_phase;
  logic                hist_full;

  sys_regmap #(.NREGS(NREGS)) u_regmap (
    .reg_q, .wr_pulse, .ro_in,
    .online_learn_en, .test_val_en, .test_onl_en, .filter_en, .filter_cls,
    .T, .s_offline, .s_online, .clause_cnt, .offline_len, .offline_epochs,
    .online_iters, .order, .go, .fault_wr, .fault_addr, .fault_and, .fault_or,
    .fault_clear, .fault_rd_and, .fault_rd_or,
    .report_req, .report_ack, .busy, .done, .phase, .iteration, .errors, .total,
    .hist_idx, .hist_phase, .hist_iteration, .hist_errors, .hist_total,
    .hist_count, .hist_full
  );
  assign report_ready = report_req;

  // ---- management
  logic         ll_start, ll_src_online, ll_train, ll_done, ll_busy;
  set_e         ll_set;
  logic [RWD-1:0] ll_len;
  logic         tm_clear, online_restart, s_sel_online, acc_clear, acc_count_en;

  tm_manager_hl u_hl (
    .clk, .rst_n, .go,
    .offline_epochs, .online_iters, .offline_len,
    .valid_len(VALID_LEN), .online_len(ONLINE_LEN),
    .test_val_en, .test_onl_en, .online_learn_en,
    .ll_start, .ll_src_online, .ll_set, .ll_len, .ll_train, .ll_done,
    .tm_clear, .online_restart, .s_sel_online, .acc_clear, .acc_count_en,
    .report_req, .report_ack, .phase, .epoch, .iteration, .busy, .done
  );

  row_stream_if off_if (.clk, .rst_n);
  row_stream_if onl_if (.clk, .rst_n);

  logic                 off_start, onl_start, tm_valid, tm_train;
  set_e                 off_set;
  logic [RWD-1:0]       off_len;
  logic [NUM_FEATURES-1:0] tm_x;
  logic [LABEL_W-1:0]   tm_label;

  tm_manager_ll u_ll (
    .clk, .rst_n,
    .start(ll_start), .src_online(ll_src_online), .set(ll_set), .len(ll_len),
    .train(ll_train), .pause(1'b0), .busy(ll_busy), .done(ll_done),
    .off_start, .off_set, .off_len, .onl_start,
    .off_in(off_if), .onl_in(onl_if),
    .tm_valid, .tm_x, .tm_label, .tm_train
  );

  // ---- Tsetlin Machine with fault injection
  logic [NUM_TA-1:0]    and_map, or_map;
  logic                 out_valid, out_train;
  logic [LABEL_W-1:0]   out_pred, out_label;
  logic signed [9:0]    out_conf [NUM_CLASSES];

  fault_controller u_fault (
    .clk, .rst_n, .clear_all(fault_clear), .wr_en(fault_wr), .wr_addr(fault_addr),
    .and_val(fault_and), .or_val(fault_or), .and_map, .or_map,
    .rd_and(fault_rd_and), .rd_or(fault_rd_or)
  );

  tsetlin_machine u_tm (
    .clk, .rst_n, .clear(tm_clear),
    .T, .s_q44(s_sel_online ? s_online : s_offline), .clause_cnt,
    .and_map, .or_map,
    .in_valid(tm_valid), .in_x(tm_x), .in_label(tm_label), .in_train(tm_train),
    .out_valid, .out_pred, .out_label, .out_train, .out_conf
  );

  accuracy_analysis u_acc (
    .clk, .rst_n, .clear(acc_clear), .count_en(acc_count_en),
    .res_valid(out_valid), .pred(out_pred), .label(out_label),
    .errors, .total
  );

  localparam int unsigned HIST_DEPTH = 64;
  logic                          report_req_q;
  logic [$clog2(HIST_DEPTH):0]   hist_n;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) report_req_q <= 1'b0;
    else        report_req_q <= report_req;
  end

  accuracy_history #(.DEPTH(HIST_DEPTH)) u_hist (
    .clk, .rst_n, .clear(go), .wr(report_req && !report_req_q),
    .phase, .iteration, .errors, .total,
    .rd_idx(hist_idx[$clog2(HIST_DEPTH)-1:0]),
    .rd_phase(hist_phase), .rd_iteration(hist_iteration),
    .rd_errors(hist_errors), .rd_total(hist_total),
    .count(hist_n), .full(hist_full)
  );
  assign hist_count = 8'(hist_n);

  // ---- data sources and memory
  logic                 mem_en_a, mem_en_b;
  logic [$clog2(NUM_BLOCKS)-1:0] blk_a, blk_b;
  logic [$clog2(BLOCK_LEN)-1:0]  addr_a, addr_b;
  sample_t              q_a, q_b;

  offline_input u_off (
    .clk, .rst_n, .start(off_start), .set(off_set), .len(off_len), .order,
    .filter_en, .filter_cls,
    .mem_en(mem_en_a), .mem_blk(blk_a), .mem_addr(addr_a), .mem_q(q_a),
    .out(off_if)
  );

  logic  buf_push, buf_full, buf_pop, buf_empty;
  row_t  buf_din, buf_head;

  online_input_parser u_parser (
    .clk, .rst_n, .run(busy), .restart(online_restart), .len(ONLINE_LEN), .order,
    .mem_en(mem_en_b), .mem_blk(blk_b), .mem_addr(addr_b), .mem_q(q_b),
    .push(buf_push), .dout(buf_din), .full(buf_full)
  );

  online_buffer u_buf (
    .clk, .rst_n, .flush(online_restart),
    .push(buf_push), .din(buf_din), .full(buf_full),
    .pop(buf_pop), .head(buf_head), .empty(buf_empty), .count()
  );

  online_data_manager u_onl (
    .clk, .rst_n, .start(onl_start), .filter_en, .filter_cls,
    .head(buf_head), .empty(buf_empty), .pop(buf_pop), .out(onl_if)
  );

  onboard_memory u_mem (
    .clk, .rst_n,
    .en_a(mem_en_a), .blk_a, .addr_a, .q_a,
    .en_b(mem_en_b), .blk_b, .addr_b, .q_b
  );
endmodule
