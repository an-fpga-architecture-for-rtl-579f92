// sys_regmap: the system-specific register IP. It splits the processor's
// 32-bit registers into the system's control fields, combines status and
// results into read-only registers, and runs the report handshake: when the
// high-level manager finishes an accuracy test it raises report_req, which
// shows as STATUS.ready; the system stays paused until the processor,
// having read RESULT, writes CMD.ack, which returns report_ack for one cycle.
// Purely combinational: the registers themselves live in axi_lite_regs.
// Register map (byte address, all fields of this implementation's choosing):
//   0x00 CTRL  rw  [0] online learning enable [1] test validation set
//                  [2] test online set [3] class filter enable [5:4] class
//   0x04 HYPER rw  [7:0] T  [15:8] s offline (Q4.4)  [23:16] s online (Q4.4)
//   0x08 SIZES rw  [7:0] clause number [14:8] offline set length
//                  [23:16] offline epochs [31:24] online iterations
//   0x0C ORDER rw  [6:0] block ordering 0..119
//   0x10 CMD   w   [0] start a run [1] ack a report (write pulses)
//   0x14 FAULT w   [15:0] TA index [16] AND value [17] OR value
//                  [31] clear all faults (write pulse)
//   0x20 STATUS r  [0] ready [1] busy [2] done [6:4] phase [15:8] iteration
//   0x24 RESULT r  [15:0] errors [31:16] datapoints
//   0x28 FAULTRD r [0] AND [1] OR mapping at the last FAULT index
//   0x18 HISTIDX rw [7:0] result-history entry to read
//   0x2C HIST0  r  [15:0] errors [31:16] datapoints of that entry
//   0x30 HIST1  r  [2:0] phase [15:8] iteration of that entry,
//                  [23:16] entries stored, [31] history overflowed
// The 32-bit registers and the report/acknowledge pause follow the paper; the
// register map and bit fields are this design's choice.
module sys_regmap #(
  parameter int unsigned NREGS = 16,
  parameter int unsigned RW    = tm_pkg::ROW_IDX_W,
  parameter int unsigned CNT_W = $clog2(tm_pkg::MAX_CLAUSES + 1),
  parameter int unsigned FAW   = tm_pkg::TA_ADDR_W
) (
  input  logic [31:0]                 reg_q    [NREGS],
  input  logic [NREGS-1:0]            wr_pulse,
  output logic [31:0]                 ro_in    [NREGS],
  // control fields
  output logic                        online_learn_en,
  output logic                        test_val_en,
  output logic                        test_onl_en,
  output logic                        filter_en,
  output logic [tm_pkg::LABEL_W-1:0]  filter_cls,
  output logic [7:0]                  T,
  output logic [7:0]                  s_offline,
  output logic [7:0]                  s_online,
  output logic [CNT_W-1:0]            clause_cnt,
  output logic [RW-1:0]               offline_len,
  output logic [7:0]                  offline_epochs,
  output logic [7:0]                  online_iters,
  output logic [6:0]                  order,
  output logic                        go,
  output logic                        fault_wr,
  output logic [FAW-1:0]              fault_addr,
  output logic                        fault_and,
  output logic                        fault_or,
  output logic                        fault_clear,
  input  logic                        fault_rd_and,
  input  logic                        fault_rd_or,
  // handshake and status
  input  logic                        report_req,
  output logic                        report_ack,
  input  logic                        busy,
  input  logic                        done,
  input  tm_pkg::phase_e              phase,
  input  logic [7:0]                  iteration,
  input  logic [15:0]                 errors,
  input  logic [15:0]                 total,
  // result history
  output logic [7:0]                  hist_idx,
  input  tm_pkg::phase_e              hist_phase,
  input  logic [7:0]                  hist_iteration,
  input  logic [15:0]                 hist_errors,
  input  logic [15:0]                 hist_total,
  input  logic [7:0]                  hist_count,
  input  logic                        hist_full
);
  localparam int unsigned R_CTRL = 0, R_HYPER = 1, R_SIZES = 2, R_ORDER = 3,
                          R_CMD = 4, R_FAULT = 5, R_HISTIDX = 6, R_STATUS = 8, R_RESULT = 9,
                          R_FAULTRD = 10, R_HIST0 = 11, R_HIST1 = 12;

  assign online_learn_en = reg_q[R_CTRL][0];
  assign test_val_en     = reg_q[R_CTRL][1];
  assign test_onl_en     = reg_q[R_CTRL][2];
  assign filter_en       = reg_q[R_CTRL][3];
  assign filter_cls      = reg_q[R_CTRL][4 +: tm_pkg::LABEL_W];
  assign T               = reg_q[R_HYPER][7:0];
  assign s_offline       = reg_q[R_HYPER][15:8];
  assign s_online        = reg_q[R_HYPER][23:16];
  assign clause_cnt      = reg_q[R_SIZES][CNT_W-1:0];
  assign offline_len     = reg_q[R_SIZES][8 +: RW];
  assign offline_epochs  = reg_q[R_SIZES][23:16];
  assign online_iters    = reg_q[R_SIZES][31:24];
  assign order           = reg_q[R_ORDER][6:0];
  assign hist_idx        = reg_q[R_HISTIDX][7:0];

  assign go          = wr_pulse[R_CMD]   && reg_q[R_CMD][0];
  assign fault_wr    = wr_pulse[R_FAULT] && !reg_q[R_FAULT][31];
  assign fault_clear = wr_pulse[R_FAULT] &&  reg_q[R_FAULT][31];
  assign fault_addr  = reg_q[R_FAULT][FAW-1:0];
  assign fault_and   = reg_q[R_FAULT][16];
  assign fault_or    = reg_q[R_FAULT][17];

  // ack is honoured only while a report is pending
  assign report_ack = wr_pulse[R_CMD] && reg_q[R_CMD][1] && report_req;

  always_comb begin
    for (int i = 0; i < NREGS; i++) ro_in[i] = '0;
    ro_in[R_STATUS]  = {16'h0, iteration, 1'b0, phase, 1'b0, done, busy, report_req};
    ro_in[R_RESULT]  = {total, errors};
    ro_in[R_FAULTRD] = {30'h0, fault_rd_or, fault_rd_and};
    ro_in[R_HIST0]   = {hist_total, hist_errors};
    ro_in[R_HIST1]   = {hist_full, 7'h0, hist_count, hist_iteration, 5'h0, hist_phase};
  end
endmodule
