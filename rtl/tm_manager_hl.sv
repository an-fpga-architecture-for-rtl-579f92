// tm_manager_hl: high-level system manager, the execution flow of the
// design: after go it clears the machine, trains it offline for
// offline_epochs passes over the offline training set, then loops
//   test offline set -> test validation set (optional) -> test online set
//   (optional) -> one pass of online training,
// until online_iters online passes are done, followed by one last round of
// tests. Each test is an accuracy-analysis cycle: the counters are
// cleared, the set is classified without training, and the result is
// reported to the microcontroller by holding report_req until report_ack;
// the system is paused meanwhile, which is also when the microcontroller
// may change settings (filter, faults, s, clauses). Online passes train
// only when online_learn_en is set, otherwise they only classify. The
// offline training phases use s_offline, online training s_online
// (s_sel_online). Commands to the low-level manager are single-cycle pulses.
// The order of phases follows the paper's execution-flow chart, with the
// validation and online-set tests optional as the paper describes; the report
// after each test and the loop exit are this design's choice.
module tm_manager_hl #(
  parameter int unsigned RW = tm_pkg::ROW_IDX_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                go,
  // configuration
  input  logic [7:0]          offline_epochs,
  input  logic [7:0]          online_iters,
  input  logic [RW-1:0]       offline_len,
  input  logic [RW-1:0]       valid_len,
  input  logic [RW-1:0]       online_len,
  input  logic                test_val_en,
  input  logic                test_onl_en,
  input  logic                online_learn_en,
  // low-level manager
  output logic                ll_start,
  output logic                ll_src_online,
  output tm_pkg::set_e        ll_set,
  output logic [RW-1:0]       ll_len,
  output logic                ll_train,
  input  logic                ll_done,
  // other control
  output logic                tm_clear,
  output logic                online_restart,
  output logic                s_sel_online,
  output logic                acc_clear,
  output logic                acc_count_en,
  output logic                report_req,
  input  logic                report_ack,
  output tm_pkg::phase_e      phase,
  output logic [7:0]          epoch,
  output logic [7:0]          iteration,
  output logic                busy,
  output logic                done
);
  typedef enum logic [2:0] {H_IDLE, H_INIT, H_START, H_WAIT, H_REPORT, H_DONE} hstate_e;
  hstate_e st;

  // phase that follows the tests of the current round
  function automatic tm_pkg::phase_e next_after(tm_pkg::phase_e p, logic ven, logic oen,
                                                 logic [7:0] it, logic [7:0] its);
    tm_pkg::phase_e n;
    n = tm_pkg::PH_DONE;
    unique case (p)
      tm_pkg::PH_TEST_OFF: n = ven ? tm_pkg::PH_TEST_VAL : oen ? tm_pkg::PH_TEST_ONL :
                               (it < its) ? tm_pkg::PH_ONLINE : tm_pkg::PH_DONE;
      tm_pkg::PH_TEST_VAL: n = oen ? tm_pkg::PH_TEST_ONL :
                               (it < its) ? tm_pkg::PH_ONLINE : tm_pkg::PH_DONE;
      tm_pkg::PH_TEST_ONL: n = (it < its) ? tm_pkg::PH_ONLINE : tm_pkg::PH_DONE;
      default:             n = tm_pkg::PH_DONE;
    endcase
    return n;
  endfunction

  logic is_test;
  assign is_test = (phase == tm_pkg::PH_TEST_OFF) || (phase == tm_pkg::PH_TEST_VAL) ||
                   (phase == tm_pkg::PH_TEST_ONL);

  always_comb begin
    ll_src_online = (phase == tm_pkg::PH_ONLINE);
    unique case (phase)
      tm_pkg::PH_TEST_VAL: begin ll_set = tm_pkg::SET_VALID;   ll_len = valid_len;   end
      tm_pkg::PH_TEST_ONL: begin ll_set = tm_pkg::SET_ONLINE;  ll_len = online_len;  end
      tm_pkg::PH_ONLINE:   begin ll_set = tm_pkg::SET_ONLINE;  ll_len = online_len;  end
      default:             begin ll_set = tm_pkg::SET_OFFLINE; ll_len = offline_len; end
    endcase
    ll_train     = (phase == tm_pkg::PH_OFF_TRAIN) ||
                   (phase == tm_pkg::PH_ONLINE && online_learn_en);
    s_sel_online = (phase == tm_pkg::PH_ONLINE);
    ll_start     = (st == H_START);
    acc_clear    = (st == H_START) && is_test;
    acc_count_en = (st == H_WAIT) && is_test;
    report_req   = (st == H_REPORT);
    tm_clear       = (st == H_INIT);
    online_restart = (st == H_INIT);
    busy = (st != H_IDLE) && (st != H_DONE);
    done = (st == H_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_IDLE; phase <= tm_pkg::PH_IDLE; epoch <= '0; iteration <= '0;
    end else begin
      unique case (st)
        H_IDLE, H_DONE: if (go) st <= H_INIT;
        H_INIT: begin
          epoch <= '0; iteration <= '0;
          phase <= (offline_epochs != '0) ? tm_pkg::PH_OFF_TRAIN : tm_pkg::PH_TEST_OFF;
          st    <= H_START;
        end
        H_START: st <= H_WAIT;
        H_WAIT: if (ll_done) begin
          unique case (phase)
            tm_pkg::PH_OFF_TRAIN: begin
              epoch <= epoch + 1'b1;
              if (epoch + 1'b1 >= offline_epochs) phase <= tm_pkg::PH_TEST_OFF;
              st <= H_START;
            end
            tm_pkg::PH_ONLINE: begin
              iteration <= iteration + 1'b1;
              phase <= tm_pkg::PH_TEST_OFF;
              st <= H_START;
            end
            default: st <= H_REPORT;   // a test finished
          endcase
        end
        H_REPORT: if (report_ack) begin
          phase <= next_after(phase, test_val_en, test_onl_en, iteration, online_iters);
          st    <= (next_after(phase, test_val_en, test_onl_en, iteration, online_iters)
                    == tm_pkg::PH_DONE) ? H_DONE : H_START;
        end
        default: st <= H_IDLE;
      endcase
    end
  end
endmodule
