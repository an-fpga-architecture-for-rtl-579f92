// tm_manager_ll: low-level, per-datapoint manager. On start it runs one
// pass over a data set: it starts the chosen source (offline input with a
// set and length, or the online data manager), takes rows from it one per
// cycle and hands every kept row to the Tsetlin Machine with the train
// flag. Rows removed by the class filter are taken and dropped. After the
// row marked last it waits DRAIN cycles so the machine's two-cycle pipeline
// and the accuracy counter have finished, then pulses done.
// pause (the microcontroller handshake) holds the stream without losing a
// row. Rows reach the machine combinationally from the stream handshake.
module tm_manager_ll #(
  parameter int unsigned RW    = tm_pkg::ROW_IDX_W,
  parameter int unsigned DRAIN = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // command from the high-level manager
  input  logic                        start,
  input  logic                        src_online,
  input  tm_pkg::set_e                set,
  input  logic [RW-1:0]               len,
  input  logic                        train,
  input  logic                        pause,
  output logic                        busy,
  output logic                        done,
  // data sources
  output logic                        off_start,
  output tm_pkg::set_e                off_set,
  output logic [RW-1:0]               off_len,
  output logic                        onl_start,
  row_stream_if.dst                   off_in,
  row_stream_if.dst                   onl_in,
  // to the Tsetlin Machine
  output logic                        tm_valid,
  output logic [tm_pkg::NUM_FEATURES-1:0] tm_x,
  output logic [tm_pkg::LABEL_W-1:0]  tm_label,
  output logic                        tm_train
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e       state;
  logic         src_q, train_q, take;
  logic [3:0]   drain_cnt;
  tm_pkg::row_t row;

  assign off_start = start && !src_online;
  assign onl_start = start && src_online;
  assign off_set   = set;
  assign off_len   = len;

  assign off_in.ready = (state == S_RUN) && !src_q && !pause;
  assign onl_in.ready = (state == S_RUN) &&  src_q && !pause;
  assign take = src_q ? (onl_in.valid && onl_in.ready) : (off_in.valid && off_in.ready);
  assign row  = src_q ? onl_in.row : off_in.row;

  assign tm_valid = take && row.keep;
  assign tm_x     = row.s.x;
  assign tm_label = row.s.label;
  assign tm_train = train_q;
  assign busy     = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; src_q <= 1'b0; train_q <= 1'b0; drain_cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN; src_q <= src_online; train_q <= train;
        end
        S_RUN: if (take && row.last) begin
          state <= S_DRAIN; drain_cnt <= 4'(DRAIN);
        end
        S_DRAIN: begin
          if (drain_cnt <= 4'd1) begin
            state <= S_IDLE; done <= 1'b1;
          end
          drain_cnt <= drain_cnt - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
