// tm_pkg: types and constants shared by the online-learning Tsetlin Machine
// system. The sizes follow the iris configuration evaluated for the design:
// 16 booleanised features, 3 classes, 16 clauses per class, a 150-row
// dataset held as five 30-row blocks. The row encoding (label in bits
// [17:16], features in [15:0]), the 8-bit TA state and the Q4.4 encoding of
// the sensitivity s are choices of this implementation.
package tm_pkg;
  parameter int unsigned NUM_FEATURES = 16;  // booleanised inputs
  parameter int unsigned NUM_CLASSES  = 3;
  parameter int unsigned MAX_CLAUSES  = 16;  // clauses per class (maximum)
  parameter int unsigned STATE_BITS   = 8;   // TA has 2**STATE_BITS states
  parameter int unsigned LABEL_W      = 2;
  parameter int unsigned BLOCK_LEN    = 30;  // rows per cross-validation block
  parameter int unsigned NUM_BLOCKS   = 5;   // 150 / 30
  parameter int unsigned ROW_IDX_W    = 7;   // row index inside a set (up to 90)
  parameter int unsigned BLK_W        = 3;
  parameter int unsigned ADDR_W       = 5;
  parameter int unsigned NUM_TA = NUM_CLASSES * MAX_CLAUSES * 2 * NUM_FEATURES;
  parameter int unsigned TA_ADDR_W = $clog2(NUM_TA);

  // One dataset row as stored in ROM.
  typedef struct packed {
    logic [LABEL_W-1:0]      label;
    logic [NUM_FEATURES-1:0] x;
  } sample_t;

  // A row in flight between data sources and the manager. keep=0 marks a
  // row removed by the class filter; last marks the final row of a set.
  typedef struct packed {
    logic    last;
    logic    keep;
    sample_t s;
  } row_t;

  // The three cross-validation sets.
  typedef enum logic [1:0] {
    SET_OFFLINE = 2'd0,
    SET_VALID   = 2'd1,
    SET_ONLINE  = 2'd2
  } set_e;

  // Feedback type delivered to one clause.
  typedef enum logic [1:0] {
    FB_NONE  = 2'd0,
    FB_TYPE1 = 2'd1,
    FB_TYPE2 = 2'd2
  } fb_e;

  // Role of a class during one training step.
  typedef enum logic [1:0] {
    ROLE_NONE   = 2'd0,
    ROLE_TARGET = 2'd1,
    ROLE_NEG    = 2'd2
  } role_e;

  // Phases reported by the high-level manager.
  typedef enum logic [2:0] {
    PH_IDLE      = 3'd0,
    PH_OFF_TRAIN = 3'd1,
    PH_TEST_OFF  = 3'd2,
    PH_TEST_VAL  = 3'd3,
    PH_TEST_ONL  = 3'd4,
    PH_ONLINE    = 3'd5,
    PH_DONE      = 3'd6
  } phase_e;
endpackage
