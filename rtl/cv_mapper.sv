// cv_mapper: cross-validation mapping from (set, row) to (block, address).
// The dataset is cut into NB blocks of BL rows. An ordering index 0..NB!-1
// is decoded, through the factorial number system, into a permutation of
// the blocks; slot 0 of the permutation forms the offline training set,
// the next VAL_BLOCKS slots the validation set and the following ONL_BLOCKS
// slots the online training set (1, 2 and 2 blocks of 30 for iris: 30, 60,
// 60 rows). Stepping the index through 0..119 visits every ordering.
// The decode itself is this implementation's choice. Combinational.
module cv_mapper #(
  parameter int unsigned NB         = tm_pkg::NUM_BLOCKS,
  parameter int unsigned BL         = tm_pkg::BLOCK_LEN,
  parameter int unsigned OFF_BLOCKS = 1,
  parameter int unsigned VAL_BLOCKS = 2,
  parameter int unsigned ONL_BLOCKS = 2,
  parameter int unsigned OW         = 7,   // ordering index width
  parameter int unsigned RW         = tm_pkg::ROW_IDX_W,
  localparam int unsigned BW        = $clog2(NB),
  localparam int unsigned AW        = $clog2(BL)
) (
  input  logic [OW-1:0]   order,
  input  tm_pkg::set_e    set,
  input  logic [RW-1:0]   row,
  output logic [BW-1:0]   blk,
  output logic [AW-1:0]   addr,
  output logic            in_range
);
  function automatic int unsigned fact(int unsigned n);
    int unsigned f = 1;
    for (int unsigned i = 2; i <= n; i++) f = f * i;
    return f;
  endfunction

  logic [BW-1:0] perm [NB];
  int unsigned   slot, nblk, base, rem, d, cnt;
  logic [NB-1:0] used;

  always_comb begin
    // factorial-base decode of the ordering index into a permutation
    rem  = int'(order) % fact(NB);
    used = '0;
    for (int p = 0; p < NB; p++) begin
      d    = rem / fact(NB - 1 - p);
      rem  = rem % fact(NB - 1 - p);
      cnt  = 0;
      perm[p] = '0;
      for (int b = 0; b < NB; b++) begin
        if (!used[b]) begin
          if (cnt == d) perm[p] = BW'(b);
          cnt = cnt + 1;
        end
      end
      used[perm[p]] = 1'b1;
    end
    unique case (set)
      tm_pkg::SET_VALID:  begin base = OFF_BLOCKS;              nblk = VAL_BLOCKS; end
      tm_pkg::SET_ONLINE: begin base = OFF_BLOCKS + VAL_BLOCKS; nblk = ONL_BLOCKS; end
      default:            begin base = 0;                       nblk = OFF_BLOCKS; end
    endcase
    slot     = base + int'(row) / BL;
    in_range = int'(row) < nblk * BL;
    blk      = (slot < NB) ? perm[slot] : '0;
    addr     = AW'(int'(row) % BL);
  end
endmodule
