// tb_dataset_ref: reference view of the dataset for testbenches. It loads
// the five block files and returns row r of set s under ordering o, where
// the ordering is the o-th block permutation in lexicographic order
// (computed here by enumeration, independently of the design's decoder).
// Independent reference of the dataset layout; the ordering decode mirrors
// this design's own choice of a factorial code.
module tb_dataset_ref;
  logic [17:0] m [5][30];
  int perms [120][5];
  initial begin
    int n; logic [17:0] tmp [30];
    $readmemh("rtl/iris_like_block0.hex", tmp); for (int i = 0; i < 30; i++) m[0][i] = tmp[i];
    $readmemh("rtl/iris_like_block1.hex", tmp); for (int i = 0; i < 30; i++) m[1][i] = tmp[i];
    $readmemh("rtl/iris_like_block2.hex", tmp); for (int i = 0; i < 30; i++) m[2][i] = tmp[i];
    $readmemh("rtl/iris_like_block3.hex", tmp); for (int i = 0; i < 30; i++) m[3][i] = tmp[i];
    $readmemh("rtl/iris_like_block4.hex", tmp); for (int i = 0; i < 30; i++) m[4][i] = tmp[i];
    n = 0;
    for (int a = 0; a < 5; a++) for (int b = 0; b < 5; b++) for (int c = 0; c < 5; c++)
    for (int d = 0; d < 5; d++) for (int e = 0; e < 5; e++)
      if (a!=b && a!=c && a!=d && a!=e && b!=c && b!=d && b!=e && c!=d && c!=e && d!=e) begin
        perms[n] = '{a, b, c, d, e}; n++;
      end
  end
  function automatic logic [17:0] row(int o, int s, int r);
    int base; base = (s == 0) ? 0 : (s == 1) ? 1 : 3;
    return m[perms[o][base + r / 30]][r % 30];
  endfunction
endmodule
