// tb_mts_2d -- 2-D inverse transforms through two passes of the core (default parameters).
//
// The core is 1-D; a decoder folds a 2-D transform through it with a transpose memory in
// between. This testbench plays the transpose memory: it sends the N columns of a
// coefficient block as a vertical pass (tr_dir = 1), collects data_out_inter, transposes
// it, sends its N rows as a horizontal pass (tr_dir = 0) and collects data_out_fin. The
// result is compared with a 2-D reference: vertical sums rounded by 7 bits and clipped to
// 16 bits, then horizontal sums rounded by 10 bits (10-bit video) and clipped to 16 bits.
// Blocks: every DCT-II size 4..64 and the four DST-VII/DCT-VIII pairs at 4..32 points,
// with VVC zero-out (only the 32x32 low-frequency corner of a 64x64 DCT-II block and the
// 16x16 corner of a 32x32 DST-VII/DCT-VIII block are coded; the zero half of each vector is
// not sent). Also 40 H.264 4x4 blocks (avc_vvc = 0): rows first as the standard orders it
// (horizontal pass on data_out_inter, then vertical pass on data_out_fin), compared with
// the standard's butterfly procedure and its final (h + 32) >> 6.
// Also checks that each pass streams its N^2 outputs in N^2/2 consecutive cycles.
module tb_mts_2d;
  import mts_pkg::*;
  import mts_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic input_enable = 0, avc_vvc = 1, tr_dir = 0;
  logic [1:0] tr_type = 0;
  logic [2:0] tr_size = 0;
  logic [31:0] data_in = 0;
  logic data_enable, data_valid;
  logic [31:0] data_out_inter, data_out_fin;

  mts_core dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, blocks = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // output capture
  logic tr_dir_q = 0;   // 1: capture data_out_inter
  int cap [4096];
  int ncap = 0;
  longint t_first = -1, t_last = -1;
  always @(posedge clk) begin
    if (data_valid) begin
      if (t_first < 0) t_first = cycle;
      t_last = cycle;
      cap[ncap]     = tr_dir_q ? int'($signed(data_out_inter[15:0]))  : int'($signed(data_out_fin[15:0]));
      cap[ncap + 1] = tr_dir_q ? int'($signed(data_out_inter[31:16])) : int'($signed(data_out_fin[31:16]));
      ncap += 2;
    end
  end

  int coefs [64][64];   // [vertical freq][horizontal freq]
  int inter [64][64];   // [row y][column u] after the vertical pass
  int res   [64][64];   // [row y][column x]

  // send n vectors; vec(k) = vector k; one value per cycle when 'one'
  // avc = 1: H.264 4x4 pass (avc_vvc = 0), whose intermediate pass is the horizontal one
  task automatic pass(int tt, int sz, bit dir, int vecs[64][64], bit avc = 0);
    int n = 4 << sz;
    bit one = !avc && ((tt == 0) ? (n == 64) : (n == 32));
    ncap = 0; t_first = -1; t_last = -1; tr_dir_q = dir ^ avc;
    input_enable <= 1; tr_type <= 2'(tt); tr_size <= 3'(sz); tr_dir <= dir; avc_vvc <= !avc;
    @(posedge clk);
    input_enable <= 0;
    for (int k = 0; k < n; k++)
      for (int c = 0; c < n/2; c++) begin
        data_in <= one ? {16'h0, 16'(vecs[k][c])} : {16'(vecs[k][2*c+1]), 16'(vecs[k][2*c])};
        @(posedge clk);
      end
    repeat (LATENCY + 4) @(posedge clk);
    checks++;
    if (ncap != n*n || t_last - t_first + 1 != n*n/2) begin
      failures++;
      $display("FAIL pass n%0d: %0d outputs over %0d cycles", n, ncap, t_last - t_first + 1);
    end
  endtask

  task automatic block2d(int sz, int th, int tv, int amp);
    int n = 4 << sz;
    int nz = ((th == 0) ? (n == 64) : (n == 32)) ? n/2 : n;
    int vecs [64][64];
    blocks++;
    foreach (coefs[a, b]) coefs[a][b] = 0;
    for (int v = 0; v < nz; v++)
      for (int u = 0; u < nz; u++)
        if ($urandom_range(0, 2) == 0) coefs[v][u] = int'($urandom_range(0, 2*amp)) - amp;
    // vertical pass: vector u = column u of the coefficients
    foreach (vecs[a, b]) vecs[a][b] = 0;
    for (int u = 0; u < n; u++) for (int v = 0; v < n; v++) vecs[u][v] = coefs[v][u];
    pass(tv, sz, 1, vecs);
    for (int u = 0; u < n; u++) for (int y = 0; y < n; y++) inter[y][u] = cap[u*n + y];
    // horizontal pass: vector y = row y of the intermediate block
    for (int y = 0; y < n; y++) for (int u = 0; u < n; u++) vecs[y][u] = inter[y][u];
    pass(th, sz, 0, vecs);
    for (int y = 0; y < n; y++) for (int x = 0; x < n; x++) res[y][x] = cap[y*n + x];
    // reference
    for (int y = 0; y < n; y++) begin
      int g [64];
      for (int u = 0; u < 64; u++) g[u] = 0;
      for (int u = 0; u < n; u++) begin
        int col [64];
        for (int v = 0; v < 64; v++) col[v] = (v < n) ? coefs[v][u] : 0;
        g[u] = int'(round_clip(ref_sum(tv, n, col, y), 7, 16));
        checks++;
        if (inter[y][u] != g[u]) begin
          failures++;
          if (failures < 10) $display("FAIL inter n%0d y%0d u%0d: %0d exp %0d", n, y, u, inter[y][u], g[u]);
        end
      end
      for (int x = 0; x < n; x++) begin
        int e = int'(round_clip(ref_sum(th, n, g, x), 10, 16));
        checks++;
        if (res[y][x] != e) begin
          failures++;
          if (failures < 10) $display("FAIL res n%0d y%0d x%0d: %0d exp %0d", n, y, x, res[y][x], e);
        end
      end
    end
  endtask

  // H.264 4x4: rows (horizontal pass) first, then columns; reference is the standard's
  // butterfly applied the same way, with r = (h + 32) >> 6 at the end
  task automatic block_avc(int amp);
    int vecs [64][64];
    int f [4][4];
    blocks++;
    foreach (coefs[a, b]) coefs[a][b] = 0;
    for (int v = 0; v < 4; v++)
      for (int u = 0; u < 4; u++)
        if ($urandom_range(0, 2) != 0) coefs[v][u] = int'($urandom_range(0, 2*amp)) - amp;
    foreach (vecs[a, b]) vecs[a][b] = 0;
    for (int v = 0; v < 4; v++) for (int u = 0; u < 4; u++) vecs[v][u] = coefs[v][u];
    pass($urandom_range(0, 2), 0, 0, vecs, 1);
    for (int v = 0; v < 4; v++) for (int x = 0; x < 4; x++) inter[v][x] = cap[v*4 + x];
    for (int x = 0; x < 4; x++) for (int v = 0; v < 4; v++) vecs[x][v] = inter[v][x];
    pass($urandom_range(0, 2), 0, 1, vecs, 1);
    for (int x = 0; x < 4; x++) for (int y = 0; y < 4; y++) res[y][x] = cap[x*4 + y];
    for (int v = 0; v < 4; v++) begin
      int row [64];
      foreach (row[k]) row[k] = (k < 4) ? coefs[v][k] : 0;
      for (int x = 0; x < 4; x++) begin
        f[v][x] = int'(avc4_1d(row, x, 1'b0));
        checks++;
        if (inter[v][x] != f[v][x]) begin
          failures++;
          if (failures < 10) $display("FAIL avc row %0d x%0d: %0d exp %0d", v, x, inter[v][x], f[v][x]);
        end
      end
    end
    for (int x = 0; x < 4; x++) begin
      int col [64];
      foreach (col[k]) col[k] = (k < 4) ? f[k][x] : 0;
      for (int y = 0; y < 4; y++) begin
        int e = int'(avc4_1d(col, y, 1'b1));
        checks++;
        if (res[y][x] != e) begin
          failures++;
          if (failures < 10) $display("FAIL avc res y%0d x%0d: %0d exp %0d", y, x, res[y][x], e);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int sz = 0; sz <= 4; sz++) block2d(sz, 0, 0, 2000);
    for (int sz = 0; sz <= 3; sz++) begin
      block2d(sz, 2, 2, 2000);
      block2d(sz, 1, 2, 2000);
      block2d(sz, 2, 1, 2000);
      block2d(sz, 1, 1, 2000);
    end
    repeat (40) block_avc(($urandom_range(0, 1) ? 2000 : 8000));
    $display("2-D blocks: %0d", blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
