// tb_mts_core -- end-to-end test of the 1-D inverse MTS core at its default parameters.
//
// Sends a sequence of blocks back to back (each input_enable in the last data cycle of
// the previous block) covering every type/size pair, both directions, and size changes in
// both directions between consecutive blocks. Coefficients are random, with the
// zeroed-out halves of 64-point DCT-II and 32-point DST-VII/DCT-VIII omitted, and some
// blocks use full-scale values so the output clipping is exercised.
// A scoreboard holds, for every row, the expected outputs from mts_ref_pkg and the cycle
// its first output pair must appear (LATENCY cycles after the row's first data cycle).
// Checked: every output pair, data_valid timing, data_enable on the last pair of each row,
// the unused output port staying zero, the row throughput (n/2 cycles per row, 2 samples
// per cycle, no gaps). Mechanisms counted (each must occur): every type x size, the
// one-coefficient-per-cycle (zero-out) mode, DCT-VIII pre/post-processing, a smaller row
// following a larger one (delay line holding it back), vertical and horizontal passes,
// output clipping, the H.264 4x4 mode (avc_vvc = 0, against the standard's butterfly,
// rows as the intermediate pass).
module tb_mts_core;
  import mts_pkg::*;
  import mts_ref_pkg::*;

  localparam int N_BI = 16, N_BO = 16, BIT_DEPTH = 10;

  logic clk = 0, rst_n = 0;
  logic input_enable = 0, avc_vvc = 1, tr_dir = 0;
  logic [1:0] tr_type = 0;
  logic [2:0] tr_size = 0;
  logic [2*N_BI-1:0] data_in = 0;
  logic data_enable, data_valid;
  logic [2*N_BI-1:0] data_out_inter;
  logic [2*N_BO-1:0] data_out_fin;

  mts_core dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected output stream, one entry per output pair
  typedef struct {
    longint t;      // cycle the pair must be on the outputs
    int     v0, v1;
    logic   dir;
    logic   last;
  } exp_t;
  exp_t q[$];

  // mechanism counters
  int seen_tt [4][5];
  int n_avc = 0, n_half = 0, n_dct8 = 0, n_shrink = 0, n_vert = 0, n_hor = 0, n_clip = 0;
  int rows_out = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
    end
  endtask

  // drive one block; input_enable is raised in the cycle before the first data
  int prev_n = 0;
  // tt = 3: H.264 4x4 block (avc_vvc = 0; tr_type is driven with DCT-VIII and ignored)
  task automatic run_block(int tt, int sz, bit dir, int amp, int nrows);
    int n = 4 << sz;
    bit avc = (tt == 3);
    int half = avc ? 0 : (tt == 0) ? (n == 64) : (n == 32);
    int y[64];
    int ncoef = half ? n / 2 : n;
    longint s;
    int r;
    seen_tt[tt][sz]++;
    if (half) n_half++;
    if (tt == 1) n_dct8++;
    if (avc) n_avc++;
    if (dir) n_vert++; else n_hor++;
    if (prev_n > n) n_shrink++;
    prev_n = n;
    input_enable <= 1; tr_type <= avc ? 2'd1 : 2'(tt); tr_size <= 3'(sz); tr_dir <= dir;
    avc_vvc <= !avc;
    @(posedge clk);
    input_enable <= 0;
    for (int row = 0; row < n; row++) begin
      foreach (y[i]) y[i] = 0;
      for (int i = 0; i < ncoef; i++) begin
        if (amp == 0) y[i] = ($urandom_range(0, 1) ? 32767 : -32768);
        else          y[i] = int'($urandom_range(0, 2*amp)) - amp;
        if ($urandom_range(0, 3) == 0) y[i] = 0;
      end
      // expected outputs of this row; the row's first data cycle is the next one
      for (int k = 0; k < n / 2; k++) begin
        exp_t e;
        longint a, b;
        int sh = dir ? 7 : 20 - BIT_DEPTH;
        int w  = dir ? N_BI : N_BO;
        if (avc) begin
          // rows first in H.264: the horizontal pass is the intermediate one
          a = avc4_1d(y, 2*k, dir);
          b = avc4_1d(y, 2*k+1, dir);
        end else begin
          a = round_clip(ref_sum(tt, n, y, 2*k), sh, w);
          b = round_clip(ref_sum(tt, n, y, 2*k+1), sh, w);
          s = (ref_sum(tt, n, y, 2*k) + (longint'(1) << (sh-1))) >>> sh;
          if (s != a) n_clip++;
        end
        e.t = cycle + 1 + LATENCY + k;
        e.v0 = int'(a); e.v1 = int'(b); e.dir = dir ^ avc; e.last = (k == n/2 - 1);
        q.push_back(e);
      end
      // send the row: n/2 cycles
      for (int c = 0; c < n / 2; c++) begin
        if (half) data_in <= {16'h0, 16'(y[c])};
        else      data_in <= {16'(y[2*c+1]), 16'(y[2*c])};
        // raise the next block's input_enable in the last data cycle
        if (row == n - 1 && c == n/2 - 1) break;
        @(posedge clk);
      end
    end
  endtask

  // output monitor
  always @(posedge clk) begin
    if (rst_n) begin
      if (q.size() > 0 && q[0].t == cycle) begin
        exp_t e;
        logic signed [15:0] o0, o1;
        e = q.pop_front();
        if (e.dir) begin o0 = data_out_inter[15:0]; o1 = data_out_inter[31:16]; end
        else       begin o0 = data_out_fin[15:0];   o1 = data_out_fin[31:16]; end
        check(data_valid, "data_valid low on an output cycle");
        check(o0 == e.v0 && o1 == e.v1,
              $sformatf("out got %0d,%0d exp %0d,%0d", o0, o1, e.v0, e.v1));
        check(data_enable == e.last, "data_enable");
        check((e.dir ? data_out_fin : data_out_inter) == 0, "idle port not zero");
        if (e.last) rows_out++;
      end else begin
        if (data_valid) begin
          checks++; failures++;
          if (failures < 20) $display("FAIL @%0d: unexpected output (next exp t=%0d)", cycle, q.size() ? q[0].t : -1);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // every type and size, vertical and horizontal, growing then shrinking sizes
    for (int sz = 0; sz <= 4; sz++) run_block(0, sz, sz[0], 3000, 0);
    for (int sz = 3; sz >= 0; sz--) run_block(2, sz, 1, 4000, 0);
    for (int sz = 0; sz <= 3; sz++) run_block(1, sz, 0, 30000, 0);
    run_block(0, 4, 0, 500, 0);
    run_block(1, 0, 1, 0, 0);        // full scale, clips
    run_block(0, 1, 1, 0, 0);
    run_block(2, 3, 0, 0, 0);
    run_block(1, 3, 1, 200, 0);
    run_block(0, 0, 0, 20000, 0);
    run_block(3, 0, 0, 20000, 0);    // H.264 4x4, row pass
    run_block(3, 0, 1, 20000, 0);    // H.264 4x4, column pass
    run_block(3, 0, 0, 0, 0);        // full scale
    run_block(0, 2, 1, 3000, 0);
    @(posedge clk);
    input_enable <= 0;
    repeat (LATENCY + 40) @(posedge clk);
    check(q.size() == 0, "outputs missing");
    for (int t = 0; t < 3; t++)
      for (int s = 0; s <= (t == 0 ? 4 : 3); s++)
        check(seen_tt[t][s] > 0, "type/size not exercised");
    check(n_half > 0, "zero-out mode never used");
    check(n_dct8 > 0, "DCT-VIII never used");
    check(n_avc > 0, "H.264 mode never used");
    check(n_shrink > 0, "no smaller row after a larger one");
    check(n_vert > 0 && n_hor > 0, "direction not exercised");
    check(n_clip > 0, "clipping never exercised");
    $display("mechanisms: zero-out blocks=%0d dct8 blocks=%0d h264 blocks=%0d shrinks=%0d vertical=%0d horizontal=%0d clipped=%0d rows=%0d",
             n_half, n_dct8, n_avc, n_shrink, n_vert, n_hor, n_clip, rows_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
