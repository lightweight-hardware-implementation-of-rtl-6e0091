// tb_mts_out_stage -- checks butterfly, DCT-VIII reversal, rounding and clipping.
//
// Random E/O banks (small values, and large ones that must clip) in every type/size and
// both directions. Expected outputs computed here: DCT-II Y[k] = E[k]+O[k] for k < n/2 and
// Y[k] = E[n-1-k]-O[n-1-k] above; DST-VII Y[j] = E[j]; DCT-VIII Y[j] = E[n-1-j]; then
// (Y + 2^(s-1)) >> s with s = 7 (vertical) or 10 (horizontal, 10-bit video) and clipping
// to 16 bits. H.264 4x4 mode: Y[j] = E[j], horizontal pass (Y + [j >= 2]) >> 1, vertical
// pass (Y + 64 + [j >= 2]) >> 7, both clipped to 16 bits. Outputs beyond n must be zero. Checks the load pulse one cycle after done.
module tb_mts_out_stage;
  import mts_pkg::*;
  import mts_ref_pkg::*;

  logic clk = 0, rst_n = 0, done = 0, load;
  ctl_t ctl_in = '0, ctl_out;
  logic signed [31:0] acc_e [N_MULT];
  logic signed [31:0] acc_o [N_MULT];
  logic signed [15:0] y [2*N_MULT];
  int checks = 0, failures = 0, clipped = 0;

  mts_out_stage dut (.*);
  always #5 clk = ~clk;

  initial begin
    foreach (acc_e[m]) begin acc_e[m] = 0; acc_o[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 600; it++) begin
      automatic int tt = $urandom_range(0, 2);
      automatic int sz = (tt == 0) ? $urandom_range(0, 4) : $urandom_range(0, 3);
      automatic bit avc = (it % 5 == 2);
      automatic int n;
      automatic bit dir = $urandom_range(0, 1);
      automatic int big = (it % 4 == 0) ? (1 << 27) : (1 << 20);
      automatic int sh = dir ? 7 : 10;
      longint e [64], o [64], yy;
      if (avc) sz = 0;
      n = 4 << sz;
      for (int m = 0; m < N_MULT; m++) begin
        e[m] = longint'($urandom_range(0, 2 * big)) - big;
        o[m] = longint'($urandom_range(0, 2 * big)) - big;
      end
      @(posedge clk);
      for (int m = 0; m < N_MULT; m++) begin acc_e[m] <= 32'(e[m]); acc_o[m] <= 32'(o[m]); end
      ctl_in <= '{valid: 1'b1, first: 1'b0, last: 1'b1, ttype: tr_type_e'(tt), tsize: tr_size_e'(sz),
                  dir: dir, avc: avc, cyc: 5'd0};
      done <= 1;
      @(posedge clk);
      done <= 0;
      @(negedge clk);
      checks++;
      if (!load) begin failures++; $display("FAIL no load"); end
      for (int j = 0; j < 64; j++) begin
        if (j >= n) yy = 0;
        else if (avc) yy = e[j];
        else if (tt == 0) yy = (j < n/2) ? e[j] + o[j] : e[n-1-j] - o[n-1-j];
        else if (tt == 1) yy = e[n-1-j];
        else yy = e[j];
        if (j < n && avc) yy = dir ? clip((yy + 64 + longint'(j >= 2)) >>> 7, 16) : clip((yy + longint'(j >= 2)) >>> 1, 16);
        else begin
          if (j < n && round_clip(yy, sh, 16) != ((yy + (longint'(1) << (sh-1))) >>> sh)) clipped++;
          if (j < n) yy = round_clip(yy, sh, 16);
        end
        checks++;
        if (y[j] != yy) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d n%0d d%0d j%0d: %0d exp %0d", tt, n, dir, j, y[j], yy);
        end
      end
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (load) begin failures++; $display("FAIL load stuck"); end
    end
    checks++;
    if (clipped == 0) begin failures++; $display("FAIL clipping never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
