// tb_mts_coef_rom -- checks every word of the coefficient ROM.
//
// The expected word is assembled from the reference matrices of mts_ref_pkg (computed
// from the cos/sin definitions) following the documented word layout: 64-point DCT-II
// rows at 0..31, DCT-II 32/16/8/4 (even row in slots 0..15, odd row in 16..31) at 32, 48,
// 56, 60, DST-VII 32 rows at 62..77, DST-VII 16/8/4 row pairs at 78, 86, 90, and the
// H.264 4x4 transform times 2 (from the standard's butterfly) at 92, 93. Also checks
// the one-cycle read latency and that en=0 holds the output.
module tb_mts_coef_rom;
  import mts_pkg::*;
  import mts_ref_pkg::*;

  logic clk = 0;
  logic en = 0;
  logic [ROM_AW-1:0] addr = 0;
  logic [ROM_W-1:0] word;
  int checks = 0, failures = 0;

  mts_coef_rom dut (.*);
  always #5 clk = ~clk;

  // H.264 4x4 basis i times 2: the standard's butterfly applied to an impulse of height 2
  function automatic int avc_coef(int i, int j);
    int d [64];
    foreach (d[k]) d[k] = 0;
    d[i] = 2;
    return int'(avc4_1d(d, j, 1'b0));
  endfunction

  function automatic logic [ROM_W-1:0] expect_word(int a);
    logic [ROM_W-1:0] w = '0;
    int tt, n, c, pair;
    if (a < 32)      begin tt = 0; n = 64; c = a;      pair = 0; end
    else if (a < 48) begin tt = 0; n = 32; c = a - 32; pair = 1; end
    else if (a < 56) begin tt = 0; n = 16; c = a - 48; pair = 1; end
    else if (a < 60) begin tt = 0; n = 8;  c = a - 56; pair = 1; end
    else if (a < 62) begin tt = 0; n = 4;  c = a - 60; pair = 1; end
    else if (a < 78) begin tt = 2; n = 32; c = a - 62; pair = 0; end
    else if (a < 86) begin tt = 2; n = 16; c = a - 78; pair = 1; end
    else if (a < 90) begin tt = 2; n = 8;  c = a - 86; pair = 1; end
    else if (a < 92) begin tt = 2; n = 4;  c = a - 90; pair = 1; end
    else             begin tt = 3; n = 4;  c = a - 92; pair = 1; end
    for (int m = 0; m < 32; m++) begin
      int v = 0;
      int cols = (tt == 0) ? n / 2 : n;
      if (!pair) v = coef(tt, n, c, m);
      else if (tt == 3 && m % 16 < 4) v = avc_coef(2*c + m/16, m % 16);
      else if (tt != 3 && m % 16 < cols) v = coef(tt, n, 2*c + m/16, m % 16);
      w[8*m +: 8] = 8'(v);
    end
    return w;
  endfunction

  initial begin
    @(posedge clk);
    for (int a = 0; a < ROM_DEPTH; a++) begin
      en <= 1; addr <= ROM_AW'(a);
      @(posedge clk);
      en <= 0;
      @(negedge clk);
      checks++;
      if (word !== expect_word(a)) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: %h exp %h", a, word, expect_word(a));
      end
      // en low: word must hold
      addr <= ROM_AW'((a + 7) % ROM_DEPTH);
      @(posedge clk); @(negedge clk);
      checks++;
      if (word !== expect_word(a)) begin failures++; $display("FAIL hold at %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
