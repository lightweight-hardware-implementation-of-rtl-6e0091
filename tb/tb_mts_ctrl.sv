// tb_mts_ctrl -- checks the input controller's sequencing.
//
// Launches blocks of every type/size, some back to back (input_enable in the last data
// cycle), some after idle gaps, and checks against an independent count: valid for
// exactly N^2/2 cycles starting the cycle after input_enable, first/last at the row
// boundaries (every N/2 cycles), the cycle index, the sampled configuration, and the ROM
// address = start of the size's table + cycle index. Includes H.264 4x4 blocks.
module tb_mts_ctrl;
  import mts_pkg::*;

  logic clk = 0, rst_n = 0, input_enable = 0, tr_dir = 0, avc_vvc = 1;
  tr_type_e tr_type = TR_DCT2;
  tr_size_e tr_size = SZ4;
  ctl_t ctl;
  logic [ROM_AW-1:0] rom_addr;
  logic busy;
  int checks = 0, failures = 0;

  mts_ctrl dut (.*);
  always #5 clk = ~clk;

  function automatic int exp_base(int tt, int sz);
    int dct [5] = '{60, 56, 48, 32, 0};
    int dst [4] = '{90, 86, 78, 62};
    if (tt == 3) return 92;
    return (tt == 0) ? dct[sz] : dst[sz];
  endfunction

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", m); end
  endtask

  // tt = 3: H.264 4x4 (avc_vvc = 0), with tr_type set to DCT-VIII, which must be ignored
  task automatic block(int tt, int sz, bit dir, bit b2b_next);
    int n = 4 << sz;
    bit avc = (tt == 3);
    input_enable <= 1; tr_type <= avc ? TR_DCT8 : tr_type_e'(tt); tr_size <= tr_size_e'(sz);
    tr_dir <= dir; avc_vvc <= !avc;
    @(posedge clk);
    input_enable <= 0;
    for (int k = 0; k < n * n / 2; k++) begin
      @(negedge clk);
      chk(ctl.valid && busy, $sformatf("valid missing t%0d s%0d k%0d", tt, sz, k));
      chk(ctl.first == (k % (n/2) == 0), "first");
      chk(ctl.last == (k % (n/2) == n/2 - 1), "last");
      chk(int'(ctl.cyc) == k % (n/2), "cyc");
      chk((avc || int'(ctl.ttype) == tt) && int'(ctl.tsize) == sz && ctl.dir == dir
          && ctl.avc == avc, "config");
      chk(int'(rom_addr) == exp_base(tt, sz) + k % (n/2),
          $sformatf("rom_addr %0d exp %0d", rom_addr, exp_base(tt, sz) + k % (n/2)));
      if (k == n * n / 2 - 1 && b2b_next) return;   // caller raises next input_enable now
      @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int sz = 0; sz < 5; sz++) block(0, sz, sz[0], 1);
    for (int sz = 3; sz >= 0; sz--) block(2, sz, 1, 1);
    block(3, 0, 0, 1);
    block(3, 0, 1, 0);
    for (int sz = 0; sz < 4; sz++) block(1, sz, 0, 0);
    // idle after the last block
    @(posedge clk);
    repeat (5) begin
      @(negedge clk);
      chk(!ctl.valid && !busy, "valid while idle");
      @(posedge clk);
    end
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
