// tb_mts_accum -- checks the accumulation and its even/odd routing.
//
// Feeds rows of random products, back to back, in every type/size mode, and keeps its
// own model of the expected row sums: for 64-point DCT-II, even cycles sum p[m] into E
// and odd cycles into O; for DCT-II up to 32 points, E[m] sums p[m] and O[m] sums p[16+m];
// for 32-point DST-VII/DCT-VIII, E[m] sums p[m]; for smaller DST/DCT-VIII, E[m] sums
// p[m] + p[16+m], as also for the H.264 4x4 mode whatever tr_type says. At each done pulse (the cycle after a row's last cycle) all used
// accumulators are compared, which also checks the clear at the next row's first cycle.
module tb_mts_accum;
  import mts_pkg::*;

  logic clk = 0, rst_n = 0;
  ctl_t ctl_in = '0, ctl_out;
  logic signed [24:0] prod [N_MULT];
  logic done;
  logic signed [31:0] acc_e [N_MULT];
  logic signed [31:0] acc_o [N_MULT];
  int checks = 0, failures = 0, rows = 0;

  mts_accum dut (.*);
  always #5 clk = ~clk;

  longint me [N_MULT], mo [N_MULT];
  longint he [N_MULT], ho [N_MULT];   // model of the row awaiting its done pulse
  int htt, hsz;
  bit pend = 0;

  initial foreach (prod[m]) prod[m] = '0;

  always @(negedge clk) begin
    if (pend && done) begin
      int n, ue, uo;
      n  = 4 << hsz;
      ue = (htt == 0) ? ((n == 64) ? 32 : n / 2) : n;
      uo = (htt == 0) ? ((n == 64) ? 32 : n / 2) : 0;
      rows++;
      for (int m = 0; m < ue; m++) begin
        checks++;
        if (acc_e[m] != he[m]) begin failures++; if (failures < 10) $display("FAIL E[%0d] %0d exp %0d (t%0d s%0d)", m, acc_e[m], he[m], htt, hsz); end
      end
      for (int m = 0; m < uo; m++) begin
        checks++;
        if (acc_o[m] != ho[m]) begin failures++; if (failures < 10) $display("FAIL O[%0d] %0d exp %0d", m, acc_o[m], ho[m]); end
      end
      pend = 0;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 300; r++) begin
      automatic int tt = $urandom_range(0, 2);
      automatic int sz = (tt == 0) ? $urandom_range(0, 4) : $urandom_range(0, 3);
      automatic bit avc = ($urandom_range(0, 5) == 0);
      automatic int n;
      automatic int et;            // type of the expected routing
      if (avc) sz = 0;
      n  = 4 << sz;
      et = avc ? 2 : tt;
      foreach (me[m]) begin me[m] = 0; mo[m] = 0; end
      for (int c = 0; c < n / 2; c++) begin
        int p [N_MULT];
        foreach (p[m]) p[m] = int'($urandom_range(0, 1 << 23)) - (1 << 22);
        for (int m = 0; m < N_MULT; m++) begin
          if (et == 0 && n == 64) begin
            if (c % 2) mo[m] += p[m]; else me[m] += p[m];
          end else if (et == 0) begin
            if (m < 16) begin me[m] += p[m]; mo[m] += p[m + 16]; end
          end else if (n == 32) me[m] += p[m];
          else if (m < 16) me[m] += p[m] + p[m + 16];
        end
        @(posedge clk);
        foreach (p[m]) prod[m] <= 25'(p[m]);
        ctl_in <= '{valid: 1'b1, first: (c == 0), last: (c == n/2 - 1), ttype: tr_type_e'(tt),
                    tsize: tr_size_e'(sz), dir: 1'b0, avc: avc, cyc: 5'(c)};
      end
      // the row's done pulse follows the edge after its last cycle
      @(posedge clk);
      he = me; ho = mo; htt = et; hsz = sz; pend = 1;
      ctl_in.valid <= 1'b0;
      ctl_in.first <= 1'b0;
      ctl_in.last <= 1'b0;
      if (r % 3 == 0) begin
        @(posedge clk);   // idle gap: banks must hold
      end
    end
    @(posedge clk); @(posedge clk);
    checks++;
    if (rows != 300) begin failures++; $display("FAIL %0d done pulses", rows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
