// tb_mts_delay_line -- checks that every row size leaves with the same delay.
//
// Loads rows of random sizes at the spacing the datapath produces them (a row of n
// outputs is loaded n/2 cycles after the previous load, or later after an idle gap),
// each row carrying recognisable values. A row's n/2 words must appear on consecutive
// cycles, the first one 32 - n/2 cycles after the load edge, so all rows leave back to
// back in load order whatever their sizes. Checked: each word's data, valid, the last flag on the final word of a row,
// the intermediate/final flag (the direction, inverted for H.264 4x4 rows), and that
// nothing else comes out.
module tb_mts_delay_line;
  import mts_pkg::*;

  logic clk = 0, rst_n = 0, load = 0;
  ctl_t ctl_in = '0;
  logic signed [15:0] y [64];
  logic out_valid, out_last, out_dir;
  logic [31:0] out_word;
  int checks = 0, failures = 0, shrinks = 0;
  longint cycle = 0;

  mts_delay_line dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint t; logic [31:0] w; logic last; logic dir; } exp_t;
  exp_t q[$];

  always @(negedge clk) begin
    if (rst_n) begin
      if (q.size() > 0 && q[0].t == cycle) begin
        exp_t e;
        e = q.pop_front();
        checks++;
        if (!out_valid || out_word != e.w || out_last != e.last || out_dir != e.dir) begin
          failures++;
          if (failures < 10) $display("FAIL @%0d: v%0d %h l%0d exp %h l%0d", cycle, out_valid, out_word, out_last, e.w, e.last);
        end
      end else if (out_valid) begin
        checks++; failures++;
        if (failures < 10) $display("FAIL @%0d unexpected word", cycle);
      end
    end
  end

  initial begin
    foreach (y[j]) y[j] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    begin
      int prev = 0;
      for (int r = 0; r < 400; r++) begin
        automatic int sz = $urandom_range(0, 4);
        automatic int n = 4 << sz;
        automatic bit dir = $urandom_range(0, 1);
        automatic bit avc = (sz == 0) && $urandom_range(0, 1);
        if (n < prev) shrinks++;
        prev = n;
        // wait n/2 - 1 cycles (the load comes n/2 cycles after the previous one)
        repeat (n/2 - 1) @(posedge clk);
        if ($urandom_range(0, 9) == 0) repeat ($urandom_range(1, 5)) @(posedge clk);
        for (int j = 0; j < 64; j++) y[j] <= 16'((r << 6) + j);
        ctl_in <= '{valid: 1'b1, first: 1'b0, last: 1'b1, ttype: TR_DCT2, tsize: tr_size_e'(sz),
                    dir: dir, avc: avc, cyc: 5'd0};
        load <= 1;
        // word k is at the output 32 - n/2 + k cycles after the load edge (the next edge);
        // the monitor samples at the negedge, after the cycle counter has advanced
        for (int k = 0; k < n/2; k++) begin
          exp_t e;
          e.t = cycle + 2 + (32 - n/2) + k;
          e.w = {16'((r << 6) + 2*k + 1), 16'((r << 6) + 2*k)};
          e.last = (k == n/2 - 1);
          e.dir = dir ^ avc;   // intermediate: vertical VVC pass, horizontal H.264 pass
          q.push_back(e);
        end
        @(posedge clk);
        load <= 0;
      end
    end
    repeat (40) @(posedge clk);
    checks++;
    if (q.size() != 0 || shrinks == 0) begin failures++; $display("FAIL %0d words missing", q.size()); end
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
