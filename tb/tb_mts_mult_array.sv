// tb_mts_mult_array -- checks the 32 multipliers.
//
// Random 17-bit samples and random signed 8-bit coefficients (including the extremes
// -65536/65535 and -128/127) are applied; each product is
// compared one cycle later with the product computed here (multipliers 0..15 use X0,
// 16..31 use X1). The control word must come out delayed by one cycle.
module tb_mts_mult_array;
  import mts_pkg::*;

  logic clk = 0, rst_n = 0;
  ctl_t ctl_in = '0, ctl_out;
  logic signed [16:0] x0 = 0, x1 = 0;
  logic [ROM_W-1:0] coef = 0;
  logic signed [24:0] prod [N_MULT];
  int checks = 0, failures = 0;

  mts_mult_array dut (.*);
  always #5 clk = ~clk;

  int ex [N_MULT];

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 2000; it++) begin
      automatic int a = int'($urandom_range(0, 131071)) - 65536;
      automatic int b = int'($urandom_range(0, 131071)) - 65536;
      logic [ROM_W-1:0] w;
      if (it == 3) begin a = -65536; b = 65535; end
      for (int m = 0; m < N_MULT; m++) begin
        automatic int c = int'($urandom_range(0, 255)) - 128;
        if (it == 3) c = (m % 2) ? 127 : -128;
        w[8*m +: 8] = 8'(c);
      end
      @(posedge clk);
      x0 <= 17'(a); x1 <= 17'(b); coef <= w;
      ctl_in <= '{valid: 1'b1, first: 1'b0, last: 1'b0, ttype: TR_DCT2, tsize: SZ4, dir: 1'b0, avc: 1'b0, cyc: 5'(it)};
      for (int m = 0; m < N_MULT; m++) ex[m] = (m < 16 ? a : b) * $signed(w[8*m +: 8]);
      @(posedge clk);
      @(negedge clk);
      for (int m = 0; m < N_MULT; m++) begin
        checks++;
        if (prod[m] != ex[m]) begin
          failures++;
          if (failures < 10) $display("FAIL it%0d m%0d: %0d exp %0d", it, m, prod[m], ex[m]);
        end
      end
      checks++;
      if (int'(ctl_out.cyc) != it % 32) failures++;
    end
    repeat (3) @(posedge clk);
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
