// tb_mts_input_stage -- checks sample routing and the DCT-VIII sign pre-processing.
//
// Random coefficients in every type/size mode and cycle parity; expected X0/X1 worked
// out here: two-coefficient modes X0 = lane 0, X1 = lane 1; one-coefficient modes (64-point
// DCT-II, 32-point DST-VII/DCT-VIII) X0 = X1 = lane 0; DCT-VIII negates the coefficient of
// odd index (lane 1, or lane 0 in odd cycles of the one-coefficient mode); H.264 4x4 mode
// (any tr_type) passes both lanes unchanged. Includes -32768.
// Checks the one-cycle latency, the delayed control word and zero outputs when not valid.
module tb_mts_input_stage;
  import mts_pkg::*;

  logic clk = 0, rst_n = 0;
  ctl_t ctl_in = '0, ctl_out;
  logic [31:0] data_in = 0;
  logic signed [16:0] x0, x1;
  int checks = 0, failures = 0;

  mts_input_stage dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 3000; it++) begin
      automatic int tt = $urandom_range(0, 2);
      automatic int sz = (tt == 0) ? $urandom_range(0, 4) : $urandom_range(0, 3);
      automatic int cyc = $urandom_range(0, 31);
      automatic int a = int'($urandom_range(0, 65535)) - 32768;
      automatic int b = int'($urandom_range(0, 65535)) - 32768;
      automatic bit vld = ($urandom_range(0, 7) != 0);
      automatic bit avc = ($urandom_range(0, 5) == 0);
      automatic bit one;
      int e0, e1;
      if (avc) sz = 0;
      one = !avc && ((tt == 0) ? (sz == 4) : (sz == 3));
      if (it % 50 == 0) a = -32768;
      if (it % 50 == 1) b = -32768;
      @(posedge clk);
      ctl_in <= '{valid: vld, first: 1'b0, last: 1'b0, ttype: tr_type_e'(tt),
                  tsize: tr_size_e'(sz), dir: 1'b0, avc: avc, cyc: 5'(cyc)};
      data_in <= {16'(b), 16'(a)};
      e0 = a; e1 = one ? a : b;
      if (tt == 1 && !avc) begin
        if (!one) e1 = -b;
        else if (cyc % 2 == 1) begin e0 = -a; e1 = -a; end
      end
      if (!vld) begin e0 = 0; e1 = 0; end
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (x0 != e0 || x1 != e1 || ctl_out.valid != vld || int'(ctl_out.cyc) != cyc) begin
        failures++;
        if (failures < 10) $display("FAIL t%0d s%0d c%0d: %0d %0d exp %0d %0d", tt, sz, cyc, x0, x1, e0, e1);
      end
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
