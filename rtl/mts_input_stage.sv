// mts_input_stage -- sample routing (sel) and DCT-VIII pre-processing.
//
// data_in carries two coefficients per cycle, lane 0 in the low half. For the zeroed-out
// sizes (64-point DCT-II, 32-point DST-VII/DCT-VIII) only one coefficient arrives per
// cycle, in lane 0, and both multiplier inputs X0 and X1 carry it (the paper's "sel
// disabled"); otherwise X0 takes lane 0 and X1 lane 1 ("sel enabled").
// DCT-VIII is computed on the DST-VII kernel: x = Lambda * S7^T * Gamma * y, so Gamma,
// the sign change (-1)^i of coefficient i, is applied here to the inputs, and Lambda,
// the order reversal, to the outputs in mts_out_stage.
// The paper's figure draws the reversal before the kernel and the sign change after it,
// while its equation puts the sign change first; the equation is followed, being the
// order that reproduces the DCT-VIII matrix.
// In H.264 mode both lanes are used and no sign change is made.
// Outputs are registered (one cycle), 17 bits wide so that -(-32768) is exact; the
// control word is delayed with them.
module mts_input_stage
  import mts_pkg::*;
#(
  parameter int N_BI = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ctl_t                 ctl_in,
  input  logic [2*N_BI-1:0]    data_in,
  output ctl_t                 ctl_out,
  output logic signed [N_BI:0] x0,
  output logic signed [N_BI:0] x1
);

  logic signed [N_BI:0] l0, l1, n0, n1;
  logic                 sel;

  always_comb begin
    l0  = (N_BI+1)'($signed(data_in[N_BI-1:0]));
    l1  = (N_BI+1)'($signed(data_in[2*N_BI-1:N_BI]));
    sel = ctl_in.avc || !half_rate(ctl_in.ttype, ctl_in.tsize);
    n0  = l0;
    n1  = sel ? l1 : l0;
    if (ctl_in.ttype == TR_DCT8 && !ctl_in.avc) begin
      if (sel) n1 = -l1;                      // index 2c+1 is odd
      else if (ctl_in.cyc[0]) begin           // index c
        n0 = -l0;
        n1 = -l0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_out <= '0;
      x0      <= '0;
      x1      <= '0;
    end else begin
      ctl_out <= ctl_in;
      x0      <= ctl_in.valid ? n0 : '0;
      x1      <= ctl_in.valid ? n1 : '0;
    end
  end

endmodule
