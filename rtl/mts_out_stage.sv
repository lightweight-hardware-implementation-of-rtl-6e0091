// mts_out_stage -- butterfly recombination, DCT-VIII post-processing, rounding, clipping.
//
// Takes the finished E/O accumulator banks of one row (done pulse from mts_accum) and
// forms the n outputs of the row:
//   DCT-II   : Y[k] = E[k] + O[k],  Y[n-1-k] = E[k] - O[k],  k < n/2  (butterfly output)
//   DST-VII  : Y[j] = E[j]
//   DCT-VIII : Y[j] = E[n-1-j]   (Lambda, order reversal; the sign change was at the input)
// Each Y is then rounded and shifted, (Y + 2^(s-1)) >> s, and clipped to the output
// width: s = 7 and N_BI bits for the vertical pass (tr_dir = 1), whose result is the
// intermediate data_out_inter; s = 20 - BIT_DEPTH and N_BO bits for the horizontal pass,
// the final residual on data_out_fin. These shifts are the VVC/HEVC ones; which direction
// is the intermediate one, and the clipping of the final result, are this design's
// choices (the paper only says the output port depends on the direction).
// In H.264 mode (ctl.avc) Y[j] = E[j] and the order of the passes is the standard's,
// rows first: the horizontal pass is the intermediate one. The ROM holds the transform
// times 2, so Y must be halved the way the standard's butterfly rounds its d>>1 terms:
// outputs 0 and 1 add a halved term, which is floor(Y / 2); outputs 2 and 3 subtract one,
// and -floor(d / 2) = floor((-d + 1) / 2), so they take (Y + 1) >> 1. The vertical pass
// folds the same halving into H.264's (h + 32) >> 6: (Y + 64) >> 7 for outputs 0 and 1,
// (Y + 65) >> 7 for 2 and 3. The results are clipped to N_BI and N_BO bits.
// Timing: registered, load pulses one cycle after done with y[] valid for that cycle.
module mts_out_stage
  import mts_pkg::*;
#(
  parameter int N_BI      = 16,
  parameter int N_BO      = 16,
  parameter int BIT_DEPTH = 10,
  parameter int OW        = (N_BI > N_BO) ? N_BI : N_BO
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    done,
  input  ctl_t                    ctl_in,
  input  logic signed [ACC_W-1:0] acc_e [N_MULT],
  input  logic signed [ACC_W-1:0] acc_o [N_MULT],
  output logic                    load,
  output ctl_t                    ctl_out,
  output logic signed [OW-1:0]    y [2*N_MULT]
);

  localparam int FIN_SHIFT = 20 - BIT_DEPTH;

  logic signed [ACC_W-1:0] yb [2*N_MULT];
  logic signed [OW-1:0]    yr [2*N_MULT];

  // (v + ofs) >> sh, clipped to w bits
  function automatic logic signed [OW-1:0] round_clip(logic signed [ACC_W-1:0] v, int sh, int w,
                                                      int ofs);
    logic signed [ACC_W-1:0] r, hi, lo;
    r  = (v + ACC_W'(ofs)) >>> sh;
    hi = (ACC_W'(1) <<< (w - 1)) - 1;
    lo = -(ACC_W'(1) <<< (w - 1));
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return OW'(r);
  endfunction

  always_comb begin
    int n, h;
    n = npoints(ctl_in.tsize);
    h = n / 2;
    for (int j = 0; j < 2 * N_MULT; j++) begin
      yb[j] = '0;
      if (j < n && ctl_in.avc) begin
        yb[j] = acc_e[j % N_MULT];
      end else if (j < n) begin
        case (ctl_in.ttype)
          TR_DCT2: yb[j] = (j < h) ? acc_e[j % N_MULT] + acc_o[j % N_MULT]
                                   : acc_e[(n - 1 - j) % N_MULT] - acc_o[(n - 1 - j) % N_MULT];
          TR_DCT8: yb[j] = acc_e[(n - 1 - j) % N_MULT];
          default: yb[j] = acc_e[j % N_MULT];
        endcase
      end
      if (ctl_in.avc)
        yr[j] = !ctl_in.dir ? round_clip(yb[j], 1, N_BI, (j >= 2) ? 1 : 0)
                            : round_clip(yb[j], 7, N_BO, (j >= 2) ? 65 : 64);
      else
        yr[j] = ctl_in.dir ? round_clip(yb[j], 7, N_BI, 1 << 6)
                           : round_clip(yb[j], FIN_SHIFT, N_BO, 1 << (FIN_SHIFT - 1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load    <= 1'b0;
      ctl_out <= '0;
      for (int j = 0; j < 2 * N_MULT; j++) y[j] <= '0;
    end else begin
      load <= done;
      if (done) begin
        ctl_out <= ctl_in;
        for (int j = 0; j < 2 * N_MULT; j++) y[j] <= yr[j];
      end
    end
  end

endmodule
