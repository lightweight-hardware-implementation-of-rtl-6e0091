// mts_accum -- accumulators of the RM architecture (adders and feedback lines).
//
// Two banks of 32 accumulators, E (even part) and O (odd part). Each data cycle adds the
// 32 registered products into them; the first cycle of a row starts from zero instead of
// the fed-back value. Routing by mode:
//   DCT-II 64       : one coefficient per cycle, index c; even c -> E[m] += p[m],
//                     odd c -> O[m] += p[m] (E^32 and O^32 of the butterfly), m = 0..31
//   DCT-II 4..32    : E[m] += p[m] (X0, even coefficient), O[m] += p[16+m] (X1, odd), m < 16
//   DST/DCT-VIII 32 : E[m] += p[m], m = 0..31 (one coefficient per cycle)
//   DST/DCT-VIII 4..16: E[m] += p[m] + p[16+m], m < 16 (both coefficients of the cycle)
//   H.264 4x4       : as DST/DCT-VIII 4 (no even/odd split)
// Slots a size does not use get zero coefficients from the ROM and stay zero.
// Timing: one cycle; done pulses in the cycle after the last cycle of a row, while
// E/O hold the finished row and ctl_out the row's configuration. In the next cycle the
// banks already accumulate the following row, so the result must be taken at once.
module mts_accum
  import mts_pkg::*;
#(
  parameter int PW = 25
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  ctl_t                    ctl_in,
  input  logic signed [PW-1:0]    prod [N_MULT],
  output ctl_t                    ctl_out,
  output logic                    done,
  output logic signed [ACC_W-1:0] acc_e [N_MULT],
  output logic signed [ACC_W-1:0] acc_o [N_MULT]
);

  logic signed [ACC_W-1:0] be [N_MULT];
  logic signed [ACC_W-1:0] bo [N_MULT];
  logic signed [ACC_W-1:0] ne [N_MULT];
  logic signed [ACC_W-1:0] no [N_MULT];
  logic signed [ACC_W-1:0] p  [N_MULT];

  always_comb begin
    for (int m = 0; m < N_MULT; m++) begin
      p[m]  = ACC_W'(prod[m]);
      be[m] = ctl_in.first ? '0 : acc_e[m];
      bo[m] = ctl_in.first ? '0 : acc_o[m];
      ne[m] = be[m];
      no[m] = bo[m];
    end
    if (ctl_in.ttype == TR_DCT2 && !ctl_in.avc) begin
      if (ctl_in.tsize == SZ64) begin
        for (int m = 0; m < N_MULT; m++) begin
          if (ctl_in.cyc[0]) no[m] = bo[m] + p[m];
          else               ne[m] = be[m] + p[m];
        end
      end else begin
        for (int m = 0; m < N_MULT / 2; m++) begin
          ne[m] = be[m] + p[m];
          no[m] = bo[m] + p[m + N_MULT / 2];
        end
      end
    end else begin
      if (ctl_in.tsize == SZ32 && !ctl_in.avc) begin
        for (int m = 0; m < N_MULT; m++) ne[m] = be[m] + p[m];
      end else begin
        for (int m = 0; m < N_MULT / 2; m++) ne[m] = be[m] + p[m] + p[m + N_MULT / 2];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_out <= '0;
      done    <= 1'b0;
      for (int m = 0; m < N_MULT; m++) begin
        acc_e[m] <= '0;
        acc_o[m] <= '0;
      end
    end else begin
      done <= ctl_in.valid && ctl_in.last;
      if (ctl_in.valid) begin
        ctl_out <= ctl_in;
        for (int m = 0; m < N_MULT; m++) begin
          acc_e[m] <= ne[m];
          acc_o[m] <= no[m];
        end
      end
    end
  end

endmodule
