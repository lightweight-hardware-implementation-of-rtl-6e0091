// mts_core -- 1-D inverse MTS transform core (regular-multiplier architecture).
//
// Computes, on each row (N-point vector) of a block, the 1-D inverse VVC transform
// x = B^T y: DCT-II of 4, 8, 16, 32 or 64 points, DST-VII or DCT-VIII of 4, 8, 16 or 32
// points (HEVC's DCT-II and 4-point DST-VII are the same integer transforms). A 2-D
// transform is two passes through the core, vertical then horizontal, with a transpose
// memory between them outside this module.
//
// Architecture (input-serial, output-parallel): each cycle one or two input coefficients
// are multiplied by the matching ROM rows (32 coefficients, one per multiplier) and
// accumulated into the output vector. DCT-II uses its even/odd (butterfly) split, so
// n/2 accumulators of each half suffice and the outputs are E+O and E-O; DCT-VIII reuses
// the DST-VII kernel with a sign change at the input and a reversal at the output. The
// 64-point DCT-II and 32-point DST-VII/DCT-VIII keep only their lower half of
// coefficients (VVC zero-out), which lets them take one coefficient per cycle and still
// fill all 32 multipliers. Every row thus takes n/2 cycles and every size gives two output
// samples per cycle, with no stalls: an N x N block takes N^2/2 cycles.
//
// Pipeline: mts_ctrl -> mts_input_stage | mts_coef_rom -> mts_mult_array -> mts_accum
// -> mts_out_stage -> mts_delay_line. The delay line brings all sizes to one latency:
// the first output pair of a row appears LATENCY = 36 cycles after the row's first
// data_in cycle (37 after input_enable for the first row of a block).
//
// Interface (the paper's interface table, plus data_valid):
//   input_enable  one-cycle pulse; tr_type/tr_size/tr_dir sampled with it; data_in
//                 starts the next cycle and runs N^2/2 cycles without gaps
//   data_in       two coefficients per cycle, lane 0 in bits N_BI-1:0; one coefficient in
//                 lane 0 for 64-point DCT-II and 32-point DST-VII/DCT-VIII
//   data_out_inter / data_out_fin   two results per cycle, lane 0 low; inter carries the
//                 vertical pass (shift 7), fin the horizontal pass (shift 20-BIT_DEPTH);
//                 the other port is zero (H.264 mode: see avc_vvc)
//   data_enable   pulse with the last output pair of each row (end of the N points)
//   data_valid    high while an output pair is present (added for convenience)
//   avc_vvc       1: HEVC/VVC transforms as above. 0: H.264 4x4 inverse transform (tr_size
//                 must be 0, tr_type is ignored); rows first, so in this mode the
//                 horizontal pass is the intermediate one (data_out_inter, exact halving)
//                 and the vertical pass the final one ((x + 32) >> 6 of H.264). The H.264
//                 8x8 transform is not implemented.
module mts_core
  import mts_pkg::*;
#(
  parameter int N_BI      = 16,
  parameter int N_BO      = 16,
  parameter int BIT_DEPTH = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              input_enable,
  input  logic              avc_vvc,
  input  logic [1:0]        tr_type,
  input  logic [2:0]        tr_size,
  input  logic              tr_dir,
  input  logic [2*N_BI-1:0] data_in,
  output logic              data_enable,
  output logic              data_valid,
  output logic [2*N_BI-1:0] data_out_inter,
  output logic [2*N_BO-1:0] data_out_fin
);

  localparam int OW = (N_BI > N_BO) ? N_BI : N_BO;
  localparam int XW = N_BI + 1;
  localparam int PW = XW + COEF_W;

  ctl_t                    c0, c1, c2, c3, c4;
  logic [ROM_AW-1:0]       rom_addr;
  logic [ROM_W-1:0]        rom_word_q;
  logic signed [XW-1:0]    x0, x1;
  logic signed [PW-1:0]    prod [N_MULT];
  logic                    acc_done, load;
  logic signed [ACC_W-1:0] acc_e [N_MULT];
  logic signed [ACC_W-1:0] acc_o [N_MULT];
  logic signed [OW-1:0]    y [2*N_MULT];
  logic                    busy, o_valid, o_last, o_dir;
  logic [2*OW-1:0]         o_word;

  mts_ctrl u_ctrl (
    .clk, .rst_n, .input_enable, .avc_vvc,
    .tr_type (tr_type_e'(tr_type)),
    .tr_size (tr_size_e'(tr_size)),
    .tr_dir,
    .ctl     (c0),
    .rom_addr(rom_addr),
    .busy    (busy)
  );

  mts_coef_rom u_rom (
    .clk, .en(c0.valid), .addr(rom_addr), .word(rom_word_q)
  );

  mts_input_stage #(.N_BI(N_BI)) u_in (
    .clk, .rst_n, .ctl_in(c0), .data_in, .ctl_out(c1), .x0, .x1
  );

  mts_mult_array #(.XW(XW), .PW(PW)) u_mul (
    .clk, .rst_n, .ctl_in(c1), .x0, .x1, .coef(rom_word_q), .ctl_out(c2), .prod
  );

  mts_accum #(.PW(PW)) u_acc (
    .clk, .rst_n, .ctl_in(c2), .prod, .ctl_out(c3), .done(acc_done), .acc_e, .acc_o
  );

  mts_out_stage #(.N_BI(N_BI), .N_BO(N_BO), .BIT_DEPTH(BIT_DEPTH), .OW(OW)) u_out (
    .clk, .rst_n, .done(acc_done), .ctl_in(c3), .acc_e, .acc_o, .load, .ctl_out(c4), .y
  );

  mts_delay_line #(.OW(OW), .DEPTH(DL_DEPTH)) u_dl (
    .clk, .rst_n, .load, .ctl_in(c4), .y,
    .out_valid(o_valid), .out_last(o_last), .out_dir(o_dir), .out_word(o_word)
  );

  always_comb begin
    data_valid     = o_valid;
    data_enable    = o_last;
    data_out_inter = '0;
    data_out_fin   = '0;
    if (o_valid && o_dir)
      data_out_inter = {N_BI'(o_word[2*OW-1:OW]), N_BI'(o_word[OW-1:0])};
    if (o_valid && !o_dir)
      data_out_fin = {N_BO'(o_word[2*OW-1:OW]), N_BO'(o_word[OW-1:0])};
  end

  logic unused_busy;
  assign unused_busy = busy;

endmodule
