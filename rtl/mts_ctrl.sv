// mts_ctrl -- input controller of the 1-D inverse MTS core.
//
// A one-cycle pulse on input_enable launches a block: tr_type, tr_size, tr_dir and avc_vvc
// are sampled with the pulse (avc_vvc = 0 selects the H.264 4x4 transform, tr_type is then
// ignored and tr_size must be 0), and data_in carries the block's coefficients from the next
// cycle on, without gaps: N rows (N-point vectors) of N/2 cycles each, N^2/2 cycles in
// all (8, 32, 128, 512, 2048 cycles for 4 to 64 points), as in the paper. Each row takes
// N/2 cycles whatever its size: two coefficients per cycle, or one per cycle (in lane 0)
// for the zeroed-out sizes, 64-point DCT-II and 32-point DST-VII/DCT-VIII, whose upper
// half of coefficients is zero and is not sent.
// The controller emits, for every data cycle, a ctl_t word (valid, first/last cycle of
// the row, configuration, cycle index) and the coefficient ROM address base+cycle.
// A new input_enable is accepted when idle or in the last data cycle of the current
// block, so blocks can follow each other back to back; the assertion flags one that
// arrives earlier. The back-to-back rule and the reset values are this design's choices.
module mts_ctrl
  import mts_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              input_enable,
  input  logic              avc_vvc,
  input  tr_type_e          tr_type,
  input  tr_size_e          tr_size,
  input  logic              tr_dir,
  output ctl_t              ctl,
  output logic [ROM_AW-1:0] rom_addr,
  output logic              busy
);

  logic       active;
  tr_type_e   t_q;
  tr_size_e   s_q;
  logic       d_q;
  logic       a_q;
  logic [4:0] cyc_q;
  logic [6:0] row_q;
  logic [4:0] cyc_last;
  logic [6:0] row_last;
  logic       blk_end;

  assign cyc_last = 5'((npoints(s_q) / 2) - 1);
  assign row_last = 7'(npoints(s_q) - 1);
  assign blk_end  = active && (cyc_q == cyc_last) && (row_q == row_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      t_q    <= TR_DCT2;
      s_q    <= SZ4;
      d_q    <= 1'b0;
      a_q    <= 1'b0;
      cyc_q  <= '0;
      row_q  <= '0;
    end else if (input_enable && (!active || blk_end)) begin
      active <= 1'b1;
      t_q    <= tr_type;
      s_q    <= tr_size;
      d_q    <= tr_dir;
      a_q    <= !avc_vvc;
      cyc_q  <= '0;
      row_q  <= '0;
    end else if (active) begin
      if (cyc_q == cyc_last) begin
        cyc_q <= '0;
        row_q <= row_q + 7'd1;
        if (row_q == row_last) active <= 1'b0;
      end else begin
        cyc_q <= cyc_q + 5'd1;
      end
    end
  end

  always_comb begin
    ctl.valid = active;
    ctl.first = active && (cyc_q == '0);
    ctl.last  = active && (cyc_q == cyc_last);
    ctl.ttype = t_q;
    ctl.tsize = s_q;
    ctl.dir   = d_q;
    ctl.avc   = a_q;
    ctl.cyc   = cyc_q;
    rom_addr  = ROM_AW'(rom_base(t_q, s_q, a_q) + int'(cyc_q));
  end

  assign busy = active;

  // launch only when idle or on the last data cycle of the running block
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 input_enable |-> (!active || blk_end));
  // H.264 mode: only the 4x4 transform is built
  a_avc_4x4: assert property (@(posedge clk) disable iff (!rst_n)
                              input_enable && !avc_vvc |-> tr_size == SZ4);
  // DCT-VIII / DST-VII stop at 32 points
  a_size_ok: assert property (@(posedge clk) disable iff (!rst_n)
                              input_enable |-> (tr_type == TR_DCT2 ? tr_size <= SZ64 : tr_size <= SZ32));

endmodule
