// mts_mult_array -- the 32 shared regular multipliers m_0..m_31.
//
// Multiplier m takes the coefficient in slot m of the current ROM word. Multipliers
// 0..15 take sample X0 and 16..31 take sample X1 (both carry the same sample for the
// zeroed-out sizes). Products are registered: one cycle of latency, one new set of
// 32 products per cycle. The split of the multipliers between X0 and X1 is this
// design's choice; the paper gives the count (32) and that each X_i is multiplied by
// its coefficient C_i.
module mts_mult_array
  import mts_pkg::*;
#(
  parameter int XW = 17,
  parameter int PW = XW + COEF_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  ctl_t                        ctl_in,
  input  logic signed [XW-1:0]        x0,
  input  logic signed [XW-1:0]        x1,
  input  logic [ROM_W-1:0]            coef,
  output ctl_t                        ctl_out,
  output logic signed [PW-1:0]        prod [N_MULT]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_out <= '0;
      for (int m = 0; m < N_MULT; m++) prod[m] <= '0;
    end else begin
      ctl_out <= ctl_in;
      for (int m = 0; m < N_MULT; m++)
        prod[m] <= PW'(m < N_MULT / 2 ? x0 : x1) * PW'($signed(coef[m*COEF_W +: COEF_W]));
    end
  end

endmodule
