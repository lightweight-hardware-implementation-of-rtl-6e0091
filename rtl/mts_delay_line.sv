// mts_delay_line -- output delay line giving every transform size the same latency.
//
// A row of n outputs leaves the datapath n/2 cycles after its first input, so small rows
// are ready early. This line is a shift register of DEPTH = 32 two-sample words (the
// output of the largest row, 64 points at 2 samples per cycle). Every cycle it shifts one
// word towards the output, word 0. When a finished row is loaded, its n/2 words go into
// the top n/2 positions (word k at DEPTH - n/2 + k); they reach the output after
// DEPTH - n/2 more cycles, which brings every size to the latency of the 64-point row.
// Because a row of n/2 cycles is loaded exactly n/2 cycles after the previous one when
// rows follow back to back, the positions it fills are always free.
// Each word carries a valid flag, the last-word-of-row flag (data_enable) and whether it
// is an intermediate result (vertical pass, or horizontal pass in H.264 mode), which
// selects data_out_inter or data_out_fin. The paper gives the
// delay line and how its size is chosen; the shift-and-insert organisation is this
// design's own.
module mts_delay_line
  import mts_pkg::*;
#(
  parameter int OW    = 16,
  parameter int DEPTH = DL_DEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  ctl_t                 ctl_in,
  input  logic signed [OW-1:0] y [2*DEPTH],
  output logic                 out_valid,
  output logic                 out_last,
  output logic                 out_dir,
  output logic [2*OW-1:0]      out_word
);

  typedef struct packed {
    logic          valid;
    logic          last;
    logic          dir;
    logic [2*OW-1:0] data;
  } dl_entry_t;

  dl_entry_t dl [DEPTH];
  int        base;

  always_comb base = DEPTH - npoints(ctl_in.tsize) / 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) dl[i] <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (load && i >= base) begin
          dl[i].valid <= 1'b1;
          dl[i].last  <= (i == DEPTH - 1);
          dl[i].dir   <= ctl_in.dir ^ ctl_in.avc;   // 1: intermediate result
          dl[i].data  <= {y[(2 * (i - base) + 1) % (2 * DEPTH)], y[(2 * (i - base)) % (2 * DEPTH)]};
        end else if (i < DEPTH - 1) begin
          dl[i] <= dl[i + 1];
        end else begin
          dl[i] <= '0;
        end
      end
    end
  end

  assign out_valid = dl[0].valid;
  assign out_last  = dl[0].valid && dl[0].last;
  assign out_dir   = dl[0].dir;
  assign out_word  = dl[0].data;

  // a load must never overwrite a word still in flight: above the insertion point the
  // line must be empty (the word at base itself moves down in the same cycle)
  function automatic logic line_free(int b);
    logic ok = 1'b1;
    for (int i = 0; i < DEPTH; i++)
      if (i > b && dl[i].valid) ok = 1'b0;
    return ok;
  endfunction

  a_no_clobber: assert property (@(posedge clk) disable iff (!rst_n) load |-> line_free(base))
    else $error("delay line overrun");

endmodule
