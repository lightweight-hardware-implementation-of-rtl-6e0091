// mts_coef_rom -- coefficient ROM of the 1-D inverse MTS core.
//
// Holds, one 256-bit word per input cycle of a row, the 32 signed 8-bit coefficients
// that the 32 multipliers need in that cycle (slot m, bits 8m+7:8m, feeds multiplier m).
// It stores the DCT-II of 64 points (the smaller DCT-II sizes are the even rows of it,
// stored with the even rows in slots 0..15 and the odd rows in slots 16..31) and the
// DST-VII of 32, 16, 8 and 4 points; DCT-VIII is derived from DST-VII and needs no table.
// The contents are computed at elaboration by mts_pkg::rom_word(), so the table is
// written as a constant array and synthesizes to a ROM.
//
// Interface: addr in, word out one clock later (registered read, en gates the read).
// Size: 92 x 256 bits here. The paper's ROM is 68 x 256 bits (17408 bits) but its word
// layout is not given; this layout keeps one read per cycle and no second port.
module mts_coef_rom
  import mts_pkg::*;
#(
  parameter int DEPTH = ROM_DEPTH
) (
  input  logic                clk,
  input  logic                en,
  input  logic [ROM_AW-1:0]   addr,
  output logic [ROM_W-1:0]    word
);

  typedef logic [ROM_W-1:0] rom_t [DEPTH];

  function automatic rom_t build();
    rom_t r;
    for (int a = 0; a < DEPTH; a++) r[a] = rom_word(a);
    return r;
  endfunction

  localparam rom_t ROM = build();

  always_ff @(posedge clk) begin
    if (en) word <= (int'(addr) < DEPTH) ? ROM[addr] : '0;
  end

endmodule
