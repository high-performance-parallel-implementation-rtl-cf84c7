// ga_rom - look-up table ROM of the fitness function module (FFMROM1/2/3).
//
// A 2^AW-entry table of DW-bit signed words with a registered read: 'q' shows
// table[addr] one clock after 'addr' is applied. The one-clock delay follows
// the source description, where each ROM in the fitness path adds one clock of
// latency (the reason a generation takes three clocks).
//
// The contents are computed when simulation or synthesis starts, from
// ga_pkg::rom_entry(FUNC, WHICH, address, H): table WHICH (alpha, beta or
// gamma) of benchmark function FUNC for half-chromosome width H. Changing the
// optimised function only changes this table, as in the source. Filling the
// table from a function rather than from a file is this design's choice.
module ga_rom
  import ga_pkg::*;
#(
  parameter int       AW    = 10,
  parameter int       DW    = 21,
  parameter int       H     = 10,
  parameter fitness_e FUNC  = FIT_F3,
  parameter rom_e     WHICH = ROM_ALPHA
) (
  input  logic                 clk,
  input  logic        [AW-1:0] addr,
  output logic signed [DW-1:0] q
);

  logic signed [DW-1:0] mem [2**AW];

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = DW'(rom_entry(FUNC, WHICH, longint'(i), H));
  end

  always_ff @(posedge clk) q <= mem[addr];

endmodule
