// ga_syncm - synchronisation module SyncM.
//
// A 2-bit counter (SyncMCount) is compared with a 2-bit constant (SyncMConst,
// SYNC_VAL = 2); 'enable' is high in the cycle where they are equal and makes
// the population registers load the new generation on the next clock edge.
// The constant equals the number of register delays in the fitness path (the
// two ROM stages), so with the counter restarting at 0 after each match one
// generation takes SYNC_VAL + 1 = 3 clocks, the rate R_g = f_clk / 3 of the
// source. Restarting the counter on a match (rather than letting it wrap at
// 4) and the synchronous active-low reset to 0 are this design's choices.
module ga_syncm
  import ga_pkg::*;
#(
  parameter logic [SYNC_W-1:0] SYNC_VAL_P = SYNC_VAL
) (
  input  logic clk,
  input  logic rst_n,
  output logic enable,
  output logic [SYNC_W-1:0] count
);

  assign enable = (count == SYNC_VAL_P);

  always_ff @(posedge clk) begin
    if (!rst_n)      count <= '0;
    else if (enable) count <= '0;
    else             count <= count + 1'b1;
  end

endmodule
