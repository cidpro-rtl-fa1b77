// cidpro_truncate -- keeps the low dl bits of a value.
//
// The co-processor has two: one on the PRNG output and one on the timer
// output, so that both are reduced to the range 0..2^dl-1 before they are
// compared. This follows the paper's block diagram, where each Truncate block
// has a dl-bit output. Here the result is kept at a fixed width OUT_W with the
// bits at and above dl forced to 0, so a single comparator serves every level.
// dl = 0 gives 0, which makes the instruction finish in one cycle (no
// diversification). Purely combinational.
module cidpro_truncate #(
  parameter int unsigned IN_W  = cidpro_pkg::MAX_DL,
  parameter int unsigned OUT_W = cidpro_pkg::MAX_DL,
  parameter int unsigned DL_W  = cidpro_pkg::DL_W
) (
  input  logic [IN_W-1:0]  din,
  input  logic [DL_W-1:0]  dl,
  output logic [OUT_W-1:0] dout
);

  logic [OUT_W-1:0] low;
  logic [OUT_W-1:0] mask;

  always_comb begin
    low = '0;
    for (int i = 0; i < OUT_W; i++)
      if (i < IN_W) low[i] = din[i];
    for (int i = 0; i < OUT_W; i++)
      mask[i] = (i < int'(dl));
    dout = low & mask;
  end

endmodule
