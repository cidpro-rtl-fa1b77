// cidpro_compare -- completion comparator of the CIDPro co-processor.
//
// Raises `valid` when the truncated random value equals the truncated timer
// value, which marks the end of the current instruction; the co-processor
// then hands the Di-ALU result to the core. That a comparator of random value
// and timer produces the valid signal is the paper's; gating the match with
// `active` (an instruction is in flight) is this design's choice, so that the
// comparator fires once per instruction. Purely combinational.
module cidpro_compare #(
  parameter int unsigned W = cidpro_pkg::MAX_DL
) (
  input  logic         active,
  input  logic [W-1:0] rnd_t,
  input  logic [W-1:0] tmr_t,
  output logic         valid
);

  assign valid = active && (rnd_t == tmr_t);

endmodule
