// cidpro_timer -- cycle counter of the CIDPro co-processor.
//
// Counts the clock cycles an instruction has spent in the co-processor. Its
// value, cut to dl bits, is compared with the cut random number; the match
// ends the instruction. The paper gives the timer's role; when it starts and
// how it clears are this design's choice.
//
// Interface and timing: `clear` (the cycle an instruction is accepted) sets
// the count to 0 on the next edge; otherwise `run` (an instruction is in
// flight) adds 1 per cycle, wrapping at 2^W. So in the k-th cycle after
// acceptance (k = 0, 1, ...) `count` reads k.
module cidpro_timer #(
  parameter int unsigned W = cidpro_pkg::MAX_DL
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         run,
  output logic [W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (clear) count <= '0;
    else if (run)   count <= count + W'(1);
  end

endmodule
