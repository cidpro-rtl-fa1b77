// cidpro_prng -- pseudo-random number generator of the CIDPro co-processor.
//
// Supplies the random value that decides how many cycles a custom
// instruction takes. The paper names a PRNG but not its kind; this design
// uses the simplest one that fits an FPGA: a Galois LFSR, by default 32 bits
// with the maximal-length polynomial x^32 + x^22 + x^2 + x + 1 (taps
// 32'h8020_0003 in right-shift form). Its period is 2^32 - 1, so every
// truncated value 0..2^dl-1 appears with near-equal frequency.
//
// One LFSR shift moves every bit down by one place, so two values taken one
// shift apart share all but one of their low bits. The generator therefore
// advances STEPS shifts at once (a leap-forward XOR network, STEPS = MAX_DL by
// default), which makes the low MAX_DL bits of successive values, the only
// bits the co-processor uses, fresh each time.
//
// Interface and timing: the state advances STEPS shifts on each clock where
// `step` is high (the co-processor pulses it once per accepted instruction, so
// the value stays fixed while the instruction runs). `seed_load` writes `seed` instead;
// a zero seed, which would lock the LFSR, is replaced by 1. `rnd` is the
// registered state. Reset loads SEED.
module cidpro_prng #(
  parameter int unsigned    LFSR_W = 32,
  parameter logic [LFSR_W-1:0] TAPS = LFSR_W'(32'h8020_0003),
  parameter logic [LFSR_W-1:0] SEED = LFSR_W'(1),
  parameter int unsigned    STEPS  = cidpro_pkg::MAX_DL
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              step,
  input  logic              seed_load,
  input  logic [LFSR_W-1:0] seed,
  output logic [LFSR_W-1:0] rnd
);

  logic [LFSR_W-1:0] state_q, state_next;

  always_comb begin
    state_next = state_q;
    for (int i = 0; i < STEPS; i++) begin
      if (state_next[0]) state_next = (state_next >> 1) ^ TAPS;
      else               state_next = state_next >> 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          state_q <= (SEED == '0) ? LFSR_W'(1) : SEED;
    else if (seed_load)  state_q <= (seed == '0) ? LFSR_W'(1) : seed;
    else if (step)       state_q <= state_next;
  end

  assign rnd = state_q;

`ifndef SYNTHESIS
  // An LFSR must never reach the all-zero state.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state_q != '0);
`endif

endmodule
