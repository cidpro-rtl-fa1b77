// cidpro_rocc -- the CIDPro co-processor (top level).
//
// CIDPro hides secret-dependent timing by making each security-critical
// arithmetic operation take a random number of cycles. The compiler replaces
// such operations with custom instructions; this co-processor, attached to the
// core's RoCC port, computes the result at once on its diversifying ALU but
// returns it only when a comparator finds the timer equal to a pseudo-random
// number cut to dl bits. An instruction with level dl therefore finishes after
// 1..2^dl cycles, each equally likely, and the core stalls meanwhile.
// dl = 0 gives one cycle, i.e. no diversification.
//
// Structure (after the paper's co-processor diagram): command interface with
// funct/rs1/rs2/rd registers -> Di-ALU -> response interface; PRNG -> Truncate
// and Timer -> Truncate -> Compare -> valid. The paper's "diversity control"
// is this funct register together with PRNG, Timer, Truncate and Compare.
//
// Interface: RoCC-style command channel (cmd_valid/cmd_ready, instruction word
// with funct = {op[3:0], dl[2:0]}, rs1 and rs2 values), response channel
// (resp_valid/resp_ready, rd, data) and `busy`. `seed_load`/`seed` reseed the
// PRNG. Timing: if a command is accepted on edge E0 and the PRNG's truncated
// value is r, resp_valid is high from edge E(r+1), i.e. r+1 cycles later;
// cmd_ready is low from E0 until the response has been taken.
// The port layout, the funct encoding, the LFSR and the single instruction in
// flight are this design's choices; the datapath and the way completion is
// timed are the paper's.
module cidpro_rocc
  import cidpro_pkg::*;
#(
  parameter int unsigned XW     = cidpro_pkg::XLEN,
  parameter int unsigned MAXDL  = cidpro_pkg::MAX_DL,
  parameter int unsigned LFSR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // command channel from the core
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  rocc_inst_t        cmd_inst,
  input  logic [XW-1:0]     cmd_rs1,
  input  logic [XW-1:0]     cmd_rs2,
  // response channel to the core
  output logic              resp_valid,
  input  logic              resp_ready,
  output logic [4:0]        resp_rd,
  output logic [XW-1:0]     resp_data,
  // co-processor busy (instruction in flight or response waiting)
  output logic              busy,
  // PRNG reseeding
  input  logic              seed_load,
  input  logic [LFSR_W-1:0] seed
);

  logic              start, in_flight, done, resp_pending;
  funct_t            funct_q;
  logic [XW-1:0]     rs1_q, rs2_q, alu_y;
  logic [4:0]        rd_q;
  logic              xd_q;
  logic [LFSR_W-1:0] rnd;
  logic [MAXDL-1:0]  tmr, rnd_t, tmr_t;

  cidpro_cmd_if #(.W(XW)) u_cmd_if (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_inst, .cmd_rs1, .cmd_rs2,
    .resp_pending, .done,
    .start, .in_flight, .funct_q, .rs1_q, .rs2_q, .rd_q, .xd_q
  );

  cidpro_di_alu #(.W(XW)) u_di_alu (
    .op(funct_q.op), .a(rs1_q), .b(rs2_q), .y(alu_y)
  );

  cidpro_prng #(.LFSR_W(LFSR_W)) u_prng (
    .clk, .rst_n, .step(start), .seed_load, .seed, .rnd
  );

  cidpro_timer #(.W(MAXDL)) u_timer (
    .clk, .rst_n, .clear(start), .run(in_flight), .count(tmr)
  );

  cidpro_truncate #(.IN_W(LFSR_W), .OUT_W(MAXDL), .DL_W(DL_W)) u_trunc_rnd (
    .din(rnd), .dl(funct_q.dl), .dout(rnd_t)
  );

  cidpro_truncate #(.IN_W(MAXDL), .OUT_W(MAXDL), .DL_W(DL_W)) u_trunc_tmr (
    .din(tmr), .dl(funct_q.dl), .dout(tmr_t)
  );

  cidpro_compare #(.W(MAXDL)) u_compare (
    .active(in_flight), .rnd_t, .tmr_t, .valid(done)
  );

  cidpro_resp_if #(.W(XW)) u_resp_if (
    .clk, .rst_n,
    .capture(done), .xd(xd_q), .data(alu_y), .rd(rd_q),
    .resp_valid, .resp_ready, .resp_rd, .resp_data,
    .pending(resp_pending)
  );

  assign busy = in_flight || resp_pending;

endmodule
