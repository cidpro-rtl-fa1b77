// cidpro_cmd_if -- command interface of the CIDPro co-processor.
//
// Takes a custom instruction from the core over the RoCC command channel and
// latches what the rest of the co-processor needs for the whole instruction:
// the funct field (operation and diversification level), the two source
// operands, and the destination register with its xd flag. These are the four
// registers the paper's block diagram draws beside the command interface. It
// also keeps the "operation in flight" flag that runs the timer.
//
// Interface and timing (valid/ready as in Rocket's RoCC channel, this
// design's choice): `cmd_ready` is high only when nothing is in flight and no
// response is waiting (`resp_pending`), so one instruction is handled at a
// time and the core stalls on the next one. On the accepting edge the
// registers load, `start` is high in that same cycle (it clears the timer and
// steps the PRNG), and `in_flight` rises for the following cycle. `in_flight`
// falls on the edge after `done` (the comparator's valid).
module cidpro_cmd_if
  import cidpro_pkg::*;
#(
  parameter int unsigned W = cidpro_pkg::XLEN
) (
  input  logic         clk,
  input  logic         rst_n,
  // RoCC command channel
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  rocc_inst_t   cmd_inst,
  input  logic [W-1:0] cmd_rs1,
  input  logic [W-1:0] cmd_rs2,
  // co-processor side
  input  logic         resp_pending,
  input  logic         done,
  output logic         start,
  output logic         in_flight,
  output funct_t       funct_q,
  output logic [W-1:0] rs1_q,
  output logic [W-1:0] rs2_q,
  output logic [4:0]   rd_q,
  output logic         xd_q
);

  assign cmd_ready = !in_flight && !resp_pending;
  assign start     = cmd_valid && cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_flight <= 1'b0;
      funct_q   <= '0;
      rs1_q     <= '0;
      rs2_q     <= '0;
      rd_q      <= '0;
      xd_q      <= 1'b0;
    end else begin
      if (start) begin
        in_flight <= 1'b1;
        funct_q   <= cmd_inst.funct;
        rs1_q     <= cmd_rs1;
        rs2_q     <= cmd_rs2;
        rd_q      <= cmd_inst.rd;
        xd_q      <= cmd_inst.xd;
      end else if (done) begin
        in_flight <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  // A command that is offered stays offered, unchanged, until it is taken.
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_inst) && $stable(cmd_rs1) && $stable(cmd_rs2));
  // done only ever ends an instruction that is in flight.
  a_done_in_flight: assert property (@(posedge clk) disable iff (!rst_n) done |-> in_flight);
`endif

endmodule
