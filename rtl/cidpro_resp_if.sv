// cidpro_resp_if -- response interface of the CIDPro co-processor.
//
// When the comparator signals that the instruction's (random) time is up, this
// block captures the Di-ALU result and the destination register and returns
// them to the core over the RoCC response channel. Returning the result on the
// comparator's valid follows the paper; the valid/ready handshake, and
// sending nothing for an instruction whose xd bit is 0, are this design's
// choice, matching Rocket's RoCC port.
//
// Interface and timing: on the edge where `capture` is high (and `xd` is set),
// `data`/`rd` are registered and `resp_valid` rises; they are held until the
// edge where `resp_ready` is also high. `pending` equals `resp_valid` and keeps
// the command interface from taking a new instruction meanwhile.
module cidpro_resp_if #(
  parameter int unsigned W = cidpro_pkg::XLEN
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         capture,
  input  logic         xd,
  input  logic [W-1:0] data,
  input  logic [4:0]   rd,
  output logic         resp_valid,
  input  logic         resp_ready,
  output logic [4:0]   resp_rd,
  output logic [W-1:0] resp_data,
  output logic         pending
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_rd    <= '0;
      resp_data  <= '0;
    end else begin
      if (capture && xd) begin
        resp_valid <= 1'b1;
        resp_rd    <= rd;
        resp_data  <= data;
      end else if (resp_valid && resp_ready) begin
        resp_valid <= 1'b0;
      end
    end
  end

  assign pending = resp_valid;

`ifndef SYNTHESIS
  // A response waiting for the core does not change.
  a_resp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid && !resp_ready |=> resp_valid && $stable(resp_data) && $stable(resp_rd));
  // No new result arrives while one is still waiting.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) capture |-> !resp_valid);
`endif

endmodule
