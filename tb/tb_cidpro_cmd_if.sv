// tb_cidpro_cmd_if -- self-checking testbench of the command interface.
//
// Offers random commands (holding each until taken), raises `done` a random
// number of cycles after each start and `resp_pending` at random, and checks
// cmd_ready, start, in_flight and the four latched registers against a model.
module tb_cidpro_cmd_if;
  import cidpro_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  rocc_inst_t cmd_inst = '0;
  logic [63:0] cmd_rs1 = '0, cmd_rs2 = '0;
  logic resp_pending = 0, done = 0, start, in_flight, xd_q;
  funct_t funct_q;
  logic [63:0] rs1_q, rs2_q;
  logic [4:0] rd_q;
  int checks = 0, failures = 0, accepted = 0, stalls = 0;
  bit m_flight = 0;
  rocc_inst_t m_inst;
  logic [63:0] m_rs1, m_rs2;
  int wait_left = 0;
  bit st, dn, taken = 0;

  cidpro_cmd_if dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      if (taken) begin cmd_valid = 0; taken = 0; end
      // command source: new command only when the previous one was taken
      if (!cmd_valid && $urandom_range(0, 2) == 0) begin
        cmd_valid = 1;
        cmd_inst  = rocc_inst_t'($urandom);
        cmd_rs1   = {$urandom, $urandom};
        cmd_rs2   = {$urandom, $urandom};
      end
      resp_pending = !m_flight && ($urandom_range(0, 4) == 0);
      done = m_flight && (wait_left == 0);
      #1;
      check(cmd_ready == (!m_flight && !resp_pending), "cmd_ready");
      check(start == (cmd_valid && !m_flight && !resp_pending), "start");
      check(in_flight == m_flight, $sformatf("in_flight dut=%b model=%b cyc=%0d", in_flight, m_flight, cyc));
      if (m_flight)
        check(funct_q == m_inst.funct && rs1_q == m_rs1 && rs2_q == m_rs2 && rd_q == m_inst.rd && xd_q == m_inst.xd,
              "latched registers");
      if (cmd_valid && !cmd_ready) stalls++;
      st = start;
      dn = done;
      @(posedge clk);
      if (st) begin
        m_flight = 1; m_inst = cmd_inst; m_rs1 = cmd_rs1; m_rs2 = cmd_rs2;
        wait_left = $urandom_range(0, 9);
        accepted++;
        taken = 1;
      end else if (dn) m_flight = 0;
      else if (m_flight) wait_left--;
    end
    check(accepted > 200, $sformatf("commands accepted %0d", accepted));
    check(stalls > 200, $sformatf("stall cycles %0d", stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
