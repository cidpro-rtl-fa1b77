// tb_cidpro_resp_if -- self-checking testbench of the response interface.
//
// Pulses `capture` with random data when no response is waiting (half of them
// with xd = 0), holds resp_ready low at random, and checks that every xd = 1
// result appears once, unchanged, and that xd = 0 results never appear.
module tb_cidpro_resp_if;
  logic clk = 0, rst_n = 0;
  logic capture = 0, xd = 0, resp_valid, resp_ready = 0, pending;
  logic [63:0] data = '0, resp_data;
  logic [4:0] rd = '0, resp_rd;
  int checks = 0, failures = 0, sent = 0, got = 0, backpressure = 0;
  logic [63:0] exp_data [$];
  logic [4:0] exp_rd [$];

  cidpro_resp_if dut (.*);

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
    #1 check(!resp_valid, "idle after reset");
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      capture = !resp_valid && ($urandom_range(0, 2) == 0);
      xd = $urandom_range(0, 1);
      data = {$urandom, $urandom};
      rd = 5'($urandom);
      resp_ready = $urandom_range(0, 1);
      #1;
      check(pending == resp_valid, "pending mirrors resp_valid");
      check(resp_valid == (exp_data.size() != 0), "resp_valid vs. model");
      if (resp_valid && exp_data.size() != 0)
        check(resp_data == exp_data[0] && resp_rd == exp_rd[0], "response contents");
      if (resp_valid && !resp_ready) backpressure++;
      @(posedge clk);
      if (resp_valid && resp_ready) begin void'(exp_data.pop_front()); void'(exp_rd.pop_front()); got++; end
      if (capture && xd) begin exp_data.push_back(data); exp_rd.push_back(rd); sent++; end
    end
    check(sent > 300 && got + 1 >= sent, $sformatf("sent %0d got %0d", sent, got));
    check(backpressure > 100, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
