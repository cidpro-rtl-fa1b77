// tb_cidpro_timer -- self-checking testbench of the cycle timer.
//
// Drives random clear/run patterns and compares the count with a counter
// model kept in the testbench (clear wins over run, wrap at 2^7).
module tb_cidpro_timer;
  logic clk = 0, rst_n = 0, clear = 0, run = 0;
  logic [6:0] count;
  int checks = 0, failures = 0;
  int model = 0, wraps = 0;

  cidpro_timer dut (.*);

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
    #1 check(count == 0, "reset");
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      clear = ($urandom_range(0, 199) == 0);
      run   = ($urandom_range(0, 9) != 0);
      @(posedge clk);
      if (clear) model = 0;
      else if (run) begin
        if (model == 127) wraps++;
        model = (model + 1) % 128;
      end
      #1 check(int'(count) == model, $sformatf("cycle %0d count %0d want %0d", k, count, model));
    end
    check(wraps > 0, "wrap seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
