// tb_cidpro_compare -- self-checking testbench of the completion comparator.
//
// Random and equal operand pairs, with and without `active`; valid must be
// high exactly when active and the two values are equal.
module tb_cidpro_compare;
  logic active;
  logic [6:0] rnd_t, tmr_t;
  logic valid;
  int checks = 0, failures = 0, hits = 0;

  cidpro_compare dut (.*);

  initial begin
    for (int k = 0; k < 4000; k++) begin
      active = $urandom_range(0, 1);
      rnd_t  = 7'($urandom);
      tmr_t  = (k % 2 == 0) ? rnd_t : 7'($urandom);
      #1;
      checks++;
      if (valid !== (active && rnd_t == tmr_t)) begin
        failures++;
        $display("FAIL active=%b rnd=%0d tmr=%0d valid=%b", active, rnd_t, tmr_t, valid);
      end
      if (valid) hits++;
    end
    checks++;
    if (hits < 500) begin failures++; $display("FAIL too few matches %0d", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
