// tb_cidpro_di_alu -- self-checking testbench of the diversifying ALU.
//
// Known vectors plus random 64-bit operands for ADD and MUL. The MUL
// reference is a shift-and-add multiplication done in the testbench; unused
// operation codes must give 0.
module tb_cidpro_di_alu;
  import cidpro_pkg::*;
  alu_op_e op;
  logic [63:0] a, b, y;
  int checks = 0, failures = 0;

  cidpro_di_alu dut (.*);

  function automatic logic [63:0] ref_mul(logic [63:0] x, logic [63:0] z);
    logic [63:0] acc = '0;
    for (int i = 0; i < 64; i++) if (z[i]) acc += x << i;
    return acc;
  endfunction

  task automatic check(logic [63:0] want, string what);
    #1 checks++;
    if (y !== want) begin failures++; $display("FAIL %s: a=%h b=%h y=%h want %h", what, a, b, y, want); end
  endtask

  initial begin
    op = OP_ADD; a = 64'hFFFF_FFFF_FFFF_FFFF; b = 64'd2; check(64'd1, "add wrap");
    op = OP_MUL; a = 64'd65535; b = 64'd65537; check(64'hFFFF_FFFF, "mul 16x17 bit");
    op = OP_MUL; a = 64'h1_0000_0000; b = 64'h1_0000_0000; check(64'd0, "mul overflow low half");
    for (int k = 0; k < 3000; k++) begin
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (k % 3 == 0) begin a[63:16] = '0; b[63:16] = '0; end
      op = OP_ADD; check(a + b, "add");
      op = OP_MUL; check(ref_mul(a, b), "mul");
      op = alu_op_e'(4'($urandom_range(2, 15))); check(64'd0, "undefined op");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
