// tb_cidpro_truncate -- self-checking testbench of the Truncate block.
//
// Uses a 32-bit input (as on the PRNG side) and checks, for every level
// dl = 0..7 and random inputs, that the output equals din mod 2^dl.
module tb_cidpro_truncate;
  logic [31:0] din;
  logic [2:0]  dl;
  logic [6:0]  dout;
  int checks = 0, failures = 0;

  cidpro_truncate #(.IN_W(32), .OUT_W(7), .DL_W(3)) dut (.*);

  initial begin
    for (int d = 0; d < 8; d++)
      for (int k = 0; k < 300; k++) begin
        dl  = 3'(d);
        din = $urandom;
        if (k == 0) din = '1;
        #1;
        checks++;
        if (d == 7 ? (dout != din[6:0]) : (int'(dout) != int'(din % (32'd1 << d)))) begin
          failures++;
          $display("FAIL dl=%0d din=%h dout=%h", d, din, dout);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
