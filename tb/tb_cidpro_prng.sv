// tb_cidpro_prng -- self-checking testbench of the PRNG.
//
// Steps the LFSR and compares every state with a reference model kept in the
// testbench (the textbook right-shift Galois update, written out bit by bit
// for x^32 + x^22 + x^2 + x + 1, applied 7 times per step). Also checks: hold
// when `step` is low, seed loading, the zero-seed guard, a known state after
// reset, that the low 3 bits take all 8 values with roughly equal frequency,
// and that pairs of successive low-3-bit values are roughly uniform too
// (successive instruction latencies must not be correlated).
module tb_cidpro_prng;
  logic clk = 0, rst_n = 0, step = 0, seed_load = 0;
  logic [31:0] seed = '0, rnd;
  int checks = 0, failures = 0;
  logic [31:0] model;
  int hist [8];
  int pairs [64];
  logic [2:0] prev;

  cidpro_prng dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] ref_next(logic [31:0] s);
    logic [31:0] n;
    logic fb = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = fb;
    n[21] = s[22] ^ fb;  // x^22
    n[1]  = s[2]  ^ fb;  // x^2
    n[0]  = s[1]  ^ fb;  // x^1
    return n;
  endfunction

  function automatic logic [31:0] ref_leap(logic [31:0] s);
    for (int i = 0; i < 7; i++) s = ref_next(s);
    return s;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 check(rnd == 32'h1, "reset seed");
    rst_n = 1;
    model = 32'h1;
    // first step from 1 is the tap word itself
    @(negedge clk) step = 1;
    @(negedge clk) step = 0; model = ref_leap(model);
    check(rnd == 32'hB62D_8003, "first step from seed 1");
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      step = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (step) model = ref_leap(model);
      step = 0;
      check(rnd == model, $sformatf("state %0d: got %h want %h", k, rnd, model));
    end
    // seed load
    @(negedge clk) seed_load = 1; seed = 32'hDEAD_BEEF;
    @(negedge clk) seed_load = 0; model = 32'hDEAD_BEEF;
    check(rnd == model, "seed load");
    @(negedge clk) seed_load = 1; seed = 32'h0;
    @(negedge clk) seed_load = 0; model = 32'h1;
    check(rnd == model, "zero seed replaced by 1");
    // distribution of the low 3 bits over many steps
    foreach (hist[i]) hist[i] = 0;
    foreach (pairs[i]) pairs[i] = 0;
    prev = rnd[2:0];
    step = 1;
    for (int k = 0; k < 16000; k++) begin
      @(negedge clk);
      model = ref_leap(model);
      hist[rnd[2:0]]++;
      pairs[{prev, rnd[2:0]}]++;
      prev = rnd[2:0];
    end
    step = 0;
    check(rnd == model, "state after long run");
    foreach (hist[i]) check(hist[i] > 1700 && hist[i] < 2300, $sformatf("low-bit histogram bin %0d = %0d", i, hist[i]));
    foreach (pairs[i]) check(pairs[i] > 150 && pairs[i] < 350, $sformatf("successive-pair bin %0d = %0d", i, pairs[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
