// tb_cidpro_workloads -- the two benchmark kernels run on the co-processor.
//
// A core model runs the kernels used to evaluate CIDPro and sends every
// multiplication to the co-processor as a custom MUL instruction; all other
// steps cost the core one cycle each (a simple timing model, not Rocket's).
//   * modExp, square-and-multiply over a 32-bit key (BL, the baseline with the
//     secret-dependent "if (k odd) r = r*y mod N"), and the left-to-right
//     sliding-window form with window 3 (LR); modulus below 2^32 so that each
//     product fits the 64-bit multiplier.
//   * mulMod16, IDEA's multiplication modulo 2^16 + 1 (0 stands for 2^16),
//     whose zero-operand shortcut is the secret-dependent branch.
// Each kernel runs RUNS times for two secret inputs at levels 0, 2..6. Checks:
// every result against an arithmetic reference; at dl = 0 the run time is
// constant for a key and differs between the keys (the leak); at dl >= 2 it
// varies from run to run; the mean latency of the custom instructions is
// near (2^dl + 1) / 2; at dl = 6 the run-time ranges of the two keys of the
// windowed modExp overlap. Mean run times are printed per kernel, key and level.
module tb_cidpro_workloads;
  import cidpro_pkg::*;

  localparam int RUNS = 200;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  rocc_inst_t cmd_inst = '0;
  logic [63:0] cmd_rs1 = '0, cmd_rs2 = '0;
  logic resp_valid, resp_ready = 1;
  logic [4:0] resp_rd;
  logic [63:0] resp_data;
  logic busy, seed_load = 0;
  logic [31:0] seed = '0;

  cidpro_rocc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // core-side cycle account of the current kernel run
  longint t_run;
  longint ci_count, ci_cycles;
  logic [2:0] cur_dl;

  // one custom MUL instruction; adds its cycles to t_run
  task automatic ci_mul(input logic [63:0] a, input logic [63:0] b, output logic [63:0] y);
    int n = 0;
    @(negedge clk);
    cmd_inst = '0;
    cmd_inst.opcode = OPC_CUSTOM0;
    cmd_inst.funct.op = OP_MUL;
    cmd_inst.funct.dl = cur_dl;
    cmd_inst.xd = 1; cmd_inst.xs1 = 1; cmd_inst.xs2 = 1;
    cmd_inst.rd = 5'd10;
    cmd_rs1 = a; cmd_rs2 = b;
    cmd_valid = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
    #1;
    n = 0;
    while (!resp_valid) begin @(negedge clk); #1; n++; end
    y = resp_data;
    check(n >= 1 && n <= (1 << cur_dl), $sformatf("CI latency %0d outside 1..%0d", n, 1 << cur_dl));
    t_run += longint'(n);
    ci_count++;
    ci_cycles += longint'(n);
  endtask

  // ---------------- modExp -----------------
  localparam logic [63:0] N_MOD = 64'd4294967291;  // largest prime below 2^32

  function automatic logic [63:0] ref_modexp(logic [63:0] y, logic [31:0] k);
    logic [63:0] r = 1;
    for (int i = 0; i < 32; i++) begin
      if (k[i]) r = (r * y) % N_MOD;
      y = (y * y) % N_MOD;
    end
    return r;
  endfunction

  // Algorithm "modExp" (baseline): right-to-left square and multiply
  task automatic modexp_bl(input logic [63:0] y, input logic [31:0] k, output logic [63:0] r);
    logic [63:0] p;
    r = 1;
    t_run += 1;
    for (int i = 0; i < 32; i++) begin
      t_run += 2;                                 // loop control, bit test
      if (k[0]) begin
        ci_mul(r, y, p); r = p % N_MOD; t_run += 1;
      end
      ci_mul(y, y, p); y = p % N_MOD; t_run += 1;
      k = k >> 1; t_run += 1;
    end
  endtask

  // left-to-right sliding window, window size 3
  task automatic modexp_lr(input logic [63:0] y, input logic [31:0] k, output logic [63:0] r);
    logic [63:0] p, y2;
    logic [63:0] odd[4];                          // y^1, y^3, y^5, y^7
    int i, l, val;
    odd[0] = y;
    ci_mul(y, y, p); y2 = p % N_MOD; t_run += 1;
    for (int j = 1; j < 4; j++) begin ci_mul(odd[j-1], y2, p); odd[j] = p % N_MOD; t_run += 1; end
    r = 1;
    i = 31;
    while (i >= 0) begin
      t_run += 2;
      if (!k[i]) begin
        ci_mul(r, r, p); r = p % N_MOD; t_run += 1;
        i--;
      end else begin
        l = (i >= 2) ? i - 2 : 0;
        while (!k[l]) l++;
        val = 0;
        for (int b = i; b >= l; b--) begin
          val = val * 2 + int'(k[b]);
          ci_mul(r, r, p); r = p % N_MOD; t_run += 1;
        end
        ci_mul(r, odd[val/2], p); r = p % N_MOD; t_run += 1;
        i = l - 1;
      end
    end
  endtask

  // ---------------- mulMod16 (IDEA) -----------------
  function automatic logic [15:0] ref_mulmod16(logic [15:0] a, logic [15:0] b);
    longint unsigned x = (a == 0) ? 65536 : a;
    longint unsigned z = (b == 0) ? 65536 : b;
    longint unsigned m = (x * z) % 65537;
    return 16'(m);                                // 65536 is written as 0
  endfunction

  task automatic mulmod16(input logic [15:0] a, input logic [15:0] b, output logic [15:0] r);
    logic [63:0] p;
    logic [15:0] lo, hi;
    t_run += 1;
    if (a == 0) begin r = 16'(1 - b); t_run += 1; end
    else if (b == 0) begin r = 16'(1 - a); t_run += 2; end
    else begin
      ci_mul({48'b0, a}, {48'b0, b}, p);
      lo = p[15:0]; hi = p[31:16];
      r = lo - hi + 16'(lo < hi);
      t_run += 4;
    end
  endtask

  // ---------------- driver -----------------
  int levels[6] = '{0, 2, 3, 4, 5, 6};
  logic [31:0] keys[2] = '{32'hFFFF_FFFE, 32'h8000_0101};
  longint tmin[2], tmax[2], tsum[2];

  initial begin
    logic [63:0] r64, y;
    logic [15:0] r16, a16, b16;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int alg = 0; alg < 3; alg++) begin
      for (int li = 0; li < 6; li++) begin
        cur_dl = 3'(levels[li]);
        ci_count = 0; ci_cycles = 0;
        for (int key = 0; key < 2; key++) begin
          tmin[key] = 64'h7FFF_FFFF; tmax[key] = 0; tsum[key] = 0;
          for (int run = 0; run < RUNS; run++) begin
            t_run = 0;
            if (alg < 2) begin
              // same message for every run of a level: only the key differs
              y = 64'd0 + 1234567 + li;
              if (alg == 0) modexp_bl(y, keys[key], r64);
              else          modexp_lr(y, keys[key], r64);
              check(r64 == ref_modexp(y, keys[key]), $sformatf("modExp result %h want %h", r64, ref_modexp(y, keys[key])));
            end else begin
              // secret: a = 0 (key0) or a nonzero key word (key1)
              a16 = (key == 0) ? 16'd0 : 16'hB5A3;
              b16 = 16'h1234;
              mulmod16(a16, b16, r16);
              check(r16 == ref_mulmod16(a16, b16), "mulMod16 result");
              // a second product with both operands nonzero exercises the CI path
              a16 = 16'($urandom) | 16'h1;
              mulmod16(a16, b16, r16);
              check(r16 == ref_mulmod16(a16, b16), "mulMod16 result (random)");
              mulmod16(16'(key == 0 ? 0 : 16'h7777), 16'h0, r16);
              check(r16 == ref_mulmod16(16'(key == 0 ? 0 : 16'h7777), 16'h0), "mulMod16 result (zero operand)");
            end
            if (t_run < tmin[key]) tmin[key] = t_run;
            if (t_run > tmax[key]) tmax[key] = t_run;
            tsum[key] += t_run;
          end
        end
        $display("%s dl=%0d  key0: mean %0.1f [%0d..%0d]   key1: mean %0.1f [%0d..%0d]   CI mean latency %0.2f",
                 alg == 0 ? "modExp-BL" : alg == 1 ? "modExp-LR" : "mulMod16 ", cur_dl,
                 real'(tsum[0]) / RUNS, tmin[0], tmax[0], real'(tsum[1]) / RUNS, tmin[1], tmax[1],
                 real'(ci_cycles) / ci_count);
        if (cur_dl == 0) begin
          check(tmin[0] == tmax[0] && tmin[1] == tmax[1], "dl=0 gives a fixed run time per key");
          check(tmin[0] != tmin[1], "dl=0 run times differ between the keys");
        end else begin
          check(tmax[0] > tmin[0] && tmax[1] > tmin[1], "run time varies from run to run");
          if (alg < 2)
            check(real'(ci_cycles) / ci_count > 0.85 * ((2.0 ** cur_dl + 1.0) / 2.0) &&
                  real'(ci_cycles) / ci_count < 1.15 * ((2.0 ** cur_dl + 1.0) / 2.0),
                  "mean CI latency near (2^dl+1)/2");
        end
        // the windowed form hides the Hamming weight best: its two keys must overlap
        if (cur_dl == 6 && alg == 1)
          check(tmin[0] <= tmax[1] && tmin[1] <= tmax[0], "run-time ranges of the two keys overlap at dl=6");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
