// tb_cidpro_rocc -- end-to-end testbench of the CIDPro co-processor.
//
// A small core model issues a stream of custom instructions (random operation,
// level dl = 0..7, operands, rd, xd) over the command channel and takes the
// responses with random back-pressure. For every instruction it checks
//   * the result (ADD / MUL worked out in the testbench),
//   * the returned rd,
//   * the latency: with the PRNG's next state s (modelled here), an
//     instruction of level dl must answer r + 1 cycles after it was accepted,
//     where r = s mod 2^dl, and so always within 1..2^dl,
// and that instructions with xd = 0 send no response. It counts how often
// each mechanism occurred -- core stalled on a busy co-processor, response
// back-pressure, xd = 0, every level 0..7, every latency 1..8 at dl = 3,
// both operations, a PRNG reseed -- and counts a failure for any that never
// did. Runs at the design's default parameters.
module tb_cidpro_rocc;
  import cidpro_pkg::*;

  localparam int NINSTR = 3000;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  rocc_inst_t cmd_inst = '0;
  logic [63:0] cmd_rs1 = '0, cmd_rs2 = '0;
  logic resp_valid, resp_ready = 0;
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
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference LFSR (x^32 + x^22 + x^2 + x + 1, right-shift Galois form),
  // advanced 7 shifts per instruction
  function automatic logic [31:0] lfsr_next(logic [31:0] s);
    for (int i = 0; i < 7; i++) s = s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
    return s;
  endfunction

  typedef struct {
    logic [63:0] data;
    logic [4:0]  rd;
    bit          xd;
    int          accept_cyc;
    int          lat;
  } exp_t;

  exp_t q[$];
  logic [31:0] prng_model = 32'h1;
  int cyc = 0, issued = 0, retired = 0;
  bit last_fire = 0, last_rfire = 0, last_seed = 0, head_seen = 0;
  // mechanism counters
  int n_stall = 0, n_backp = 0, n_xd0 = 0, n_add = 0, n_mul = 0, n_reseed = 0;
  int n_level[8];
  int lat_hist_dl3[9];
  longint lat_sum[8];

  function automatic logic [63:0] ref_result(alu_op_e op, logic [63:0] a, logic [63:0] b);
    logic [63:0] acc = '0;
    if (op == OP_ADD) return a + b;
    for (int i = 0; i < 64; i++) if (b[i]) acc += a << i;
    return acc;
  endfunction

  initial begin
    exp_t e;
    foreach (n_level[i]) begin n_level[i] = 0; lat_sum[i] = 0; end
    foreach (lat_hist_dl3[i]) lat_hist_dl3[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (retired < NINSTR || q.size() != 0) begin
      @(negedge clk);
      cyc++;
      // consequences of the previous edge
      if (last_seed) begin prng_model = (seed == 0) ? 32'h1 : seed; seed_load = 0; n_reseed++; end
      if (last_fire) begin
        prng_model = lfsr_next(prng_model);
        e.data = ref_result(cmd_inst.funct.op, cmd_rs1, cmd_rs2);
        e.rd = cmd_inst.rd;
        e.xd = cmd_inst.xd;
        e.accept_cyc = cyc - 1;
        e.lat = int'(prng_model & ((32'd1 << cmd_inst.funct.dl) - 1)) + 1;
        n_level[cmd_inst.funct.dl]++;
        lat_sum[cmd_inst.funct.dl] += e.lat;
        if (cmd_inst.funct.dl == 3) lat_hist_dl3[e.lat]++;
        if (cmd_inst.funct.op == OP_ADD) n_add++; else n_mul++;
        if (!cmd_inst.xd) n_xd0++;
        q.push_back(e);
        cmd_valid = 0;
        head_seen = 0;
      end
      if (last_rfire) begin void'(q.pop_front()); retired++; head_seen = 0; end
      // an instruction without xd retires when its time is up
      if (q.size() != 0 && !q[0].xd && cyc - q[0].accept_cyc - 1 >= q[0].lat) begin
        void'(q.pop_front()); retired++; head_seen = 0;
      end
      // new inputs: one PRNG reseed half way, while the co-processor is idle
      if (!busy && !cmd_valid && issued >= NINSTR / 2 && n_reseed == 0 && !last_seed) begin
        seed_load = 1; seed = 32'h1234_5678;
      end else if (!cmd_valid && issued < NINSTR && $urandom_range(0, 3) != 0) begin
        cmd_valid = 1;
        cmd_inst = '0;
        cmd_inst.opcode = OPC_CUSTOM0;
        cmd_inst.funct.op = ($urandom_range(0, 1) == 0) ? OP_ADD : OP_MUL;
        cmd_inst.funct.dl = 3'($urandom_range(0, 7));
        cmd_inst.rd = 5'($urandom);
        cmd_inst.rs1 = 5'($urandom);
        cmd_inst.rs2 = 5'($urandom);
        cmd_inst.xs1 = 1; cmd_inst.xs2 = 1;
        cmd_inst.xd = ($urandom_range(0, 9) != 0);
        cmd_rs1 = {$urandom, $urandom};
        cmd_rs2 = {$urandom, $urandom};
        if ($urandom_range(0, 1) == 0) begin cmd_rs1[63:16] = '0; cmd_rs2[63:16] = '0; end
        issued++;
      end
      resp_ready = ($urandom_range(0, 9) < 6);
      #1;
      // checks on the outputs of this cycle
      check(busy == (q.size() != 0), "busy while an instruction is outstanding");
      if (resp_valid) begin
        check(q.size() != 0 && q[0].xd, "response only for an xd=1 instruction");
        if (q.size() != 0) begin
          check(resp_data == q[0].data, $sformatf("result %h want %h", resp_data, q[0].data));
          check(resp_rd == q[0].rd, "rd");
          if (!head_seen) begin
            check(cyc - q[0].accept_cyc - 1 == q[0].lat,
                  $sformatf("latency %0d want %0d", cyc - q[0].accept_cyc - 1, q[0].lat));
            head_seen = 1;
          end
        end
        if (!resp_ready) n_backp++;
      end else if (q.size() != 0 && q[0].xd) begin
        check(cyc - q[0].accept_cyc - 1 < q[0].lat, "response late");
      end
      if (cmd_valid && !cmd_ready) n_stall++;
      last_fire  = cmd_valid && cmd_ready;
      last_rfire = resp_valid && resp_ready;
      last_seed  = seed_load;
    end
    // mechanisms
    $display("stalls=%0d backpressure=%0d xd0=%0d add=%0d mul=%0d reseed=%0d", n_stall, n_backp, n_xd0, n_add, n_mul, n_reseed);
    check(n_stall > 0, "core stalled on busy co-processor");
    check(n_backp > 0, "response back-pressure");
    check(n_xd0 > 0, "instruction without response");
    check(n_add > 0 && n_mul > 0, "both operations");
    check(n_reseed > 0, "PRNG reseed");
    for (int d = 0; d < 8; d++) begin
      check(n_level[d] > 0, $sformatf("level %0d used", d));
      if (n_level[d] > 0)
        $display("dl=%0d instructions=%0d mean latency=%0.2f (ideal %0.1f)", d, n_level[d],
                 real'(lat_sum[d]) / n_level[d], (2.0 ** d + 1.0) / 2.0);
    end
    for (int l = 1; l <= 8; l++) check(lat_hist_dl3[l] > 0, $sformatf("dl=3 latency %0d seen", l));
    check(lat_sum[0] == n_level[0], "dl=0 always one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
