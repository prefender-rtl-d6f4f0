// tb_security_configs - Flush+Reload against five configurations of
// PREFENDER side by side.
//
// Five instances of the top see the same instruction and load stream and
// each keeps its own model of the L1D contents:
//   0 no defence        (ST_EN=0, AT_EN=0, RP_EN=0)
//   1 scale tracker     (ST_EN=1, AT_EN=0, RP_EN=0)
//   2 access tracker    (ST_EN=0, AT_EN=1, RP_EN=0)
//   3 ST + AT           (ST_EN=1, AT_EN=1, RP_EN=0)
//   4 full PREFENDER    (all on)
// All other parameters are at their defaults (32 access buffers).
// Per round the attacker flushes a 16-line eviction set (base 0x100000,
// step 0x200), the victim loads array[secret * 0x200] with secret = 12
// after computing the address (scale 0x200), and the attacker times the
// 16 lines in random order from the load at PC 0x8008. The number of
// lines each instance shows as cached is the attacker's view.
//   Round A, no noise: without defence exactly the secret's line is cached;
//   with the scale tracker alone exactly two (the secret's and the next
//   one); every configuration with the access tracker shows more than one.
//   Round B, noisy loads (C3): before each attacker probe, 40 loads from 40
//   other PCs touch unrelated lines, more than there are access buffers,
//   so plain LRU recycles the attacker's buffer every time. The access
//   tracker alone is then bypassed (only the secret's line is cached),
//   while full PREFENDER protects the attacker's buffer through the scale
//   buffer and shows more cached lines than the scale tracker alone.
// Loads are presented for one cycle; prefetches are taken one cycle
// later. Watchdog: 60000 cycles.
module tb_security_configs;
  import prefender_pkg::*;

  localparam int    NC     = 5;
  localparam addr_t ARR    = 64'h100000;
  localparam int    NEV    = 16;
  localparam int    SECRET = 12;
  localparam int    NOISE_PCS = 40;

  logic clk = 0, rst_n = 0;
  logic ex_valid = 0, ld_valid = 0;
  ex_instr_t ex_instr = '0;
  pc_t ld_pc = '0;
  addr_t ld_paddr = '0;

  addr_t   probe_addr [NC][4];
  logic    probe_hit  [NC][4];
  logic    pf_valid   [NC];
  pf_req_t pf         [NC];
  pf_evt_t evt        [NC];
  logic    basic_ready[NC];
  logic [5:0] num_protected [NC];

  int checks = 0, failures = 0;
  bit present [NC][addr_t];
  int hits [NC];
  int n_rp [NC];

  localparam bit CFG_ST [NC] = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1};
  localparam bit CFG_AT [NC] = '{1'b0, 1'b0, 1'b1, 1'b1, 1'b1};
  localparam bit CFG_RP [NC] = '{1'b0, 1'b0, 1'b0, 1'b0, 1'b1};

  for (genvar g = 0; g < NC; g++) begin : g_cfg
    prefender #(.ST_EN(CFG_ST[g]), .AT_EN(CFG_AT[g]), .RP_EN(CFG_RP[g])) dut (
      .clk           (clk),
      .rst_n         (rst_n),
      .ex_valid      (ex_valid),
      .ex_instr      (ex_instr),
      .ld_valid      (ld_valid),
      .ld_pc         (ld_pc),
      .ld_paddr      (ld_paddr),
      .probe_addr    (probe_addr[g]),
      .probe_hit     (probe_hit[g]),
      .basic_valid   (1'b0),
      .basic_addr    ('0),
      .basic_ready   (basic_ready[g]),
      .pf_valid      (pf_valid[g]),
      .pf            (pf[g]),
      .pf_ready      (1'b1),
      .evt           (evt[g]),
      .num_protected (num_protected[g])
    );
    always_comb for (int i = 0; i < 4; i++) probe_hit[g][i] = present[g].exists(probe_addr[g][i]);
  end

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // prefetches fill each instance's cache model
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (pf_valid[c]) present[c][pf[c].addr] = 1;
      n_rp[c] += int'(evt[c].rp_pf);
    end
  end

  function automatic ex_instr_t mk(op_e op, int rd, int rs0, int rs1, bit bi, int imm);
    ex_instr_t x;
    x.op = op; x.rd = reg_idx_t'(rd); x.rs0 = reg_idx_t'(rs0); x.rs1 = reg_idx_t'(rs1);
    x.b_imm = bi; x.imm = val_t'(imm);
    return x;
  endfunction

  task automatic issue(ex_instr_t x);
    @(negedge clk); ex_valid = 1; ex_instr = x;
    @(negedge clk); ex_valid = 0;
  endtask

  // one load to every instance; counts attacker hits per instance when
  // count is set
  task automatic do_load(pc_t pc, addr_t a, int base, int dst, bit count);
    issue(mk(OP_LOAD_MEM, dst, base, 0, 1, 0));
    @(negedge clk);
    for (int c = 0; c < NC; c++)
      if (count && present[c].exists(line_of(a))) hits[c]++;
    ld_valid = 1; ld_pc = pc; ld_paddr = a;
    @(negedge clk);
    ld_valid = 0;
    for (int c = 0; c < NC; c++) present[c][line_of(a)] = 1;
  endtask

  task automatic attack_round(bit noisy);
    int order [NEV];
    int j, t;
    // phase 1: flush
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < NEV; i++) present[c].delete(ARR + 64'(i * 'h200));
    // phase 2: victim
    issue(mk(OP_LOAD_IMM, 0, 0, 0, 1, 'h3040));             // r0 = &secret
    issue(mk(OP_LOAD_IMM, 2, 0, 0, 1, 'h0000));             // r2 = array (page offset)
    issue(mk(OP_LOAD_IMM, 3, 0, 0, 1, 'h200));              // r3 = 0x200
    do_load(64'h7000, 64'h3040, 0, 1, 0);                   // r1 = secret
    issue(mk(OP_MUL, 4, 1, 3, 0, 0));                       // r4 = r1 * r3
    issue(mk(OP_ADD, 5, 2, 4, 0, 0));                       // r5 = r2 + r4
    do_load(64'h7010, ARR + 64'(SECRET * 'h200), 5, 6, 0);  // load 0(r5)
    repeat (3) @(negedge clk);
    // phase 3: probe in random order
    for (int i = 0; i < NEV; i++) order[i] = i;
    for (int i = NEV - 1; i > 0; i--) begin
      j = int'($urandom_range(i, 0));
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
    for (int c = 0; c < NC; c++) hits[c] = 0;
    for (int i = 0; i < NEV; i++) begin
      if (noisy)
        for (int k = 0; k < NOISE_PCS; k++)
          do_load(64'h20000 + 64'(k) * 4,
                  64'h800040 + 64'($urandom_range(1023, 0)) * 64'h200, 20, 21, 0);
      do_load(64'h8008, ARR + 64'(order[i] * 'h200), 22, 23, 1);
    end
    $display("%s: cached lines seen by the attacker: none=%0d ST=%0d AT=%0d ST+AT=%0d PREFENDER=%0d",
             noisy ? "noisy loads" : "no noise   ", hits[0], hits[1], hits[2], hits[3], hits[4]);
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    attack_round(0);
    check(hits[0] == 1, $sformatf("no defence: only the secret's line cached (%0d)", hits[0]));
    check(hits[1] == 2, $sformatf("scale tracker: secret's and next line cached (%0d)", hits[1]));
    check(hits[2] > 1, $sformatf("access tracker: more than one line cached (%0d)", hits[2]));
    check(hits[3] > 1, $sformatf("ST+AT: more than one line cached (%0d)", hits[3]));
    check(hits[4] > 1, $sformatf("PREFENDER: more than one line cached (%0d)", hits[4]));

    // let earlier protection expire so that round B starts clean
    repeat (1200) @(negedge clk);

    attack_round(1);
    check(hits[0] == 1, $sformatf("noisy, no defence: only the secret's line (%0d)", hits[0]));
    check(hits[2] == 1, $sformatf("noisy, access tracker bypassed (%0d)", hits[2]));
    check(hits[1] == 2, $sformatf("noisy, scale tracker unaffected (%0d)", hits[1]));
    check(hits[4] > hits[1], $sformatf("noisy, PREFENDER beats ST alone (%0d vs %0d)", hits[4], hits[1]));
    check(n_rp[4] > 0, "record-protector-guided prefetches in full PREFENDER");
    check(n_rp[3] == 0 && n_rp[2] == 0, "no guided prefetches without the record protector");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
