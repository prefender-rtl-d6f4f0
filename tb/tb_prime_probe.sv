// tb_prime_probe - end-to-end Prime+Probe attack on PREFENDER at its
// default size.
//
// In Prime+Probe the attacker shares no memory with the victim. It fills
// ("primes") the cache sets of the victim's array with lines of its own
// array, lets the victim run, and then times its own lines again: the one
// that now misses shares a set with the victim's secret-dependent line.
// The victim array is at 0x100000 and the attacker array at 0x2a0000, a
// different page; both use a 0x200 step for 16 lines, so attacker line k
// and victim line k fall in the same L1D set (address bits 14:6). The
// testbench plays the core and a simplified L1D: each of these sets holds
// either the attacker's or the victim's line, and filling one (by a load or
// a prefetch) evicts the other. Other lines are simply present once used.
//
// Each round: the attacker primes its 16 lines; the victim runs
// r4 = secret * 0x200, load [array + r4] with secret = 12; the attacker
// probes its 16 lines from one load PC and records which missed. What is
// checked:
//   * the scale tracker prefetches victim line 13 on the victim's load,
//     which evicts a second attacker line: after phase 2 at least two
//     attacker lines are gone, not one;
//   * the attacker's own lines hit the scale buffer although they lie in
//     another page, because the pattern test only uses the set-index
//     part of the distance; the attacker's access buffer is protected;
//   * every prefetch guided by the record protector lies on the 0x200
//     grid that the set-index pattern test accepts (this includes lines
//     outside both arrays, e.g. the victim's own load of the secret);
//   * round 0 probes in ascending order, as a plain timing loop does: the
//     access tracker refills each evicted line before it is timed, so the
//     attacker sees no miss at all;
//   * rounds 1-7 probe in random order. When the secret's line is timed
//     before its neighbours nothing can refill it in time, and its miss
//     may be the only one; such rounds are counted and must be fewer than
//     all random rounds (without the defence every round singles out the
//     secret).
// Interface timing as in the design: a load is presented for one cycle,
// prefetches are accepted one cycle after their load. Watchdog: 20000
// cycles.
module tb_prime_probe;
  import prefender_pkg::*;

  localparam addr_t VARR   = 64'h100000;
  localparam addr_t AARR   = 64'h2a0000;
  localparam int    NEV    = 16;
  localparam int    SECRET = 12;
  localparam int    ROUNDS = 8;

  logic clk = 0, rst_n = 0;
  logic ex_valid = 0, ld_valid = 0, basic_valid = 0, pf_ready = 1;
  ex_instr_t ex_instr = '0;
  pc_t ld_pc = '0;
  addr_t ld_paddr = '0, basic_addr = '0;
  addr_t probe_addr [4];
  logic  probe_hit  [4];
  logic basic_ready, pf_valid;
  pf_req_t pf;
  pf_evt_t evt;
  logic [5:0] num_protected;

  int checks = 0, failures = 0;
  bit present [addr_t];
  int n_st, n_rp, n_sbhit_att, n_pset;
  bit in_probe;

  prefender dut (.*);

  always #5 clk = ~clk;
  always_comb for (int i = 0; i < 4; i++) probe_hit[i] = present.exists(probe_addr[i]);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // simplified L1D: a line of either array evicts its partner in the
  // same set
  function automatic void fill(addr_t line);
    present[line] = 1;
    if (line >= VARR && line < VARR + 64'(NEV * 'h200) && line[8:0] == '0)
      present.delete(AARR + (line - VARR));
    else if (line >= AARR && line < AARR + 64'(NEV * 'h200) && line[8:0] == '0)
      present.delete(VARR + (line - AARR));
  endfunction

  // the recorded pattern as the 15-bit set-index test sees it: every line
  // whose low 15 address bits differ from the victim's by a multiple of
  // 0x200
  function automatic bit on_pattern(addr_t a);
    return a[8:0] == '0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    n_st  += int'(evt.st_pf);
    n_rp  += int'(evt.rp_pf);
    n_pset += int'(evt.prot_set);
    if (in_probe && evt.sb_hit) n_sbhit_att++;
    if (pf_valid && pf_ready) begin
      fill(pf.addr);
      if (pf.src == PF_RP)
        check(on_pattern(pf.addr), $sformatf("guided prefetch %h on an array's pattern", pf.addr));
      if (pf.src == PF_ST)
        check(pf.addr == VARR + 64'((SECRET + 1) * 'h200), $sformatf("ST prefetch %h is victim line 13", pf.addr));
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

  // a load through execute and memory; returns whether it hit the L1D
  task automatic do_load(pc_t pc, addr_t a, int base, int dst, output bit hit);
    issue(mk(OP_LOAD_MEM, dst, base, 0, 1, 0));
    @(negedge clk);
    hit = present.exists(line_of(a));
    ld_valid = 1; ld_pc = pc; ld_paddr = a;
    @(negedge clk);
    ld_valid = 0;
    fill(line_of(a));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [NEV];
    int misses, missed, gone, j, t, leaks;
    bit h;
    leaks = 0;
    in_probe = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int round = 0; round < ROUNDS; round++) begin
      // phase 1: prime
      for (int i = 0; i < NEV; i++) do_load(64'h8000, AARR + 64'(i * 'h200), 22, 23, h);
      repeat (4) @(negedge clk);
      // phase 2: victim
      issue(mk(OP_LOAD_IMM, 0, 0, 0, 1, 'h3000));           // r0 = &secret
      issue(mk(OP_LOAD_IMM, 2, 0, 0, 1, 'h0000));           // r2 = array (page offset)
      issue(mk(OP_LOAD_IMM, 3, 0, 0, 1, 'h200));            // r3 = 0x200
      do_load(64'h7000, 64'h3000, 0, 1, h);                 // r1 = secret
      issue(mk(OP_MUL, 4, 1, 3, 0, 0));                     // r4 = r1 * r3
      issue(mk(OP_ADD, 5, 2, 4, 0, 0));                     // r5 = r2 + r4
      do_load(64'h7010, VARR + 64'(SECRET * 'h200), 5, 6, h);
      repeat (4) @(negedge clk);
      gone = 0;
      for (int i = 0; i < NEV; i++) if (!present.exists(AARR + 64'(i * 'h200))) gone++;
      check(gone >= 2, $sformatf("round %0d: %0d attacker lines evicted in phase 2, more than one", round, gone));
      // phase 3: probe in random order
      for (int i = 0; i < NEV; i++) order[i] = i;
      for (int i = NEV - 1; i > 0 && round > 0; i--) begin
        j = int'($urandom_range(i, 0));
        t = order[i]; order[i] = order[j]; order[j] = t;
      end
      in_probe = 1;
      misses = 0; missed = -1;
      for (int i = 0; i < NEV; i++) begin
        do_load(64'h8008, AARR + 64'(order[i] * 'h200), 24, 25, h);
        if (!h) begin misses++; missed = order[i]; end
      end
      repeat (4) @(negedge clk);
      in_probe = 0;
      $display("round %0d: attacker saw %0d misses", round, misses);
      if (round == 0)
        check(misses == 0, $sformatf("in-order probe sees only hits (%0d misses)", misses));
      else if (misses == 1 && missed == SECRET) leaks++;
    end

    $display("events: st=%0d rp=%0d sbhit(attacker)=%0d pset=%0d", n_st, n_rp, n_sbhit_att, n_pset);
    $display("random-order rounds in which the attacker singled out the secret: %0d of %0d", leaks, ROUNDS - 1);
    check(leaks < ROUNDS - 1, $sformatf("attacker singled out the secret in %0d of %0d random-order rounds", leaks, ROUNDS - 1));
    check(n_st >= ROUNDS, "scale tracker prefetched in every round");
    check(n_sbhit_att > 0, "attacker's own lines hit the scale buffer");
    check(n_pset > 0, "attacker's access buffer protected");
    check(n_rp > 0, "record-protector-guided prefetch happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
