// tb_prefender - end-to-end test of PREFENDER at its default size
// (32 access buffers of 8 entries, 8 scale-buffer entries).
//
// The testbench plays a core, its L1D tags and a basic next-line
// prefetcher around the design and runs a Flush+Reload attack with all
// four difficulties the design addresses:
//   phase 1  the attacker flushes a 16-line eviction set, array base
//            0x100000 with a 0x200 step;
//   phase 2  the victim runs load r1 <- secret; r4 = r1 * 0x200;
//            r5 = array + r4; load r6 <- 0(r5) with secret = 12
//            (one victim access only: C1);
//   phase 3  the attacker's load at PC 0x8008 times all 16 lines in random
//            order (C2), interleaved with loads from 40 other PCs (C3) and
//            with its own accesses to non-eviction lines at +0x100 (C4).
// It checks that the scale tracker prefetches line 13 one cycle after the
// victim load, that every record-protector-guided prefetch lies on the
// victim's pattern, and that the attacker sees more than one eviction line
// hit, i.e. cannot single out the secret. A strided benign loop exercises
// the DiffMin prefetch; a burst with the prefetch port stalled fills the
// queue; 33 PCs landing on the pattern exhaust the buffers; an idle period
// ends protection. Each mechanism (ST, AT, RP-guided and basic prefetches,
// scale record and hit, protection set / release by count / release by
// idle time, LRU passing over a protected buffer, untracked load, queue
// drop) must occur at least once. Watchdog: 20000 cycles.
module tb_prefender;
  import prefender_pkg::*;

  localparam addr_t ARR  = 64'h100000;
  localparam int    NEV  = 16;
  localparam int    SECRET = 12;

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
  int n_st, n_at, n_rp, n_basic, n_rec, n_sbhit, n_pset, n_pclr, n_skip, n_noalloc, n_drop;
  int n_idle_clr, cyc, st_pf_cycle, victim_cycle;
  bit loads_active;

  prefender dut (.*);

  always #5 clk = ~clk;
  always_comb for (int i = 0; i < 4; i++) probe_hit[i] = present.exists(probe_addr[i]);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // monitor: L1D fills from prefetches, event counters
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_st += int'(evt.st_pf);  n_at += int'(evt.at_pf);  n_rp += int'(evt.rp_pf);
    n_rec += int'(evt.sb_record); n_sbhit += int'(evt.sb_hit);
    n_pset += int'(evt.prot_set); n_pclr += int'(evt.prot_clr);
    n_skip += int'(evt.alloc_skip); n_noalloc += int'(evt.no_alloc); n_drop += int'(evt.pf_drop);
    if (evt.prot_clr && !loads_active) n_idle_clr++;
    if (pf_valid && pf_ready) begin
      present[pf.addr] = 1;
      if (pf.src == PF_BASIC) n_basic++;
      if (pf.src == PF_ST && st_pf_cycle < 0) st_pf_cycle = cyc;
      if (pf.src == PF_RP) check(pf.addr[8:0] == '0, $sformatf("guided prefetch %h on the victim pattern", pf.addr));
      if (pf.src == PF_ST) check(pf.addr == ARR + 64'((SECRET + 1) * 'h200), $sformatf("ST prefetch %h is line 13", pf.addr));
    end
  end

  // basic next-line prefetcher model: offers the line after each load
  always @(negedge clk) begin
    basic_valid <= 1'b0;
    if (ld_valid && basic_ready && ld_paddr[12]) begin
      basic_valid <= 1'b1;
      basic_addr  <= ld_paddr + 64'h40;
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

  // a load: execute stage, then memory stage; the line is then cached.
  // Returns whether it hit in the L1D (the attacker's timing result).
  task automatic do_load(pc_t pc, addr_t a, int base, int dst, output bit hit);
    issue(mk(OP_LOAD_MEM, dst, base, 0, 1, 0));
    @(negedge clk);
    hit = present.exists(line_of(a));
    ld_valid = 1; ld_pc = pc; ld_paddr = a;
    @(negedge clk);
    ld_valid = 0;
    present[line_of(a)] = 1;
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
    int hits, hit_secret, j, t;
    bit h;
    st_pf_cycle = -1;
    loads_active = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- attack, three rounds ----------------------------------------------
    for (int round = 0; round < 3; round++) begin
      // phase 1: flush the eviction set
      for (int i = 0; i < NEV; i++) begin
        present.delete(ARR + 64'(i * 'h200));
        present.delete(ARR + 64'(i * 'h200 + 'h100));
      end
      // phase 2: victim
      issue(mk(OP_LOAD_IMM, 0, 0, 0, 1, 'h3000));           // r0 = &secret
      issue(mk(OP_LOAD_IMM, 2, 0, 0, 1, 'h0000));           // r2 = array (page offset)
      issue(mk(OP_LOAD_IMM, 3, 0, 0, 1, 'h200));            // r3 = 0x200
      do_load(64'h7000, 64'h3000, 0, 1, h);                 // r1 = secret
      issue(mk(OP_MUL, 4, 1, 3, 0, 0));                     // r4 = r1 * r3
      issue(mk(OP_ADD, 5, 2, 4, 0, 0));                     // r5 = r2 + r4
      issue(mk(OP_LOAD_MEM, 6, 5, 0, 1, 0));                // load r6, 0(r5)
      @(negedge clk);
      ld_valid = 1; ld_pc = 64'h7010; ld_paddr = ARR + 64'(SECRET * 'h200);
      victim_cycle = cyc;
      @(negedge clk);
      ld_valid = 0;
      present[ARR + 64'(SECRET * 'h200)] = 1;
      if (round == 0) begin
        @(negedge clk);
        // load sampled at edge victim_cycle+1, prefetch taken at the next edge
        check(st_pf_cycle == victim_cycle + 2,
              $sformatf("ST prefetch one cycle after the victim load (%0d vs %0d)", st_pf_cycle, victim_cycle));
      end
      // phase 3: attacker probes in random order with noise
      for (int i = 0; i < NEV; i++) order[i] = i;
      for (int i = NEV - 1; i > 0; i--) begin
        j = int'($urandom_range(i, 0));
        t = order[i]; order[i] = order[j]; order[j] = t;
      end
      hits = 0; hit_secret = 0;
      for (int i = 0; i < NEV; i++) begin
        for (int k = 0; k < 3; k++)                         // C3: noisy loads
          do_load(64'h20000 + 64'($urandom_range(39, 0)) * 4,
                  64'h800080 + 64'($urandom_range(255, 0)) * 64'h200, 20, 21, h);
        if (i % 4 == 2)                                     // C4: non-eviction line
          do_load(64'h8008, ARR + 64'(order[i] * 'h200 + 'h100), 22, 23, h);
        do_load(64'h8008, ARR + 64'(order[i] * 'h200), 22, 23, h);
        if (h) hits++;
        if (h && order[i] == SECRET) hit_secret = 1;
      end
      $display("round %0d: attacker saw %0d of %0d eviction lines cached", round, hits, NEV);
      check(hit_secret == 1, "victim line cached");
      check(hits > 1, $sformatf("attacker sees %0d cached eviction lines, more than the victim's one", hits));
    end

    // ---- the attacker's load walks a long run of pattern lines: the
    // guided prefetches exceed the protection limit
    for (int i = 0; i < 24; i++) do_load(64'h8008, ARR + 64'h4000 + 64'(i * 'h200), 22, 23, h);
    check(n_pclr > 0, "protection ended by the prefetch count");

    // ---- benign strided loop: DiffMin prefetching --------------------------
    for (int i = 0; i < 8; i++) do_load(64'h9000, 64'h400040 + 64'(i * 'h300), 24, 25, h);
    repeat (4) @(negedge clk);
    check(present.exists(64'h400040 + 64'(8 * 'h300)), "DiffMin prefetch ran ahead of the strided loop");

    // ---- 33 PCs on the victim pattern with the prefetch port stalled --------
    pf_ready = 0;
    for (int p = 0; p < 33; p++) do_load(64'h30000 + 64'(p) * 4, ARR + 64'h10000 + 64'(p * 'h200), 26, 27, h);
    pf_ready = 1;

    // ---- idle period: protection times out --------------------------------
    repeat (20) @(negedge clk);
    loads_active = 0;
    repeat (1100) @(negedge clk);
    check(num_protected == 0, "idle buffers lose protection");

    $display("events: st=%0d at=%0d rp=%0d basic=%0d rec=%0d sbhit=%0d pset=%0d pclr=%0d idleclr=%0d skip=%0d noalloc=%0d drop=%0d",
             n_st, n_at, n_rp, n_basic, n_rec, n_sbhit, n_pset, n_pclr, n_idle_clr, n_skip, n_noalloc, n_drop);
    check(n_st > 0, "scale tracker prefetch happened");
    check(n_at > 0, "access tracker DiffMin prefetch happened");
    check(n_rp > 0, "record-protector-guided prefetch happened");
    check(n_basic > 0, "basic prefetch passed the multiplexer");
    check(n_rec > 0, "scale buffer recorded a pattern");
    check(n_sbhit > 0, "scale buffer hit");
    check(n_pset > 0, "buffer protection set");
    check(n_pclr > n_idle_clr, "protection released by prefetch count");
    check(n_idle_clr > 0, "protection released by idle time");
    check(n_skip > 0, "LRU passed over a protected buffer");
    check(n_noalloc > 0, "load left untracked with all buffers protected");
    check(n_drop > 0, "prefetch queue overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
