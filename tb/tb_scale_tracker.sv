// tb_scale_tracker - self-checking test of the scale tracker.
//
// Feeds the array[secret*0x200] program through the execute port, then
// presents its three loads at the memory stage. The first two (scale 1)
// must not prefetch; the third, at array base 0x10000 + 12*0x200, must
// prefetch 0x11a00 and hand (0x200, 0x11800) to the record protector.
// With that line marked present in the L1D model the minus side 0x11600
// is chosen, with both present nothing is. A load near the page end may
// only prefetch inside its page; a scale of a whole page prefetches
// nothing; a load whose destination is its own base register still uses
// the scale from before its write. pf_* must be valid in the same cycle
// as the load. Watchdog: 2000 cycles.
module tb_scale_tracker;
  import prefender_pkg::*;

  logic clk = 0, rst_n = 0;
  logic ex_valid = 0, ld_valid = 0;
  ex_instr_t ex_instr = '0;
  addr_t ld_paddr = '0;
  addr_t probe_addr [2];
  logic  probe_hit  [2];
  logic pf_valid, rec_valid;
  addr_t pf_addr, rec_blk;
  val_t rec_sc;
  int checks = 0, failures = 0;
  bit present [addr_t];

  scale_tracker dut (.*);

  always #5 clk = ~clk;
  always_comb for (int i = 0; i < 2; i++) probe_hit[i] = present.exists(probe_addr[i]);

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

  // present one load at the memory stage and check the same-cycle result
  task automatic mem_load(addr_t pa, bit exp_pf, addr_t exp_addr, bit exp_rec, string what);
    @(negedge clk); ld_valid = 1; ld_paddr = pa;
    #1;
    checks++;
    if (pf_valid !== exp_pf || (exp_pf && pf_addr !== exp_addr)) begin
      failures++;
      $display("FAIL %s: pf_valid=%0d pf_addr=%h expected %0d %h", what, pf_valid, pf_addr, exp_pf, exp_addr);
    end
    checks++;
    if (rec_valid !== exp_rec || (exp_rec && (rec_blk !== line_of(pa) || rec_sc !== 16'h200))) begin
      failures++;
      $display("FAIL %s: rec_valid=%0d rec_blk=%h rec_sc=%h", what, rec_valid, rec_blk, rec_sc);
    end
    @(negedge clk); ld_valid = 0;
  endtask

  task automatic victim_load(int base_reg, int dst);
    issue(mk(OP_LOAD_MEM, dst, base_reg, 0, 1, 0));
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    issue(mk(OP_LOAD_MEM, 0, 30, 0, 1, 4));
    issue(mk(OP_LOAD_MEM, 1, 0, 0, 1, 0));
    issue(mk(OP_LOAD_IMM, 2, 0, 0, 1, 'h0000));
    issue(mk(OP_LOAD_IMM, 3, 0, 0, 1, 'h200));
    issue(mk(OP_MUL, 4, 1, 3, 0, 0));
    issue(mk(OP_ADD, 5, 2, 4, 0, 0));
    victim_load(5, 6);
    mem_load(64'h7000, 0, '0, 0, "load r0 (scale 1)");
    mem_load(64'h7100, 0, '0, 0, "load r1 (scale 1)");
    mem_load(64'h11800, 1, 64'h11a00, 1, "victim load +sc");
    present[64'h11a00] = 1;
    victim_load(5, 6);
    mem_load(64'h11800, 1, 64'h11600, 1, "victim load -sc");
    present[64'h11600] = 1;
    victim_load(5, 6);
    mem_load(64'h11800, 0, '0, 1, "both candidates cached");
    victim_load(5, 6);
    mem_load(64'h10e00, 1, 64'h10c00, 1, "page end: only in-page side");
    // scale of a whole page: no prefetch, no record
    issue(mk(OP_SHL, 7, 5, 0, 1, 3));                // sc = 0x1000
    victim_load(7, 8);
    mem_load(64'h20000, 0, '0, 0, "scale = page size");
    // scale equal to a line: no prefetch
    issue(mk(OP_SHR, 9, 5, 0, 1, 3));                // sc = 0x40
    victim_load(9, 10);
    mem_load(64'h20000, 0, '0, 0, "scale = line size");
    // load r5, 0(r5): scale captured before the load's own write
    victim_load(5, 5);
    mem_load(64'h30400, 1, 64'h30600, 1, "rd == base register");
    victim_load(5, 11);
    mem_load(64'h30400, 0, '0, 0, "after load r5 reinitialised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
