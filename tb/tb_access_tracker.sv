// tb_access_tracker - self-checking test of the access tracker (4 buffers).
//
// 1 The access-buffer example: the load at 0x8008 touches 0x1000, 0x1f00,
//   0x1600, 0x2800 (no prefetch, at most 4 entries) and then 0x1c00:
//   DiffMin 0x300, 0x1f00 is already recorded, so 0x1900 is prefetched.
// 2 LRU allocation: three more loads take the free buffers, a fifth load
//   replaces the least recently used buffer (0x8008's), so 0x8008 starts
//   over and cannot prefetch.
// 3 Record protector: a load hitting the scale buffer (sc 0x400, BlkAddr
//   0x1000) is protected and prefetches with 0x400 ("guided"); noisy
//   loads from other PCs then recycle the other buffers but pass over the
//   protected one; when the scale buffer no longer hits, the buffer's
//   protected scale still guides the prefetch; after more than 3 guided
//   prefetches protection ends and the next prefetch uses DiffMin again.
// 4 With every buffer protected a new load is not tracked.
// Prefetches must appear in the load's cycle. Watchdog: 3000 cycles.
module tb_access_tracker;
  import prefender_pkg::*;

  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  logic ld_valid = 0;
  pc_t ld_pc = '0;
  addr_t ld_paddr = '0;
  logic sb_hit = 0;
  val_t sb_sc = '0;
  addr_t sb_blk = '0;
  addr_t probe_addr [2];
  logic  probe_hit  [2];
  logic pf_valid, pf_guided, prot_set_evt, prot_clr_evt, alloc_skip_evt, no_alloc_evt;
  addr_t pf_addr;
  logic [$clog2(NB+1)-1:0] num_protected;
  int checks = 0, failures = 0;
  int n_skip = 0, n_clr = 0, n_set = 0, n_noalloc = 0;
  bit present [addr_t];

  access_tracker #(.NUM_BUF(NB), .ENTRIES(8), .THRESH(4), .PROT_PF_LIMIT(3), .PROT_IDLE_LIMIT(1000)) dut (.*);

  always #5 clk = ~clk;
  always_comb for (int i = 0; i < 2; i++) probe_hit[i] = present.exists(probe_addr[i]);
  always @(posedge clk) if (rst_n) begin
    n_skip    += int'(alloc_skip_evt);
    n_clr     += int'(prot_clr_evt);
    n_set     += int'(prot_set_evt);
    n_noalloc += int'(no_alloc_evt);
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(pc_t pc, addr_t a, bit hit, bit exp_pf, addr_t exp_a, bit exp_g, string what);
    @(negedge clk);
    ld_valid = 1; ld_pc = pc; ld_paddr = a; sb_hit = hit;
    #1;
    check(pf_valid === exp_pf && (!exp_pf || (pf_addr === exp_a && pf_guided === exp_g)),
          $sformatf("%s: pf_valid=%0d addr=%h guided=%0d, expected %0d %h %0d",
                    what, pf_valid, pf_addr, pf_guided, exp_pf, exp_a, exp_g));
    @(negedge clk);
    ld_valid = 0; sb_hit = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1
    load(64'h8008, 64'h1000, 0, 0, '0, 0, "A1");
    load(64'h8008, 64'h1f00, 0, 0, '0, 0, "A2");
    load(64'h8008, 64'h1600, 0, 0, '0, 0, "A3");
    load(64'h8008, 64'h2800, 0, 0, '0, 0, "A4");
    load(64'h8008, 64'h1c00, 0, 1, 64'h1900, 0, "A5 DiffMin 0x300");
    present[64'h1900] = 1;
    load(64'h8008, 64'h1c00, 0, 0, '0, 0, "A6 both candidates known");
    // 2
    load(64'h9000, 64'h40000, 0, 0, '0, 0, "B1");
    load(64'h9100, 64'h50000, 0, 0, '0, 0, "B2");
    load(64'h9200, 64'h60000, 0, 0, '0, 0, "B3");
    load(64'h9300, 64'h70000, 0, 0, '0, 0, "B4 replaces LRU");
    load(64'h8008, 64'h2200, 0, 0, '0, 0, "B5 0x8008 starts over");
    // 3
    sb_sc = 16'h400; sb_blk = 64'h1000;
    load(64'ha000, 64'h2400, 1, 1, 64'h2800, 1, "C1 scale-buffer hit");
    check(n_set == 1 && num_protected == 1, "one buffer protected");
    for (int k = 0; k < 6; k++)
      load(64'hb000 + 64'(k) * 8, 64'h80000 + 64'(k) * 64'h1000, 0, 0, '0, 0, "noise");
    check(n_skip > 0, "LRU passed over the protected buffer");
    check(num_protected == 1, "protected buffer kept");
    load(64'ha000, 64'h2c00, 0, 1, 64'h3000, 1, "C2 protected-scale hit");
    load(64'ha000, 64'h3400, 0, 1, 64'h3800, 1, "C3 protected-scale hit");
    check(n_clr == 0, "still protected after 3 guided prefetches");
    load(64'ha000, 64'h3c00, 0, 1, 64'h4000, 1, "C4 4th guided prefetch");
    check(n_clr == 1 && num_protected == 0, "protection released");
    load(64'ha000, 64'h4400, 0, 1, 64'h4c00, 0, "C5 back to DiffMin (0x800) after release");
    // 4: protect all four buffers, then a new PC
    for (int k = 0; k < NB; k++)
      load(64'hc000 + 64'(k) * 8, 64'h1000 + 64'(k) * 64'h400, 1, 1,
           64'h1000 + 64'(k + 1) * 64'h400, 1, "protect");
    check(num_protected == NB, "all buffers protected");
    load(64'hd000, 64'h90000, 0, 0, '0, 0, "D untracked");
    check(n_noalloc == 1, "load with no buffer reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
