// tb_access_buffer - self-checking test of one access buffer.
//
// Replays the access-buffer example: a load at InstAddr 0x8008 touches
// 0x1000, 0x1f00, 0x1600, 0x2800; with four entries the threshold (more
// than 4) is not passed; the fifth line 0x1c00 passes it and DiffMin
// becomes |0x1f00 - 0x1c00| = 0x300. A repeated line adds no entry. Filling
// all eight entries and adding one more must replace the least recently
// used line (0x1f00). Protection: prot_set copies the scale and sets the
// flag; the flag clears after more than PROT_PF_LIMIT (3 here) hit-scale
// prefetches and after PROT_IDLE_LIMIT (20 here) idle cycles; allocation
// clears the entries. Watchdog: 3000 cycles.
module tb_access_buffer;
  import prefender_pkg::*;

  localparam int E = 8;
  logic clk = 0, rst_n = 0;
  pc_t ld_pc = '0;
  addr_t blk = '0;
  logic activate = 0, allocate = 0;
  logic inst_valid, inst_match, over_thresh, diff_nxt_v, diffmin_v;
  addr_t nxt_blk [E];
  logic  nxt_v [E];
  diff_t diff_nxt, diffmin;
  logic prot_set = 0, prot_pf = 0;
  val_t prot_sc_in = '0;
  addr_t prot_blk_in = '0;
  logic prot_flag, prot_sc_v, prot_clr;
  val_t prot_sc;
  addr_t prot_blk;
  int checks = 0, failures = 0;
  int clr_seen = 0;

  access_buffer #(.ENTRIES(E), .THRESH(4), .PROT_PF_LIMIT(3), .PROT_IDLE_LIMIT(20)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && prot_clr) clr_seen++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit holds(addr_t a);
    for (int i = 0; i < E; i++) if (nxt_v[i] && nxt_blk[i] == a) return 1;
    return 0;
  endfunction

  function automatic int count();
    int c = 0;
    for (int i = 0; i < E; i++) c += int'(nxt_v[i]);
    return c;
  endfunction

  // one access by the buffer's load; checks happen before the edge
  task automatic access(addr_t a, bit alloc, bit exp_over);
    @(negedge clk);
    ld_pc = 64'h8008; blk = a; activate = 1; allocate = alloc;
    #1;
    check(over_thresh === exp_over, $sformatf("over_thresh for %h", a));
    check(holds(a), $sformatf("entry %h recorded", a));
    @(negedge clk);
    activate = 0; allocate = 0;
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
    #1 check(!inst_valid, "buffer empty after reset");
    access(64'h1000, 1, 0);
    ld_pc = 64'h8008; #1 check(inst_match, "InstAddr 0x8008 matches");
    ld_pc = 64'h8010; #1 check(!inst_match, "InstAddr 0x8010 does not match");
    access(64'h1f00, 0, 0);
    access(64'h1600, 0, 0);
    access(64'h2800, 0, 0);
    check(!diffmin_v, "no DiffMin with 4 entries");
    @(negedge clk); ld_pc = 64'h8008; blk = 64'h1c00; activate = 1; #1;
    check(over_thresh && diff_nxt_v && diff_nxt == 20'h300, $sformatf("DiffMin next = %h", diff_nxt));
    @(negedge clk); activate = 0; #1;
    check(diffmin_v && diffmin == 20'h300, $sformatf("DiffMin = %h, expected 0x300", diffmin));
    access(64'h1000, 0, 1);
    check(count() == 5, "repeated line adds no entry");
    access(64'h3000, 0, 1);
    access(64'h3100, 0, 1);
    check(diffmin == 20'h100, $sformatf("DiffMin = %h, expected 0x100", diffmin));
    access(64'h3300, 0, 1);
    check(count() == 8, "eight entries");
    access(64'h5000, 0, 1);
    check(!holds(64'h1f00), "LRU line 0x1f00 replaced");
    check(holds(64'h1000) && holds(64'h1600), "recent lines kept");
    // far lines do not change DiffMin (difference beyond 20 bits)
    access(64'h4000_0000, 0, 1);
    check(diffmin == 20'h100, "distance beyond 20 bits ignored");
    // protection by prefetch count
    @(negedge clk); prot_set = 1; activate = 1; blk = 64'h1000; prot_sc_in = 16'h400; prot_blk_in = 64'h1000;
    @(negedge clk); prot_set = 0; activate = 0; #1;
    check(prot_flag && prot_sc_v && prot_sc == 16'h400 && prot_blk == 64'h1000, "protected scale copied");
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); prot_pf = 1; activate = 1; blk = 64'h1000;
    end
    @(negedge clk); prot_pf = 0; activate = 0; #1;
    check(prot_flag, "still protected after 3 hit-scale prefetches");
    @(negedge clk); prot_pf = 1; activate = 1; #1;
    check(prot_clr, "release pulse on 4th prefetch");
    @(negedge clk); prot_pf = 0; activate = 0; #1;
    check(!prot_flag && prot_sc_v, "unprotected, scale kept");
    // protection by idle time
    @(negedge clk); prot_set = 1; activate = 1;
    @(negedge clk); prot_set = 0; activate = 0;
    repeat (18) @(negedge clk);
    #1 check(prot_flag, "protected before idle limit");
    repeat (3) @(negedge clk);
    #1 check(!prot_flag, "released after idle limit");
    check(clr_seen == 2, $sformatf("two release pulses, saw %0d", clr_seen));
    // reallocation clears everything
    @(negedge clk); ld_pc = 64'h9000; blk = 64'h7000; activate = 1; allocate = 1; #1;
    check(count() == 1 && holds(64'h7000) && !over_thresh, "allocation clears entries");
    @(negedge clk); activate = 0; allocate = 0; ld_pc = 64'h9000; #1;
    check(inst_match && !diffmin_v && !prot_sc_v, "new owner, DiffMin and scale invalid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
