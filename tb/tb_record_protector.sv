// tb_record_protector - self-checking test of the record protector.
//
// Builds the record-protector example: entry 0 holds (0x160, 0x1340) and
// entry 1 (0x100, 0x2000). (The published example has 0x1300 in entry 0;
// with the published match rule, % min(sc', sc_i), that entry and entry 1
// would match each other, so 0x1340 is used.) The victim pattern
// (0x400, 0x1000) is a subset of entry 1's, so entry 1 is overwritten with
// it. The attacker line 0x2400 then hits with scale 0x400 and BlkAddr
// 0x1000, while 0x2200 (on the replaced pattern only) misses. A pattern contained in a stored
// larger-scale one, (0x200, 0x1800), is not recorded. Six unrelated
// patterns fill the buffer and a seventh replaces entry 0 by round robin.
// Hits are combinational; a record is visible one cycle later.
// Watchdog: 2000 cycles.
module tb_record_protector;
  import prefender_pkg::*;

  logic clk = 0, rst_n = 0;
  logic rec_valid = 0, chk_valid = 0;
  val_t rec_sc = '0;
  addr_t rec_blk = '0, chk_blk = '0;
  logic sb_hit, rec_evt;
  val_t sb_sc;
  addr_t sb_blk;
  int checks = 0, failures = 0;

  record_protector #(.SB_ENTRIES(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic rec(int sc, addr_t b, bit exp_evt, string what);
    @(negedge clk); rec_valid = 1; rec_sc = val_t'(sc); rec_blk = b;
    #1 check(rec_evt === exp_evt, $sformatf("%s: rec_evt=%0d", what, rec_evt));
    @(negedge clk); rec_valid = 0;
  endtask

  task automatic chk(addr_t b, bit exp_hit, int exp_sc, addr_t exp_blk, string what);
    @(negedge clk); chk_valid = 1; chk_blk = b;
    #1 check(sb_hit === exp_hit && (!exp_hit || (sb_sc === val_t'(exp_sc) && sb_blk === exp_blk)),
             $sformatf("%s: hit=%0d sc=%h blk=%h", what, sb_hit, sb_sc, sb_blk));
    chk_valid = 0;
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
    chk(64'h2400, 0, 0, '0, "empty buffer misses");
    rec('h160, 64'h1340, 1, "record entry 0");
    rec('h100, 64'h2000, 1, "record entry 1");
    chk(64'h2200, 1, 'h100, 64'h2000, "0x2200 on pattern 0x100");
    chk(64'h18c0, 1, 'h160, 64'h1340, "0x18c0 on pattern 0x160");
    rec('h400, 64'h1000, 1, "victim pattern upgrades entry 1");
    chk(64'h2400, 1, 'h400, 64'h1000, "attacker line 0x2400 hits");
    chk(64'h2200, 0, 0, '0, "0x2200 no longer hits");
    chk(64'h0c00, 1, 'h400, 64'h1000, "0x0c00 below the base hits");
    rec('h200, 64'h1800, 0, "covered pattern not recorded");
    chk(64'h1a00, 0, 0, '0, "covered pattern absent");
    for (int k = 1; k <= 6; k++)
      rec('hfc0, 64'(k) * 64'h40, 1, "fill");
    chk(64'h18c0, 1, 'h160, 64'h1340, "entry 0 still present");
    rec('hfc0, 64'h1c0, 1, "round-robin replacement");
    chk(64'h18c0, 0, 0, '0, "entry 0 replaced");
    chk(64'h2400, 1, 'h400, 64'h1000, "entry 1 kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
