// tb_pf_controller - self-checking test of the prefetch controller (FIFO
// depth 4).
//
// Checks: a scale-tracker and an access-tracker request in the same cycle
// leave in that order, one cycle later, with their source tags (PF_RP for
// a guided access-tracker request); two requests with the same address
// are written once; a basic-prefetcher request leaves only when the FIFO
// is empty and waits while tracker requests are queued; with pf_ready low
// the FIFO fills and further requests are dropped and reported, and the
// queued ones then leave in order. Watchdog: 2000 cycles.
module tb_pf_controller;
  import prefender_pkg::*;

  logic clk = 0, rst_n = 0;
  logic st_valid = 0, at_valid = 0, at_guided = 0, basic_valid = 0, pf_ready = 1;
  addr_t st_addr = '0, at_addr = '0, basic_addr = '0;
  logic basic_ready, pf_valid, pf_drop;
  pf_req_t pf;
  int checks = 0, failures = 0, drops = 0;

  pf_controller #(.DEPTH(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && pf_drop) drops++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // value on the output after #1 of the current negedge
  task automatic expect_out(bit v, addr_t a, pf_src_e s, string what);
    #1 check(pf_valid === v && (!v || (pf.addr === a && pf.src === s)),
             $sformatf("%s: valid=%0d addr=%h src=%0d", what, pf_valid, pf.addr, pf.src));
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
    expect_out(0, '0, PF_ST, "idle");
    // two requests in one cycle
    @(negedge clk); st_valid = 1; st_addr = 64'h1000; at_valid = 1; at_addr = 64'h2000; at_guided = 1;
    #1 check(pf_valid === 0, "no same-cycle bypass");
    @(negedge clk); st_valid = 0; at_valid = 0;
    expect_out(1, 64'h1000, PF_ST, "ST first, one cycle later");
    @(negedge clk); expect_out(1, 64'h2000, PF_RP, "guided AT second");
    @(negedge clk); expect_out(0, '0, PF_ST, "drained");
    // same address twice
    @(negedge clk); st_valid = 1; st_addr = 64'h3000; at_valid = 1; at_addr = 64'h3000; at_guided = 0;
    @(negedge clk); st_valid = 0; at_valid = 0;
    expect_out(1, 64'h3000, PF_ST, "duplicate written once");
    @(negedge clk); expect_out(0, '0, PF_ST, "duplicate not repeated");
    // basic prefetcher when idle
    @(negedge clk); basic_valid = 1; basic_addr = 64'h4010;
    #1 check(basic_ready, "basic accepted when idle");
    @(negedge clk); basic_valid = 0;
    expect_out(1, 64'h4000, PF_BASIC, "basic request (line aligned)");
    @(negedge clk); expect_out(0, '0, PF_ST, "basic drained");
    // basic waits behind tracker requests
    pf_ready = 0;
    @(negedge clk); basic_valid = 1; basic_addr = 64'h5000; at_valid = 1; at_addr = 64'h6000;
    @(negedge clk); basic_valid = 0; at_valid = 0;
    expect_out(1, 64'h6000, PF_AT, "tracker request ahead of basic");
    pf_ready = 1;
    @(negedge clk); expect_out(1, 64'h5000, PF_BASIC, "basic after tracker");
    @(negedge clk); expect_out(0, '0, PF_ST, "empty again");
    // overflow
    pf_ready = 0;
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); st_valid = 1; st_addr = 64'h10000 + 64'(k) * 64'h100;
      at_valid = 1; at_addr = 64'h20000 + 64'(k) * 64'h100;
    end
    @(negedge clk); st_valid = 0; at_valid = 0;
    check(drops == 1, $sformatf("overflow reported (%0d drop cycles)", drops));
    pf_ready = 1;
    expect_out(1, 64'h10000, PF_ST, "queue 0");
    @(negedge clk); expect_out(1, 64'h20000, PF_AT, "queue 1");
    @(negedge clk); expect_out(1, 64'h10100, PF_ST, "queue 2");
    @(negedge clk); expect_out(1, 64'h20100, PF_AT, "queue 3");
    @(negedge clk); expect_out(0, '0, PF_ST, "dropped requests gone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
