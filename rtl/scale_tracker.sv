// scale_tracker - PREFENDER's Scale Tracker (ST).
//
// The scale tracker guesses which other cachelines a victim load could
// have touched. It tracks, in the calculation buffer, how every register's
// value was built from immediates by additions and multiplications; the
// resulting scale sc of a load's base register is the step between the
// addresses that load can produce. When a load with target address addr'
// executes and LINE_BYTES < sc < PAGE_BYTES, the lines of addr' + sc and
// addr' - sc that lie in the same page as addr' are candidates. Candidates
// already in the L1D are skipped and at most one line is prefetched per
// load (the + side first). The same (sc, line of addr') pair is handed to
// the record protector's scale buffer.
//
// Interface and timing:
//   ex_valid/ex_instr  one instruction per cycle from the execute stage,
//                      in program order. For a load from memory the scale
//                      of its base register rs0 is captured here, before
//                      the load's own write of rd, and kept in a small
//                      in-order queue until the load reaches memory.
//   ld_valid/ld_paddr  the same load when it accesses the L1D (memory
//                      stage), with its physical target address. Loads
//                      arrive in the order they left execute.
//   probe_addr/hit     two combinational presence probes into the L1D tags.
//   pf_valid/pf_addr   combinational in the ld_valid cycle.
//   rec_*              combinational in the ld_valid cycle.
// The queue between execute and memory is this implementation's choice;
// the publication only says the calculation buffer is fed by the execute
// stage and the prefetcher by the memory stage. A load whose queue entry
// is missing uses sc = 1 and so prefetches nothing.
// Synthesis sees some output bits as fixed or copied: the low 6 bits of
// every line address are zero, and the page bits of probe_addr and
// pf_addr equal those of ld_paddr, since candidates stay in the page.
module scale_tracker
  import prefender_pkg::*;
#(
  parameter int NUM_REGS = 32,
  parameter int LQ_DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      ex_valid,
  input  ex_instr_t ex_instr,
  input  logic      ld_valid,
  input  addr_t     ld_paddr,
  output addr_t     probe_addr [2],
  input  logic      probe_hit  [2],
  output logic      pf_valid,
  output addr_t     pf_addr,
  output logic      rec_valid,
  output val_t      rec_sc,
  output addr_t     rec_blk
);

  localparam int PTR_W = $clog2(LQ_DEPTH);

  val_t base_sc;
  logic base_fva_v;

  calc_buffer #(.NUM_REGS(NUM_REGS)) u_cb (
    .clk      (clk),
    .rst_n    (rst_n),
    .ex_valid (ex_valid),
    .ex_instr (ex_instr),
    .rd_idx   (ex_instr.rs0),
    .rd_sc    (base_sc),
    .rd_fva_v (base_fva_v),
    .rd_fva   ()
  );

  // In-order queue of load base-register scales, execute -> memory.
  val_t             lq     [LQ_DEPTH];
  logic [PTR_W-1:0] lq_wp, lq_rp;
  logic [PTR_W:0]   lq_cnt;
  logic             push, pop;

  assign push = ex_valid && (ex_instr.op == OP_LOAD_MEM) && (lq_cnt != (PTR_W+1)'(LQ_DEPTH) || pop);
  assign pop  = ld_valid && (lq_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lq_wp  <= '0;
      lq_rp  <= '0;
      lq_cnt <= '0;
      for (int i = 0; i < LQ_DEPTH; i++) lq[i] <= 16'd1;
    end else begin
      if (push) begin
        lq[lq_wp] <= base_fva_v ? 16'd1 : base_sc;
        lq_wp     <= (lq_wp == PTR_W'(LQ_DEPTH-1)) ? '0 : lq_wp + 1'b1;
      end
      if (pop) lq_rp <= (lq_rp == PTR_W'(LQ_DEPTH-1)) ? '0 : lq_rp + 1'b1;
      lq_cnt <= lq_cnt + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
    end
  end

  val_t  ld_sc;
  logic  in_range;
  addr_t sc_ext, blk, cand_p, cand_m;
  logic  ok_p, ok_m;

  always_comb begin
    ld_sc    = pop ? lq[lq_rp] : 16'd1;
    in_range = (ld_sc > val_t'(LINE_BYTES)) && (32'(ld_sc) < PAGE_BYTES);
    sc_ext   = addr_t'(ld_sc);
    blk      = line_of(ld_paddr);
    cand_p   = line_of(ld_paddr + sc_ext);
    cand_m   = line_of(ld_paddr - sc_ext);
    ok_p     = in_range && (cand_p[ADDR_W-1:PAGE_BITS] == ld_paddr[ADDR_W-1:PAGE_BITS]) && !probe_hit[0];
    ok_m     = in_range && (cand_m[ADDR_W-1:PAGE_BITS] == ld_paddr[ADDR_W-1:PAGE_BITS]) && !probe_hit[1];
  end

  assign probe_addr[0] = cand_p;
  assign probe_addr[1] = cand_m;
  assign pf_valid      = ld_valid && (ok_p || ok_m);
  assign pf_addr       = ok_p ? cand_p : cand_m;
  assign rec_valid     = ld_valid && in_range;
  assign rec_sc        = ld_sc;
  assign rec_blk       = blk;

  lq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(ex_valid && ex_instr.op == OP_LOAD_MEM && !push))
    else $error("scale_tracker: load queue overflow");

endmodule
