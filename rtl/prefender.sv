// prefender - PREFENDER secure prefetcher for one L1 data cache (top).
//
// A cache side channel attacker learns a victim's secret from the one
// eviction-set line that the victim's secret-dependent load brought into
// (or pushed out of) the cache. PREFENDER defeats this by prefetching
// further eviction-set lines, so that several lines look "touched":
//   * the scale tracker (ST) works on the victim's load in phase 2: from
//     how the load's address register was computed (additions and
//     multiplications by constants) it knows the address step sc and
//     prefetches addr' +/- sc;
//   * the access tracker (AT) works on the attacker's probing loads in
//     phase 3: per load instruction it learns the stride DiffMin of the
//     probed lines, even in random order, and prefetches ahead of the
//     attacker;
//   * the record protector (RP) links the two: patterns (sc, BlkAddr) that
//     ST has seen are kept in a scale buffer; a phase-3 load that lands on
//     one protects its access buffer from replacement by noisy loads and
//     makes AT prefetch with the trusted scale instead of DiffMin;
//   * the controller queues these prefetches ahead of those of a basic
//     (tagged or stride) prefetcher, which is outside this design.
//
// Ports:
//   ex_valid/ex_instr     execute stage, one instruction per cycle, in order
//   ld_valid/ld_pc/ld_paddr  a load accessing the L1D (memory stage)
//   probe_addr/probe_hit  four combinational L1D tag probes: 0-1 for ST's
//                         candidates, 2-3 for AT's; probe_hit is 1 when the
//                         line is present
//   basic_*               request port of the basic prefetcher
//   pf_valid/pf/pf_ready  prefetch requests to the L1D (line address and
//                         which mechanism produced it)
//   evt, num_protected    monitoring: one-cycle event flags and the number
//                         of protected access buffers
// Timing: everything a load causes is decided in the cycle ld_valid is
// high; its prefetches leave pf_* one cycle later at the earliest. At most
// one prefetch from ST and one from AT per load.
//
// ST_EN, AT_EN and RP_EN switch the three mechanisms off one by one, to
// build the reduced configurations that were evaluated for comparison
// (scale tracker only, access tracker only, both without the record
// protector); all are on by default. A disabled mechanism still runs but
// its prefetches (or, for the record protector, its recordings) are
// suppressed, and synthesis removes what then drives nothing.
//
// Sizes follow the published configuration: 32 access buffers of 8
// entries, threshold 4, 8 scale-buffer entries, 16-bit scales. The number
// of registers, the page size, the queue depths and the protection limits
// are this implementation's choices.
// The low 6 bits of the four probe addresses are always zero (line
// addresses); synthesis reports them as constant outputs.
module prefender
  import prefender_pkg::*;
#(
  parameter int NUM_REGS        = 32,
  parameter int LQ_DEPTH        = 4,
  parameter int NUM_BUF         = 32,
  parameter int AB_ENTRIES      = 8,
  parameter int AT_THRESH       = 4,
  parameter int SB_ENTRIES      = 8,
  parameter int PROT_PF_LIMIT   = 16,
  parameter int PROT_IDLE_LIMIT = 1024,
  parameter int PFQ_DEPTH       = 8,
  parameter bit ST_EN           = 1'b1,
  parameter bit AT_EN           = 1'b1,
  parameter bit RP_EN           = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      ex_valid,
  input  ex_instr_t ex_instr,
  input  logic      ld_valid,
  input  pc_t       ld_pc,
  input  addr_t     ld_paddr,
  output addr_t     probe_addr [4],
  input  logic      probe_hit  [4],
  input  logic      basic_valid,
  input  addr_t     basic_addr,
  output logic      basic_ready,
  output logic      pf_valid,
  output pf_req_t   pf,
  input  logic      pf_ready,
  output pf_evt_t   evt,
  output logic [$clog2(NUM_BUF+1)-1:0] num_protected
);

  logic  st_pf_v, rec_v, at_pf_v, at_guided, sb_hit, rec_evt, pf_drop;
  logic  st_pf_raw, rec_raw, at_pf_raw;
  addr_t st_pf_a, rec_blk, at_pf_a, sb_blk;
  val_t  rec_sc, sb_sc;
  addr_t st_probe [2], at_probe [2];
  logic  st_hit [2], at_hit [2];
  logic  prot_set_evt, prot_clr_evt, alloc_skip_evt, no_alloc_evt;

  assign probe_addr[0] = st_probe[0];
  assign probe_addr[1] = st_probe[1];
  assign probe_addr[2] = at_probe[0];
  assign probe_addr[3] = at_probe[1];
  assign st_hit[0] = probe_hit[0];
  assign st_hit[1] = probe_hit[1];
  assign at_hit[0] = probe_hit[2];
  assign at_hit[1] = probe_hit[3];

  scale_tracker #(.NUM_REGS(NUM_REGS), .LQ_DEPTH(LQ_DEPTH)) u_st (
    .clk        (clk),
    .rst_n      (rst_n),
    .ex_valid   (ex_valid),
    .ex_instr   (ex_instr),
    .ld_valid   (ld_valid),
    .ld_paddr   (ld_paddr),
    .probe_addr (st_probe),
    .probe_hit  (st_hit),
    .pf_valid   (st_pf_raw),
    .pf_addr    (st_pf_a),
    .rec_valid  (rec_raw),
    .rec_sc     (rec_sc),
    .rec_blk    (rec_blk)
  );

  record_protector #(.SB_ENTRIES(SB_ENTRIES)) u_rp (
    .clk       (clk),
    .rst_n     (rst_n),
    .rec_valid (rec_v),
    .rec_sc    (rec_sc),
    .rec_blk   (rec_blk),
    .chk_valid (ld_valid),
    .chk_blk   (line_of(ld_paddr)),
    .sb_hit    (sb_hit),
    .sb_sc     (sb_sc),
    .sb_blk    (sb_blk),
    .rec_evt   (rec_evt)
  );

  access_tracker #(
    .NUM_BUF         (NUM_BUF),
    .ENTRIES         (AB_ENTRIES),
    .THRESH          (AT_THRESH),
    .PROT_PF_LIMIT   (PROT_PF_LIMIT),
    .PROT_IDLE_LIMIT (PROT_IDLE_LIMIT)
  ) u_at (
    .clk            (clk),
    .rst_n          (rst_n),
    .ld_valid       (ld_valid),
    .ld_pc          (ld_pc),
    .ld_paddr       (ld_paddr),
    .sb_hit         (sb_hit),
    .sb_sc          (sb_sc),
    .sb_blk         (sb_blk),
    .probe_addr     (at_probe),
    .probe_hit      (at_hit),
    .pf_valid       (at_pf_raw),
    .pf_addr        (at_pf_a),
    .pf_guided      (at_guided),
    .prot_set_evt   (prot_set_evt),
    .prot_clr_evt   (prot_clr_evt),
    .alloc_skip_evt (alloc_skip_evt),
    .no_alloc_evt   (no_alloc_evt),
    .num_protected  (num_protected)
  );

  // mechanism enables: the record protector only hears of patterns when
  // both it and the scale tracker are on
  assign st_pf_v = ST_EN && st_pf_raw;
  assign at_pf_v = AT_EN && at_pf_raw;
  assign rec_v   = ST_EN && RP_EN && rec_raw;

  pf_controller #(.DEPTH(PFQ_DEPTH)) u_ctl (
    .clk         (clk),
    .rst_n       (rst_n),
    .st_valid    (st_pf_v),
    .st_addr     (st_pf_a),
    .at_valid    (at_pf_v),
    .at_addr     (at_pf_a),
    .at_guided   (at_guided),
    .basic_valid (basic_valid),
    .basic_addr  (basic_addr),
    .basic_ready (basic_ready),
    .pf_valid    (pf_valid),
    .pf          (pf),
    .pf_ready    (pf_ready),
    .pf_drop     (pf_drop)
  );

  always_comb begin
    evt.st_pf      = st_pf_v;
    evt.at_pf      = at_pf_v && !at_guided;
    evt.rp_pf      = at_pf_v && at_guided;
    evt.sb_record  = rec_evt;
    evt.sb_hit     = sb_hit;
    evt.prot_set   = prot_set_evt;
    evt.prot_clr   = prot_clr_evt;
    evt.alloc_skip = alloc_skip_evt;
    evt.no_alloc   = no_alloc_evt;
    evt.pf_drop    = pf_drop;
  end

endmodule
