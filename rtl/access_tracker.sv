// access_tracker - PREFENDER's Access Tracker (AT), with the record
// protector's protected-buffer and protected-prefetch policy.
//
// In the last phase of a cache side channel attack the attacker times
// every line of an eviction set, usually with one or two load
// instructions and often in random order. The access tracker gives every
// load instruction its own access buffer (NUM_BUF of them) and learns the
// set's stride as DiffMin, the smallest distance between lines that load
// has touched. Each load goes through four steps in one cycle:
//   1 buffer allocation: the buffer whose InstAddr equals the load's PC is
//     activated; otherwise an empty buffer, otherwise the least recently
//     used buffer that is not protected, is reset and given to the load.
//     If every buffer is protected, the load is not tracked.
//   2 entry update and 3 DiffMin update inside the buffer (access_buffer).
//   4 prefetch: with stride d, the lines BlkAddr' + d and BlkAddr' - d are
//     candidates; one that is neither in the buffer nor in the L1D is
//     prefetched, the + side first.
// The stride d is chosen as the record protector prescribes: the hit scale
// when BlkAddr' hits the scale buffer (sb_hit, which also protects the
// activated buffer and copies the hit scale into it) or the buffer's own
// protected scale; otherwise DiffMin, once the buffer holds more than
// THRESH entries.
//
// Interface and timing: ld_valid/ld_pc/ld_paddr is the memory-stage load,
// sb_* the record protector's combinational answer for the same load,
// probe_* two combinational L1D presence probes. pf_* is combinational in
// the ld_valid cycle; buffer state changes on the following edge.
// Buffer LRU is kept with per-buffer age counters (this implementation's
// choice); when several scale-buffer entries hit, the record protector
// picks one.
// The low 6 bits of probe_addr and pf_addr are always zero (line
// addresses); synthesis reports them as constant outputs.
module access_tracker
  import prefender_pkg::*;
#(
  parameter int NUM_BUF         = 32,
  parameter int ENTRIES         = 8,
  parameter int THRESH          = 4,
  parameter int PROT_PF_LIMIT   = 16,
  parameter int PROT_IDLE_LIMIT = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ld_valid,
  input  pc_t   ld_pc,
  input  addr_t ld_paddr,
  input  logic  sb_hit,
  input  val_t  sb_sc,
  input  addr_t sb_blk,
  output addr_t probe_addr [2],
  input  logic  probe_hit  [2],
  output logic  pf_valid,
  output addr_t pf_addr,
  output logic  pf_guided,
  output logic  prot_set_evt,
  output logic  prot_clr_evt,
  output logic  alloc_skip_evt,
  output logic  no_alloc_evt,
  output logic [$clog2(NUM_BUF+1)-1:0] num_protected
);

  localparam int BAGE_W = $clog2(NUM_BUF);
  localparam int BI_W   = $clog2(NUM_BUF);

  addr_t blk;
  assign blk = line_of(ld_paddr);

  // per-buffer signals
  logic  b_inst_v   [NUM_BUF];
  logic  b_match    [NUM_BUF];
  logic  b_act      [NUM_BUF];
  logic  b_alloc    [NUM_BUF];
  addr_t b_nblk     [NUM_BUF][ENTRIES];
  logic  b_nv       [NUM_BUF][ENTRIES];
  logic  b_over     [NUM_BUF];
  diff_t b_dnxt     [NUM_BUF];
  logic  b_dnxt_v   [NUM_BUF];
  diff_t b_dmin     [NUM_BUF];
  logic  b_dmin_v   [NUM_BUF];
  logic  b_pset     [NUM_BUF];
  logic  b_ppf      [NUM_BUF];
  logic  b_pflag    [NUM_BUF];
  logic  b_psc_v    [NUM_BUF];
  val_t  b_psc      [NUM_BUF];
  addr_t b_pblk     [NUM_BUF];
  logic  b_pclr     [NUM_BUF];

  logic [BAGE_W-1:0] bage [NUM_BUF];

  // ---- 1: buffer allocation -------------------------------------------
  logic            any_match, any_free, any_unprot, act_ok, do_alloc;
  logic [BI_W-1:0] match_idx, free_idx, lru_idx, act_idx;
  logic [BAGE_W-1:0] lru_age;
  logic            lru_skipped;

  always_comb begin
    any_match = 1'b0; match_idx = '0;
    any_free  = 1'b0; free_idx  = '0;
    any_unprot = 1'b0; lru_idx  = '0; lru_age = '0;
    lru_skipped = 1'b0;
    for (int i = NUM_BUF - 1; i >= 0; i--) begin
      if (b_match[i])   begin any_match = 1'b1; match_idx = BI_W'(i); end
      if (!b_inst_v[i]) begin any_free  = 1'b1; free_idx  = BI_W'(i); end
    end
    for (int i = 0; i < NUM_BUF; i++) begin
      if (!b_pflag[i] && (!any_unprot || bage[i] > lru_age)) begin
        any_unprot = 1'b1;
        lru_idx    = BI_W'(i);
        lru_age    = bage[i];
      end
      // the overall LRU buffer is protected: LRU passes over it
      if (b_pflag[i] && bage[i] == BAGE_W'(NUM_BUF - 1)) lru_skipped = 1'b1;
    end
    act_ok   = ld_valid && (any_match || any_free || any_unprot);
    do_alloc = ld_valid && !any_match;
    act_idx  = any_match ? match_idx : (any_free ? free_idx : lru_idx);
  end

  assign no_alloc_evt   = ld_valid && !act_ok;
  assign alloc_skip_evt = ld_valid && !any_match && !any_free && any_unprot && lru_skipped;

  // ---- buffers ----------------------------------------------------------
  for (genvar g = 0; g < NUM_BUF; g++) begin : g_buf
    assign b_act[g]   = act_ok && (act_idx == BI_W'(g));
    assign b_alloc[g] = b_act[g] && do_alloc;
    access_buffer #(
      .ENTRIES         (ENTRIES),
      .THRESH          (THRESH),
      .PROT_PF_LIMIT   (PROT_PF_LIMIT),
      .PROT_IDLE_LIMIT (PROT_IDLE_LIMIT)
    ) u_buf (
      .clk         (clk),
      .rst_n       (rst_n),
      .ld_pc       (ld_pc),
      .blk         (blk),
      .activate    (b_act[g]),
      .allocate    (b_alloc[g]),
      .inst_valid  (b_inst_v[g]),
      .inst_match  (b_match[g]),
      .nxt_blk     (b_nblk[g]),
      .nxt_v       (b_nv[g]),
      .over_thresh (b_over[g]),
      .diff_nxt    (b_dnxt[g]),
      .diff_nxt_v  (b_dnxt_v[g]),
      .diffmin     (b_dmin[g]),
      .diffmin_v   (b_dmin_v[g]),
      .prot_set    (b_pset[g]),
      .prot_sc_in  (sb_sc),
      .prot_blk_in (sb_blk),
      .prot_pf     (b_ppf[g]),
      .prot_flag   (b_pflag[g]),
      .prot_sc_v   (b_psc_v[g]),
      .prot_sc     (b_psc[g]),
      .prot_blk    (b_pblk[g]),
      .prot_clr    (b_pclr[g])
    );
  end

  // ---- 4: candidates of the activated buffer ------------------------------
  logic  a_over, a_dv, a_pflag, a_psc_v, a_prot_hit, use_hit, have_d;
  diff_t a_d;
  val_t  a_psc;
  addr_t a_pblk, d_ext, cand_p, cand_m;
  logic  in_p, in_m, ok_p, ok_m;

  always_comb begin
    a_over  = b_over[act_idx];
    // fresh DiffMin, or the stored one when no pair is close enough
    a_dv    = b_dnxt_v[act_idx] || (b_dmin_v[act_idx] && !do_alloc);
    a_d     = b_dnxt_v[act_idx] ? b_dnxt[act_idx] : b_dmin[act_idx];
    a_pflag = b_pflag[act_idx] && !do_alloc;
    a_psc_v = b_psc_v[act_idx];
    a_psc   = b_psc[act_idx];
    a_pblk  = b_pblk[act_idx];
    a_prot_hit = a_pflag && a_psc_v && pattern_hit(blk, a_pblk, a_psc);

    use_hit = sb_hit || a_prot_hit;
    if (sb_hit)          d_ext = addr_t'(sb_sc);
    else if (a_prot_hit) d_ext = addr_t'(a_psc);
    else                 d_ext = addr_t'(a_d);
    have_d = act_ok && (use_hit || (a_over && a_dv)) && (d_ext != '0);

    cand_p = line_of(blk + d_ext);
    cand_m = line_of(blk - d_ext);
    in_p = 1'b0;
    in_m = 1'b0;
    for (int e = 0; e < ENTRIES; e++) begin
      if (b_nv[act_idx][e] && b_nblk[act_idx][e] == cand_p) in_p = 1'b1;
      if (b_nv[act_idx][e] && b_nblk[act_idx][e] == cand_m) in_m = 1'b1;
    end
    ok_p = have_d && !in_p && !probe_hit[0] && cand_p != blk;
    ok_m = have_d && !in_m && !probe_hit[1] && cand_m != blk && (blk >= d_ext);
  end

  assign probe_addr[0] = cand_p;
  assign probe_addr[1] = cand_m;
  assign pf_valid      = ok_p || ok_m;
  assign pf_addr       = ok_p ? cand_p : cand_m;
  assign pf_guided     = use_hit;

  for (genvar g = 0; g < NUM_BUF; g++) begin : g_prot
    assign b_pset[g] = b_act[g] && sb_hit;
    assign b_ppf[g]  = b_act[g] && use_hit && pf_valid;
  end

  // ---- buffer LRU, status -----------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_BUF; i++) bage[i] <= BAGE_W'(i);
    end else if (act_ok) begin
      for (int i = 0; i < NUM_BUF; i++)
        if (bage[i] < bage[act_idx]) bage[i] <= bage[i] + 1'b1;
      bage[act_idx] <= '0;
    end
  end

  always_comb begin
    num_protected = '0;
    prot_set_evt  = 1'b0;
    prot_clr_evt  = 1'b0;
    for (int i = 0; i < NUM_BUF; i++) begin
      num_protected = num_protected + ($clog2(NUM_BUF+1))'(b_pflag[i]);
      if (b_pset[i] && !b_pflag[i]) prot_set_evt = 1'b1;
      if (b_pclr[i]) prot_clr_evt = 1'b1;
    end
  end

  one_prefetch_needs_load: assert property (@(posedge clk) disable iff (!rst_n)
    pf_valid |-> ld_valid)
    else $error("access_tracker: prefetch without a load");

endmodule
