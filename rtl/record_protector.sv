// record_protector - PREFENDER's Record Protector (RP) and its Scale Buffer.
//
// The scale tracker sees the victim's phase-2 load and knows its scale sc'
// and line BlkAddr'; together they describe a pattern of likely eviction
// lines {BlkAddr' + k*sc'}. The record protector keeps SB_ENTRIES such
// patterns. During the attacker's phase 3 every load's line is checked
// against them; a hit marks the load as the attacker's, so the access
// tracker protects its buffer from replacement and prefetches with the hit
// scale instead of a DiffMin that noisy accesses may have spoiled.
//
// Scale recording (rec_valid): an entry i "matches" the new pattern when
// (BlkAddr' - BlkAddr_i) % min(sc', sc_i) == 0, i.e. one pattern contains
// the other. Only the pattern with the larger scale is kept: a matching
// entry with sc_i < sc' is overwritten with (sc', BlkAddr'); when a
// matching entry already has sc_i >= sc' nothing is written. Without a
// match the pattern goes to a free entry, else to the entry named by a
// round-robin pointer. If several entries can be upgraded the first one
// is and the others are invalidated, since they would become duplicates.
//
// Hit check (chk_valid): BlkAddr' hits entry i when
// (BlkAddr' - BlkAddr_i) % sc_i == 0; the lowest hitting entry is reported.
// The modulus works on the set-index part of the distance (see
// prefender_pkg::pattern_hit), as published.
//
// Timing: sb_hit/sb_sc/sb_blk are combinational from the current entries;
// recording takes effect on the next rising edge, so a load never hits
// the pattern it records itself. Replacement by round robin and the
// choice among several hits are this implementation's; the rest is as
// published.
module record_protector
  import prefender_pkg::*;
#(
  parameter int SB_ENTRIES = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rec_valid,
  input  val_t  rec_sc,
  input  addr_t rec_blk,
  input  logic  chk_valid,
  input  addr_t chk_blk,
  output logic  sb_hit,
  output val_t  sb_sc,
  output addr_t sb_blk,
  output logic  rec_evt
);

  localparam int IW = (SB_ENTRIES > 1) ? $clog2(SB_ENTRIES) : 1;

  logic  v  [SB_ENTRIES];
  val_t  sc [SB_ENTRIES];
  addr_t ba [SB_ENTRIES];
  logic [IW-1:0] rr;

  // ---- hit check ----------------------------------------------------------
  always_comb begin
    sb_hit = 1'b0;
    sb_sc  = '0;
    sb_blk = '0;
    for (int i = SB_ENTRIES - 1; i >= 0; i--) begin
      if (chk_valid && v[i] && pattern_hit(chk_blk, ba[i], sc[i])) begin
        sb_hit = 1'b1;
        sb_sc  = sc[i];
        sb_blk = ba[i];
      end
    end
  end

  // ---- scale recording ----------------------------------------------------
  logic          match   [SB_ENTRIES];
  logic          upg     [SB_ENTRIES];
  logic          any_upg, any_cover, any_free;
  logic [IW-1:0] upg_idx, free_idx, wr_idx;
  logic          do_write;

  always_comb begin
    any_upg = 1'b0; any_cover = 1'b0; any_free = 1'b0;
    upg_idx = '0; free_idx = '0;
    for (int i = SB_ENTRIES - 1; i >= 0; i--) begin
      match[i] = v[i] && pattern_hit(rec_blk, ba[i], (rec_sc < sc[i]) ? rec_sc : sc[i]);
      upg[i]   = match[i] && (rec_sc > sc[i]);
      if (upg[i]) begin any_upg = 1'b1; upg_idx = IW'(i); end
      if (match[i] && !upg[i]) any_cover = 1'b1;
      if (!v[i]) begin any_free = 1'b1; free_idx = IW'(i); end
    end
    do_write = rec_valid && (any_upg || !any_cover);
    wr_idx   = any_upg ? upg_idx : (any_free ? free_idx : rr);
  end

  assign rec_evt = do_write;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      for (int i = 0; i < SB_ENTRIES; i++) begin
        v[i]  <= 1'b0;
        sc[i] <= '0;
        ba[i] <= '0;
      end
    end else if (do_write) begin
      for (int i = 0; i < SB_ENTRIES; i++)
        if (upg[i] && IW'(i) != wr_idx) v[i] <= 1'b0;
      v[wr_idx]  <= 1'b1;
      sc[wr_idx] <= rec_sc;
      ba[wr_idx] <= rec_blk;
      if (!any_upg && !any_free)
        rr <= (rr == IW'(SB_ENTRIES - 1)) ? '0 : rr + 1'b1;
    end
  end

  record_needs_scale: assert property (@(posedge clk) disable iff (!rst_n)
    rec_valid |-> rec_sc > val_t'(LINE_BYTES))
    else $error("record_protector: recorded scale not above the line size");

endmodule
