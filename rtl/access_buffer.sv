// access_buffer - one buffer of PREFENDER's Access Tracker.
//
// A buffer belongs to one load instruction (InstAddr) and remembers the
// last ENTRIES distinct cacheline addresses (BlkAddr) that load touched.
// From them it keeps DiffMin, the smallest non-zero distance between any
// two recorded lines, which the access tracker takes as the stride of an
// attacker that probes an eviction set in random order. Entries are
// replaced least recently used. The buffer also holds the record
// protector's state for it: the protected scale (sc, BlkAddr) copied from
// a scale-buffer hit, the Buffer Protected Flag, a count of prefetches made
// with the hit scale and an idle timer. Protection ends when that count
// exceeds PROT_PF_LIMIT or the buffer stays untouched for PROT_IDLE_LIMIT
// cycles.
//
// Timing: the access tracker drives activate (and allocate, to hand the
// buffer to a new load) for one cycle per load. The nxt_* outputs show
// combinationally what the entries will hold after this load's BlkAddr is
// recorded; over_thresh tells whether more than THRESH of them are valid,
// and diff_nxt/diff_nxt_v the DiffMin computed over them. All state
// changes on the next rising edge. DiffMin is only recomputed while the
// buffer holds more than THRESH entries, as published; distances that do
// not fit in DIFF_W bits are ignored.
//
// Published: InstAddr, the entries, DiffMin, valid bits cleared on
// reallocation, entry LRU, the threshold of 4 and 8 entries, the protected
// scale and flag and the two ways protection ends. This implementation's
// choices: LRU kept as per-entry age counters; the protected scale is
// used only while the flag is set; PROT_PF_LIMIT and PROT_IDLE_LIMIT
// values; idle time counted in clock cycles.
module access_buffer
  import prefender_pkg::*;
#(
  parameter int ENTRIES         = 8,
  parameter int THRESH          = 4,
  parameter int PROT_PF_LIMIT   = 16,
  parameter int PROT_IDLE_LIMIT = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  pc_t   ld_pc,
  input  addr_t blk,
  input  logic  activate,
  input  logic  allocate,
  output logic  inst_valid,
  output logic  inst_match,
  output addr_t nxt_blk [ENTRIES],
  output logic  nxt_v   [ENTRIES],
  output logic  over_thresh,
  output diff_t diff_nxt,
  output logic  diff_nxt_v,
  output diff_t diffmin,
  output logic  diffmin_v,
  input  logic  prot_set,
  input  val_t  prot_sc_in,
  input  addr_t prot_blk_in,
  input  logic  prot_pf,
  output logic  prot_flag,
  output logic  prot_sc_v,
  output val_t  prot_sc,
  output addr_t prot_blk,
  output logic  prot_clr
);

  localparam int AGE_W = $clog2(ENTRIES);
  localparam int CNT_W = $clog2(ENTRIES + 1);
  localparam int PFC_W = $clog2(PROT_PF_LIMIT + 2);
  localparam int IDL_W = $clog2(PROT_IDLE_LIMIT + 1);

  pc_t              inst_addr;
  logic             inst_v;
  addr_t            ent  [ENTRIES];
  logic             ent_v[ENTRIES];
  logic [AGE_W-1:0] age  [ENTRIES];
  logic [PFC_W-1:0] pf_cnt;
  logic [IDL_W-1:0] idle;

  assign inst_valid = inst_v;
  assign inst_match = inst_v && (inst_addr == ld_pc);

  // ---- next state of the entries for the current load -------------------
  logic [AGE_W-1:0] nxt_age [ENTRIES];
  logic             hit, has_free;
  int               hit_idx, free_idx, lru_idx, tgt;
  logic [AGE_W-1:0] tgt_age;
  logic [CNT_W-1:0] cnt;

  always_comb begin
    hit = 1'b0; hit_idx = 0;
    has_free = 1'b0; free_idx = 0;
    lru_idx = 0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (ent_v[i] && ent[i] == blk) begin hit = 1'b1; hit_idx = i; end
      if (!ent_v[i]) begin has_free = 1'b1; free_idx = i; end
      if (age[i] == AGE_W'(ENTRIES - 1)) lru_idx = i;
    end
    tgt     = hit ? hit_idx : (has_free ? free_idx : lru_idx);
    tgt_age = age[tgt];

    for (int i = 0; i < ENTRIES; i++) begin
      nxt_blk[i] = ent[i];
      nxt_v[i]   = ent_v[i];
      nxt_age[i] = age[i];
    end
    if (allocate) begin
      for (int i = 0; i < ENTRIES; i++) begin
        nxt_v[i]   = 1'b0;
        nxt_age[i] = AGE_W'(i);
      end
      nxt_blk[0] = blk;
      nxt_v[0]   = 1'b1;
    end else if (activate) begin
      // move the touched entry to most recently used
      for (int i = 0; i < ENTRIES; i++)
        if (nxt_age[i] < tgt_age) nxt_age[i] = nxt_age[i] + 1'b1;
      nxt_age[tgt] = '0;
      nxt_blk[tgt] = blk;
      nxt_v[tgt]   = 1'b1;
    end

    cnt = '0;
    for (int i = 0; i < ENTRIES; i++) cnt = cnt + CNT_W'(nxt_v[i]);
    over_thresh = (cnt > CNT_W'(THRESH));
  end

  // ---- DiffMin over all valid pairs of the next entries ------------------
  always_comb begin
    addr_t d;
    diff_nxt   = '1;
    diff_nxt_v = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      for (int j = i + 1; j < ENTRIES; j++) begin
        d = (nxt_blk[i] >= nxt_blk[j]) ? nxt_blk[i] - nxt_blk[j] : nxt_blk[j] - nxt_blk[i];
        if (nxt_v[i] && nxt_v[j] && d != '0 && d[ADDR_W-1:DIFF_W] == '0 && d[DIFF_W-1:0] < diff_nxt) begin
          diff_nxt   = d[DIFF_W-1:0];
          diff_nxt_v = 1'b1;
        end
      end
    end
  end

  // ---- protection bookkeeping ----------------------------------------------
  logic             flag_n;
  logic [PFC_W-1:0] pf_cnt_n;
  logic [IDL_W-1:0] idle_n;

  always_comb begin
    flag_n   = allocate ? 1'b0 : prot_flag;
    pf_cnt_n = allocate ? '0 : pf_cnt;
    idle_n   = idle;
    if (activate) idle_n = '0;
    else if (idle != IDL_W'(PROT_IDLE_LIMIT)) idle_n = idle + 1'b1;
    if (prot_set && !flag_n) pf_cnt_n = '0;
    if (prot_set) flag_n = 1'b1;
    if (prot_pf && flag_n) pf_cnt_n = pf_cnt_n + 1'b1;
    if (flag_n && (pf_cnt_n > PFC_W'(PROT_PF_LIMIT) || idle_n == IDL_W'(PROT_IDLE_LIMIT))) begin
      flag_n   = 1'b0;
      pf_cnt_n = '0;
    end
  end

  assign prot_clr = prot_flag && !flag_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inst_v    <= 1'b0;
      inst_addr <= '0;
      diffmin   <= '0;
      diffmin_v <= 1'b0;
      prot_flag <= 1'b0;
      prot_sc_v <= 1'b0;
      prot_sc   <= '0;
      prot_blk  <= '0;
      pf_cnt    <= '0;
      idle      <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        ent[i]   <= '0;
        ent_v[i] <= 1'b0;
        age[i]   <= AGE_W'(i);
      end
    end else begin
      prot_flag <= flag_n;
      pf_cnt    <= pf_cnt_n;
      idle      <= idle_n;
      if (activate || allocate) begin
        for (int i = 0; i < ENTRIES; i++) begin
          ent[i]   <= nxt_blk[i];
          ent_v[i] <= nxt_v[i];
          age[i]   <= nxt_age[i];
        end
      end
      if (allocate) begin
        inst_v    <= 1'b1;
        inst_addr <= ld_pc;
        diffmin_v <= 1'b0;
      end else if (activate && over_thresh && diff_nxt_v) begin
        diffmin   <= diff_nxt;
        diffmin_v <= 1'b1;
      end
      if (prot_set) begin
        prot_sc_v <= 1'b1;
        prot_sc   <= prot_sc_in;
        prot_blk  <= prot_blk_in;
      end else if (allocate) begin
        prot_sc_v <= 1'b0;
      end
    end
  end

  allocate_needs_activate: assert property (@(posedge clk) disable iff (!rst_n)
    allocate |-> activate)
    else $error("access_buffer: allocate without activate");

endmodule
