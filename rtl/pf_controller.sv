// pf_controller - prefetch controller and multiplexer of PREFENDER.
//
// The scale tracker and the access tracker may each produce one prefetch
// per load, in the same cycle. They go into a DEPTH-entry FIFO (the scale
// tracker's first; a pair with the same address is written once); a
// request that finds the FIFO full is dropped and reported on pf_drop.
// The basic prefetcher (tagged or stride, outside this design) offers its
// requests on basic_valid/basic_addr and is held in a one-entry register.
// The output takes the FIFO head whenever the FIFO is not empty, and the
// basic request only otherwise, so PREFENDER's prefetches always win, as
// published. The output handshake is pf_valid/pf_ready: a request leaves
// on a cycle where both are high.
//
// Timing: a tracker request given in cycle t appears on pf_* in cycle t+1
// at the earliest. A held basic request can be pre-empted by a tracker
// request that arrives before it is accepted.
// The FIFO, its depth and the drop policy are this implementation's
// choices; the publication shows only a controller and a multiplexer.
module pf_controller
  import prefender_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    st_valid,
  input  addr_t   st_addr,
  input  logic    at_valid,
  input  addr_t   at_addr,
  input  logic    at_guided,
  input  logic    basic_valid,
  input  addr_t   basic_addr,
  output logic    basic_ready,
  output logic    pf_valid,
  output pf_req_t pf,
  input  logic    pf_ready,
  output logic    pf_drop
);

  localparam int PW = $clog2(DEPTH);

  pf_req_t        q [DEPTH];
  logic [PW-1:0]  wp, rp;
  logic [PW:0]    cnt;
  logic           b_v;
  addr_t          b_addr;

  logic    deq, want0, want1, put0, put1;
  pf_req_t r0, r1;
  logic [PW:0] space;

  always_comb begin
    deq   = pf_valid && pf_ready && (cnt != '0);
    space = (PW+1)'(DEPTH) - cnt + (PW+1)'(deq);
    // order the (up to) two new requests: scale tracker first
    want0 = st_valid || at_valid;
    want1 = st_valid && at_valid && (st_addr != at_addr);
    r0.addr = st_valid ? st_addr : at_addr;
    r0.src  = st_valid ? PF_ST : (at_guided ? PF_RP : PF_AT);
    r1.addr = at_addr;
    r1.src  = at_guided ? PF_RP : PF_AT;
    put0 = want0 && (space != '0);
    put1 = want1 && (space > (PW+1)'(1));
    pf_drop = (want0 && !put0) || (want1 && !put1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      if (put0) q[wp] <= r0;
      if (put1) q[PW'(wp + 1'b1)] <= r1;
      wp  <= PW'(wp + PW'(put0) + PW'(put1));
      if (deq) rp <= PW'(rp + 1'b1);
      cnt <= cnt + (PW+1)'(put0) + (PW+1)'(put1) - (PW+1)'(deq);
    end
  end

  // basic prefetcher holding register
  assign basic_ready = !b_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_v    <= 1'b0;
      b_addr <= '0;
    end else if (basic_valid && basic_ready) begin
      b_v    <= 1'b1;
      b_addr <= line_of(basic_addr);
    end else if (b_v && pf_ready && cnt == '0) begin
      b_v <= 1'b0;
    end
  end

  always_comb begin
    if (cnt != '0) begin
      pf_valid = 1'b1;
      pf       = q[rp];
    end else begin
      pf_valid = b_v;
      pf.addr  = b_addr;
      pf.src   = PF_BASIC;
    end
  end

  fifo_bounded: assert property (@(posedge clk) disable iff (!rst_n)
    cnt <= (PW+1)'(DEPTH))
    else $error("pf_controller: FIFO count out of range");

  basic_after_fifo: assert property (@(posedge clk) disable iff (!rst_n)
    (pf_valid && pf.src == PF_BASIC) |-> (cnt == '0))
    else $error("pf_controller: basic prefetch ahead of PREFENDER");

endmodule
