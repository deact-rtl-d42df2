// acm_cache: the STU cache of access control metadata in the DeACT-N layout.
//
// With translations cached in node DRAM, the STU cache no longer needs the
// 52-bit FAM page value of a classic (node page -> FAM page + ACM) entry. In
// the paper's non-contiguous organisation (DeACT-N) each 120-bit way of the
// 1024-entry, 8-way STU cache (128 sets) is split into two sub-ways, each a
// {44-bit tag, 16-bit ACM} pair, so every set matches 16 tags and the cache
// holds the ACM of 2048 unrelated FAM pages. The set index is the low
// log2(SETS) bits of the FAM page, the tag the next 44 bits; with 128 sets the
// cache covers FAM pages below 2^51. All of this follows the paper.
// Our choices: a valid bit per sub-way (the figure shows none, it is kept
// beside the 120-bit way), the victim choice on a fill (first invalid sub-way,
// otherwise pseudo-random from an LFSR; the paper names no policy for the STU),
// the single-page invalidate port (the paper invalidates ACM in the STU when a
// job migrates), and the timing:
//   lookup: lk_valid with lk_pn in cycle t -> lk_done, lk_hit, lk_acm in t+1.
//   fill / invalidate: written at the clock edge that samples them.
// A fill of a page that is already present overwrites that sub-way.
module acm_cache
  import deact_pkg::*;
#(
  parameter int unsigned SETS  = 128,   // 1024 entries / 8 ways
  parameter int unsigned WAYS  = 8,
  parameter int unsigned TAG_W = 44
) (
  input  logic clk,
  input  logic rst_n,

  input  logic lk_valid,
  input  pn_t  lk_pn,
  output logic lk_done,
  output logic lk_hit,
  output acm_t lk_acm,

  input  logic fill_valid,
  input  pn_t  fill_pn,
  input  acm_t fill_acm,

  input  logic inv_valid,
  input  pn_t  inv_pn
);

  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned SUBS   = 2;
  localparam int unsigned SUB_W  = TAG_W + ACM_W;        // 60 bits
  localparam int unsigned WAY_W  = SUBS * SUB_W;         // 120 bits
  localparam int unsigned SLOTS  = WAYS * SUBS;
  localparam int unsigned SLOT_W = $clog2(SLOTS);

  typedef logic [TAG_W-1:0] tag_t;

  // way_q[set][way] = {tag1, acm1, tag0, acm0}: sub-way s at [s*SUB_W +: SUB_W]
  logic [WAY_W-1:0] way_q   [SETS][WAYS];
  logic [SLOTS-1:0] valid_q [SETS];

  function automatic logic [SET_W-1:0] set_of(pn_t pn);
    return pn[SET_W-1:0];
  endfunction
  function automatic tag_t tag_of(pn_t pn);
    return pn[SET_W +: TAG_W];
  endfunction
  function automatic tag_t slot_tag(logic [WAY_W-1:0] w, int unsigned s);
    return w[s*SUB_W + ACM_W +: TAG_W];
  endfunction
  function automatic acm_t slot_acm(logic [WAY_W-1:0] w, int unsigned s);
    return w[s*SUB_W +: ACM_W];
  endfunction

  // search one set for a tag; returns hit, slot and ACM
  typedef struct packed {
    logic              hit;
    logic [SLOT_W-1:0] slot;
    acm_t              acm;
  } search_t;

  function automatic search_t search(logic [SET_W-1:0] set, tag_t tag);
    search_t r = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      for (int s = SUBS - 1; s >= 0; s--) begin
        if (valid_q[set][w*SUBS + s] && slot_tag(way_q[set][w], s) == tag) begin
          r.hit  = 1'b1;
          r.slot = SLOT_W'(w*SUBS + s);
          r.acm  = slot_acm(way_q[set][w], s);
        end
      end
    end
    return r;
  endfunction

  search_t lk_res, fill_res, inv_res;
  always_comb lk_res   = search(set_of(lk_pn),   tag_of(lk_pn));
  always_comb fill_res = search(set_of(fill_pn), tag_of(fill_pn));
  always_comb inv_res  = search(set_of(inv_pn),  tag_of(inv_pn));

  // victim for a fill: page already present, else first invalid, else random
  logic [15:0]       rnd;
  logic [SLOT_W-1:0] victim;
  logic              any_invalid;
  always_comb begin
    any_invalid = 1'b0;
    victim      = rnd[SLOT_W-1:0];
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (!valid_q[set_of(fill_pn)][i]) begin
        any_invalid = 1'b1;
        victim      = SLOT_W'(i);
      end
    end
    if (fill_res.hit) victim = fill_res.slot;
  end

  lfsr16 #(.SEED(16'hC0DE)) u_lfsr (
    .clk  (clk),
    .rst_n(rst_n),
    .step (fill_valid),
    .value(rnd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SETS; i++) valid_q[i] <= '0;
      lk_done <= 1'b0;
      lk_hit  <= 1'b0;
      lk_acm  <= '0;
    end else begin
      lk_done <= lk_valid;
      lk_hit  <= lk_valid && lk_res.hit;
      lk_acm  <= lk_res.acm;
      if (inv_valid && inv_res.hit) valid_q[set_of(inv_pn)][inv_res.slot] <= 1'b0;
      if (fill_valid) valid_q[set_of(fill_pn)][victim] <= 1'b1;
    end
  end

  // tag/ACM storage: no reset, guarded by the valid bits
  always_ff @(posedge clk) begin
    if (fill_valid)
      way_q[set_of(fill_pn)][int'(victim) / SUBS][(int'(victim) % SUBS)*SUB_W +: SUB_W] <=
        {tag_of(fill_pn), fill_acm};
  end

  logic unused;
  assign unused = ^{lk_pn[PN_W-1:SET_W+TAG_W], fill_pn[PN_W-1:SET_W+TAG_W],
                    inv_pn[PN_W-1:SET_W+TAG_W], any_invalid, rnd};

endmodule
