// outstanding_mapping_list: FAM-page to node-page table for requests in flight.
//
// Responses from FAM carry FAM addresses, but the node's caches only know node
// addresses. Every request that expects a response (reads and instruction
// fetches) therefore leaves an entry here when it is sent to the STU, and the
// response is turned back into a node address by searching the list. The
// paper bounds the list by the 128 outstanding FAM requests.
//
// Entry = {valid, filled, node page, FAM page}. A request that hit in the
// translation cache is entered 'filled' (its FAM page is known). A request that
// missed is entered 'pending' with only its node page; the STU's mapping
// response for that page later fills every pending entry of that node page.
// The pending state is our addition: the paper registers the mapping when the
// mapping response arrives, and allocating the slot up front means that
// response can never find the list full.
//
// Ports (all in one cycle, combinational search, registered update):
//  alloc_*  : add an entry at the lowest free slot; alloc_ready = not full.
//  fill_*   : give a FAM page to all pending entries of a node page.
//  lkp_*    : search by FAM page among filled entries (lkp_by_node = 0) or by
//             node page among pending entries (lkp_by_node = 1); lkp_hit and
//             lkp_npn answer in the same cycle; lkp_free removes the entry.
module outstanding_mapping_list
  import deact_pkg::*;
#(
  parameter int unsigned ENTRIES = 128
) (
  input  logic clk,
  input  logic rst_n,

  input  logic alloc_valid,
  output logic alloc_ready,
  input  pn_t  alloc_npn,
  input  pn_t  alloc_fam_pn,
  input  logic alloc_filled,

  input  logic fill_valid,
  input  pn_t  fill_npn,
  input  pn_t  fill_fam_pn,

  input  logic lkp_valid,
  input  logic lkp_by_node,
  input  pn_t  lkp_key,
  input  logic lkp_free,
  output logic lkp_hit,
  output pn_t  lkp_npn,

  output logic [$clog2(ENTRIES+1)-1:0] count
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid_q, filled_q;
  pn_t                npn_q    [ENTRIES];
  pn_t                fam_pn_q [ENTRIES];

  logic [IDX_W-1:0] free_idx, hit_idx;
  logic             any_free;

  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid_q[i]) begin
        any_free = 1'b1;
        free_idx = IDX_W'(i);
      end
    end
  end

  always_comb begin
    lkp_hit = 1'b0;
    hit_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (valid_q[i] &&
          (lkp_by_node ? (!filled_q[i] && npn_q[i] == lkp_key)
                       : ( filled_q[i] && fam_pn_q[i] == lkp_key))) begin
        lkp_hit = 1'b1;
        hit_idx = IDX_W'(i);
      end
    end
    lkp_npn = npn_q[hit_idx];
  end

  assign alloc_ready = any_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q  <= '0;
      filled_q <= '0;
    end else begin
      if (fill_valid) begin
        for (int i = 0; i < ENTRIES; i++) begin
          if (valid_q[i] && !filled_q[i] && npn_q[i] == fill_npn) filled_q[i] <= 1'b1;
        end
      end
      if (lkp_valid && lkp_free && lkp_hit) valid_q[hit_idx] <= 1'b0;
      if (alloc_valid && any_free) begin
        valid_q[free_idx]  <= 1'b1;
        filled_q[free_idx] <= alloc_filled;
      end
    end
  end

  // Entry payloads need no reset: they are only read while valid.
  always_ff @(posedge clk) begin
    if (fill_valid) begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (valid_q[i] && !filled_q[i] && npn_q[i] == fill_npn) fam_pn_q[i] <= fill_fam_pn;
      end
    end
    if (alloc_valid && any_free) begin
      npn_q[free_idx]    <= alloc_npn;
      fam_pn_q[free_idx] <= alloc_fam_pn;
    end
  end

  always_comb begin
    count = '0;
    for (int i = 0; i < ENTRIES; i++) count += valid_q[i];
  end

  // Assertions are checked from the first clock edge after reset; a flag
  // register (rather than rst_n itself) keeps the reset purely asynchronous.
  logic chk_live_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_live_q <= 1'b0;
    else        chk_live_q <= 1'b1;

  // The caller must not allocate into a full list.
  a_no_alloc_when_full: assert property (@(posedge clk) disable iff (!chk_live_q)
    alloc_valid |-> alloc_ready);

endmodule
