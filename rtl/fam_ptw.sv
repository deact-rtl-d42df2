// fam_ptw: the STU's FAM page table walker.
//
// When the node's FAM translation cache misses, the request reaches the STU
// with its node address, and the STU walks the node's FAM page table (kept in
// FAM by the memory broker) to find the FAM page. The paper only states that
// the walk has four memory accesses and that levels are indexed by 9-bit
// fields of the page number, as in x86-64. The table format is our choice:
//   - cfg_root is the FAM byte address of the level-3 table (4 KB aligned);
//   - level L (3..0) is indexed by node page bits [9L+8 : 9L];
//   - entries are 64 bits, bit 0 = present, bits 63:12 = FAM page of the next
//     table (levels 3..1) or of the data page (level 0);
//   - entry k of a table at T is in the 64-byte block at (T + 8k) & ~63, at
//     bits [64*((T+8k)[5:3]) +: 64] of that block.
// 1 GB pages: the paper limits shared pages to 1 GB physical pages ('we
// limit shared pages to 1GB physical pages'). A level-2 entry (it covers
// 2^18 node pages, 1 GB) with bit 7 set is a 1 GB leaf: the walk ends there
// and the FAM page is {entry bits 63:30, node page bits 17:0}. Entry bits
// 29:12 of such a leaf are ignored. Using bit 7 (x86-64 PS) and level 2 for
// this is this design's choice; the paper does not give the entry format.
// The result is still one 4 KB mapping, which the FTC caches as usual.
// Node pages with any of bits 51:36 set cannot be named by four levels and
// fault at once; a missing entry or a final FAM page of 0 (reserved) faults.
// Interface: start/npn for one cycle while idle; the walker issues one 64-byte
// read per level on the rd_* port (valid/ready), takes each block on
// rd_resp_valid, and raises done for one cycle with fault or fam_pn.
// ev_large pulses with done when the walk ended at a 1 GB leaf.
// Page-walk cache: the paper's evaluation gives the walker 32 page-walk cache
// entries (the optimisation of Bhargava et al.). Each entry remembers one
// upper-level entry: {level L of the table it points to, node page bits
// above level L's index, FAM page of that table}. At start the deepest
// matching entry is used and the walk begins at that level, skipping the
// reads above it; every present entry read at levels 3..1 is written into
// the cache, round-robin. Fully associative search and round-robin
// replacement are this design's choice. flush drops every entry (the
// memory broker changed a page table).
// Timing: n reads (4 without a page-walk cache hit, L+1 with a hit at level
// L, one less for a 1 GB leaf); when a read is accepted at once and its data returns R cycles later,
// done rises n*(R+1)+2 cycles after the start cycle (n*(R+1)+1 after the
// cycle following it).
module fam_ptw
  import deact_pkg::*;
#(
  parameter int unsigned LEVELS   = 4,
  parameter int unsigned IDX_BITS = 9,
  parameter int unsigned PWC_ENTRIES = 32,
  parameter int unsigned LARGE_LEVEL = 2      // level whose entries may be 1 GB leaves
) (
  input  logic  clk,
  input  logic  rst_n,

  input  addr_t cfg_root,
  input  logic  flush,      // drop all page-walk cache entries

  input  logic  start,
  input  pn_t   npn,
  output logic  busy,
  output logic  done,
  output logic  fault,
  output pn_t   fam_pn,

  output logic  rd_valid,
  input  logic  rd_ready,
  output addr_t rd_addr,
  input  logic  rd_resp_valid,
  input  line_t rd_resp_data,

  output logic  ev_access,  // one pulse per page-table read issued
  output logic  ev_pwc_hit, // walk started below the top level
  output logic  ev_large    // with done: the walk ended at a 1 GB leaf
);

  localparam int unsigned WALK_BITS = LEVELS * IDX_BITS;   // 36

  typedef enum logic [1:0] {W_IDLE, W_REQ, W_WAIT, W_DONE} state_e;
  state_e state;

  logic [$clog2(LEVELS)-1:0] level_q;
  addr_t table_q, entry_addr;
  pn_t   npn_q;
  logic [63:0] entry;
  logic        big_leaf;       // entry read is a 1 GB leaf
  pn_t         leaf_pn;     // FAM page named by a leaf entry

  localparam int unsigned LARGE_LOW = IDX_BITS * LARGE_LEVEL;   // 18 node-page bits inside 1 GB

  // page-walk cache
  localparam int unsigned LVL_W = $clog2(LEVELS);
  localparam int unsigned PTR_W = PWC_ENTRIES > 1 ? $clog2(PWC_ENTRIES) : 1;
  typedef logic [WALK_BITS-1:0] walk_t;

  logic [PWC_ENTRIES-1:0] pwc_v;
  logic [LVL_W-1:0]       pwc_lvl  [PWC_ENTRIES];
  walk_t                  pwc_pfx  [PWC_ENTRIES];
  pn_t                    pwc_base [PWC_ENTRIES];
  logic [PTR_W-1:0]       pwc_ptr;
  logic                   pwc_hit, pwc_ins;
  logic [LVL_W-1:0]       pwc_hit_lvl;
  pn_t                    pwc_hit_base;

  // node page bits above the index of level lvl
  function automatic walk_t prefix(walk_t n, logic [LVL_W-1:0] lvl);
    return n >> (IDX_BITS * (int'(lvl) + 1));
  endfunction

  always_comb begin
    pwc_hit      = 1'b0;
    pwc_hit_lvl  = LVL_W'(LEVELS - 1);
    pwc_hit_base = '0;
    for (int l = LEVELS - 2; l >= 0; l--)
      for (int e = 0; e < PWC_ENTRIES; e++)
        if (pwc_v[e] && pwc_lvl[e] == LVL_W'(l) &&
            pwc_pfx[e] == prefix(npn[WALK_BITS-1:0], LVL_W'(l))) begin
          pwc_hit      = 1'b1;
          pwc_hit_lvl  = LVL_W'(l);
          pwc_hit_base = pwc_base[e];
        end
  end

  assign pwc_ins    = state == W_WAIT && rd_resp_valid && entry[0] && level_q != '0 && !big_leaf;
  assign ev_pwc_hit = state == W_IDLE && start && npn[PN_W-1:WALK_BITS] == '0 && pwc_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pwc_v   <= '0;
      pwc_ptr <= '0;
    end else if (flush) begin
      pwc_v   <= '0;
      pwc_ptr <= '0;
    end else if (pwc_ins) begin
      pwc_v[pwc_ptr] <= 1'b1;
      pwc_ptr <= (pwc_ptr == PTR_W'(PWC_ENTRIES - 1)) ? '0 : pwc_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (pwc_ins) begin
      pwc_lvl[pwc_ptr]  <= level_q - 1'b1;
      pwc_pfx[pwc_ptr]  <= prefix(npn_q[WALK_BITS-1:0], level_q - 1'b1);
      pwc_base[pwc_ptr] <= entry[63:PAGE_BITS];
    end
  end

  assign entry_addr = table_q + (addr_t'(npn_q[IDX_BITS*level_q +: IDX_BITS]) << 3);
  assign entry      = rd_resp_data[64*entry_addr[5:3] +: 64];
  assign big_leaf      = level_q == LVL_W'(LARGE_LEVEL) && entry[7];
  assign leaf_pn    = big_leaf ? {entry[63:PAGE_BITS+LARGE_LOW], npn_q[LARGE_LOW-1:0]}
                            : entry[63:PAGE_BITS];

  assign busy     = state != W_IDLE;
  assign rd_valid = state == W_REQ;
  assign rd_addr  = {entry_addr[ADDR_W-1:6], 6'b0};
  assign ev_access = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= W_IDLE;
      level_q <= '0;
      table_q <= '0;
      npn_q   <= '0;
      done    <= 1'b0;
      fault   <= 1'b0;
      fam_pn  <= '0;
      ev_large <= 1'b0;
    end else begin
      done <= 1'b0;
      ev_large <= 1'b0;
      unique case (state)
        W_IDLE: if (start) begin
          npn_q   <= npn;
          table_q <= pwc_hit ? {pwc_hit_base, {PAGE_BITS{1'b0}}}
                             : {cfg_root[ADDR_W-1:PAGE_BITS], {PAGE_BITS{1'b0}}};
          level_q <= pwc_hit_lvl;
          fault   <= 1'b0;
          if (npn[PN_W-1:WALK_BITS] != '0) begin
            fault <= 1'b1;
            done  <= 1'b1;
          end else begin
            state <= W_REQ;
          end
        end
        W_REQ: if (rd_ready) state <= W_WAIT;
        W_WAIT: if (rd_resp_valid) begin
          if (!entry[0]) begin
            fault <= 1'b1;
            state <= W_DONE;
          end else if (level_q == '0 || big_leaf) begin
            fam_pn <= leaf_pn;
            fault  <= leaf_pn == '0;
            state  <= W_DONE;
          end else begin
            table_q <= {entry[63:PAGE_BITS], {PAGE_BITS{1'b0}}};
            level_q <= level_q - 1'b1;
            state   <= W_REQ;
          end
        end
        W_DONE: begin
          done  <= 1'b1;
          ev_large <= level_q != '0 && !fault;
          state <= W_IDLE;
        end
        default: state <= W_IDLE;
      endcase
    end
  end

endmodule
