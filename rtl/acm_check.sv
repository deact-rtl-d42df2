// acm_check: FAM access verification rules of the STU (combinational).
//
// Every FAM page has 16 bits of access control metadata (ACM) in a reserved
// FAM region starting at cfg_mt_base: {node ID (14 b), R/W/E (2 b)}. One
// 64-byte block holds the ACM of 32 consecutive pages, so the block of FAM
// byte address X is at cfg_mt_base + (X / (4096*32)) * 64 and the page's
// field is slot (X / 4096) mod 32, at bits [16*slot +: 16] of the block.
// The access is allowed when the permission field allows the operation and
//   - the owner node ID equals the requesting node, or
//   - the node ID is all ones (shared page) and the requester's bit is set
//     in the bitmap of the page's 1 GB region.
// Each 1 GB region has a 64K-bit (8 KB) bitmap at cfg_bm_base +
// (X / 2^30) * 8192, 128 rows of 512 bits; node n is bit n mod 512 of row
// n / 512, so the row to fetch is at bitmap base + (n / 512) * 64.
// From the paper: the ACM format, the 32-pages-per-block layout and address
// formula, the shared ID, the 1 GB bitmap regions of 64K bits and their
// 512x128 organisation. Our choices: the permission encoding (see deact_pkg),
// the bit order inside a block and a bitmap row, byte addresses for the
// "MTAdd + X/(4096x32)" formula, and FAM pages at or above 2^51 (outside what
// the 44-bit DeACT-N tag can name) always refused.
module acm_check
  import deact_pkg::*;
(
  input  addr_t    fam_addr,      // FAM byte address of the request
  input  op_e      op,
  input  node_id_t node_id,       // requesting node
  input  addr_t    cfg_mt_base,
  input  addr_t    cfg_bm_base,

  output addr_t    acm_line_addr, // block holding this page's ACM
  output logic [4:0] acm_slot,    // 16-bit field in that block
  output addr_t    bm_line_addr,  // bitmap row holding the requester's bit
  output logic [8:0] bm_bit,

  input  acm_t     acm,           // ACM of the page
  input  line_t    bm_line,       // bitmap row (used only for shared pages)

  output logic     shared,        // page is shared: bitmap row needed
  output logic     allow_owner,   // decision for a page that is not shared
  output logic     allow_shared   // decision for a shared page, given bm_line
);

  node_id_t owner;
  perm_e    perm;
  logic     perm_ok, in_range;

  assign acm_line_addr = cfg_mt_base + ((fam_addr >> (PAGE_BITS + 5)) << 6);
  assign acm_slot      = fam_addr[PAGE_BITS +: 5];
  assign bm_line_addr  = cfg_bm_base + ((fam_addr >> 30) << 13) + (addr_t'(node_id[NODE_ID_W-1:9]) << 6);
  assign bm_bit        = node_id[8:0];

  assign owner    = acm[ACM_W-1 -: NODE_ID_W];
  assign perm     = perm_e'(acm[PERM_W-1:0]);
  assign perm_ok  = perm_allows(perm, op);
  assign in_range = fam_addr[ADDR_W-1] == 1'b0;   // FAM page < 2^51

  assign shared       = owner == SHARED_ID;
  assign allow_owner  = in_range && perm_ok && !shared && owner == node_id;
  assign allow_shared = in_range && perm_ok && shared && node_id != SHARED_ID && bm_line[bm_bit];

endmodule
