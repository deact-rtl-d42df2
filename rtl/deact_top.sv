// deact_top: one node's DeACT path from its last-level cache to the fabric.
//
// The FAM translator in the node's memory controller translates node
// addresses with the help of the FAM translation cache in local DRAM and
// sends FAM requests, translated (V = 1) or not (V = 0), to the node's STU;
// the STU verifies every FAM access against the access control metadata it
// caches, walks the FAM page table for untranslated requests, and talks to
// FAM over the fabric. This matches the schematic of the paper: (1) FAM
// translator, (2) FTC lookup, (3) verification in the STU, (4) page walk and
// mapping response, (5) FTC update. The node-to-STU link is a direct
// valid/ready connection here; DRAM, FAM and the fabric are outside and
// reached through the dram_* and fab_* ports. The cfg_* inputs are set by the
// system's memory broker (STU side) and by the node's firmware (translator
// side) and must be stable while requests flow.
module deact_top
  import deact_pkg::*;
#(
  parameter int unsigned FTC_SETS        = 16384,
  parameter int unsigned OML_ENTRIES     = 128,
  parameter int unsigned STU_CACHE_SETS  = 128,
  parameter int unsigned STU_CACHE_WAYS  = 8,
  parameter int unsigned STU_TAG_W       = 44
) (
  input  logic      clk,
  input  logic      rst_n,

  input  addr_t     cfg_fam_base,
  input  addr_t     cfg_ftc_base,
  input  node_id_t  cfg_node_id,
  input  addr_t     cfg_mt_base,
  input  addr_t     cfg_bm_base,
  input  addr_t     cfg_ptw_root,

  input  logic      llc_req_valid,
  output logic      llc_req_ready,
  input  llc_req_t  llc_req,
  output logic      llc_resp_valid,
  input  logic      llc_resp_ready,
  output llc_resp_t llc_resp,

  output logic      dram_req_valid,
  input  logic      dram_req_ready,
  output mem_req_t  dram_req,
  input  logic      dram_resp_valid,
  input  line_t     dram_resp_data,

  output logic      fab_req_valid,
  input  logic      fab_req_ready,
  output fab_req_t  fab_req,
  input  logic      fab_resp_valid,
  output logic      fab_resp_ready,
  input  fab_resp_t fab_resp,

  input  logic      inv_valid,
  input  pn_t       inv_pn,
  input  logic      ptw_flush,
  // FTC invalidation in local DRAM (page migration)
  input  logic      ftc_inv_valid,
  output logic      ftc_inv_ready,
  input  pn_t       ftc_inv_npn,

  output logic      ev_ftc_hit,
  output logic      ev_ftc_miss,
  output logic      ev_ftc_update,
  output logic      ev_ftc_inv,
  output logic      ev_acm_hit,
  output logic      ev_acm_miss,
  output logic      ev_walk,
  output logic      ev_walk_access,
  output logic      ev_pwc_hit,
  output logic      ev_walk_large,
  output logic      ev_shared,
  output logic      ev_deny
);

  logic      n2s_valid, n2s_ready, s2n_valid, s2n_ready;
  stu_req_t  n2s;
  stu_resp_t s2n;

  fam_translator #(
    .FTC_SETS   (FTC_SETS),
    .OML_ENTRIES(OML_ENTRIES)
  ) u_translator (
    .clk            (clk),
    .rst_n          (rst_n),
    .cfg_fam_base   (cfg_fam_base),
    .cfg_ftc_base   (cfg_ftc_base),
    .llc_req_valid  (llc_req_valid),
    .llc_req_ready  (llc_req_ready),
    .llc_req        (llc_req),
    .llc_resp_valid (llc_resp_valid),
    .llc_resp_ready (llc_resp_ready),
    .llc_resp       (llc_resp),
    .dram_req_valid (dram_req_valid),
    .dram_req_ready (dram_req_ready),
    .dram_req       (dram_req),
    .dram_resp_valid(dram_resp_valid),
    .dram_resp_data (dram_resp_data),
    .stu_req_valid  (n2s_valid),
    .stu_req_ready  (n2s_ready),
    .stu_req        (n2s),
    .stu_resp_valid (s2n_valid),
    .stu_resp_ready (s2n_ready),
    .stu_resp       (s2n),
    .ev_ftc_hit     (ev_ftc_hit),
    .ev_ftc_miss    (ev_ftc_miss),
    .ftc_inv_valid  (ftc_inv_valid),
    .ftc_inv_ready  (ftc_inv_ready),
    .ftc_inv_npn    (ftc_inv_npn),
    .ev_ftc_update  (ev_ftc_update),
    .ev_ftc_inv     (ev_ftc_inv)
  );

  stu #(
    .CACHE_SETS(STU_CACHE_SETS),
    .CACHE_WAYS(STU_CACHE_WAYS),
    .TAG_W     (STU_TAG_W)
  ) u_stu (
    .clk           (clk),
    .rst_n         (rst_n),
    .cfg_node_id   (cfg_node_id),
    .cfg_mt_base   (cfg_mt_base),
    .cfg_bm_base   (cfg_bm_base),
    .cfg_ptw_root  (cfg_ptw_root),
    .req_valid     (n2s_valid),
    .req_ready     (n2s_ready),
    .req           (n2s),
    .resp_valid    (s2n_valid),
    .resp_ready    (s2n_ready),
    .resp          (s2n),
    .fab_req_valid (fab_req_valid),
    .fab_req_ready (fab_req_ready),
    .fab_req       (fab_req),
    .fab_resp_valid(fab_resp_valid),
    .fab_resp_ready(fab_resp_ready),
    .fab_resp      (fab_resp),
    .inv_valid     (inv_valid),
    .inv_pn        (inv_pn),
    .ptw_flush     (ptw_flush),
    .ev_acm_hit    (ev_acm_hit),
    .ev_acm_miss   (ev_acm_miss),
    .ev_walk       (ev_walk),
    .ev_walk_access(ev_walk_access),
    .ev_pwc_hit    (ev_pwc_hit),
    .ev_walk_large (ev_walk_large),
    .ev_shared     (ev_shared),
    .ev_deny       (ev_deny)
  );

endmodule
