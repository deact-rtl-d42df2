// stu: system translation unit of one node in DeACT (trusted, off the node).
//
// The STU sits between a node's memory controller and the fabric. It takes
// two kinds of request, told apart by the V flag the node's FAM translator
// sets:
//   V = 1 (mapped): the address is already a FAM address, taken from the
//          node's unverified translation cache. The STU only verifies it.
//   V = 0 (not mapped): the address is a node address. The STU walks the
//          node's FAM page table (fam_ptw), sends the mapping back to the node
//          (RSP_MAP) so the node can cache it, and then verifies the access.
// Verification reads the page's 16-bit ACM from the ACM cache (acm_cache,
// DeACT-N layout) or, on a miss, from the ACM region in FAM (and caches it),
// then applies acm_check; for a shared page it also reads the requester's
// bitmap row from FAM. An allowed request goes to FAM unchanged; a refused
// read or fetch is answered with RSP_FAULT_FAM, a failed walk with
// RSP_FAULT_NODE; refused writes are dropped (ev_deny still pulses). Data
// coming back from FAM is passed to the node as RSP_MEM, still FAM-addressed.
// The decomposition (mapped/not-mapped dispatch on V, page walk in the STU,
// ACM cached in the STU only, ACM and bitmaps in FAM) follows the paper.
// Our choices: one request is handled at a time (data responses from FAM flow
// back in parallel), the fault responses, the src_stu bit on fabric packets,
// and response priority: the STU's own responses go to the node before FAM
// data. The mapping response is always accepted by the node before the
// request is forwarded, so data can never overtake its mapping.
// The walker keeps a 32-entry page-walk cache of upper-level entries.
// Timing (1-cycle fabric round trip not counted): a mapped request that hits
// in the ACM cache leaves for FAM 4 cycles after it is accepted.
module stu
  import deact_pkg::*;
#(
  parameter int unsigned CACHE_SETS = 128,
  parameter int unsigned CACHE_WAYS = 8,
  parameter int unsigned TAG_W      = 44
) (
  input  logic      clk,
  input  logic      rst_n,

  input  node_id_t  cfg_node_id,   // ID of the node this STU serves
  input  addr_t     cfg_mt_base,   // FAM address of the ACM region
  input  addr_t     cfg_bm_base,   // FAM address of the bitmap region
  input  addr_t     cfg_ptw_root,  // FAM address of the node's page table root

  // from / to the node's FAM translator
  input  logic      req_valid,
  output logic      req_ready,
  input  stu_req_t  req,
  output logic      resp_valid,
  input  logic      resp_ready,
  output stu_resp_t resp,

  // fabric side (towards FAM)
  output logic      fab_req_valid,
  input  logic      fab_req_ready,
  output fab_req_t  fab_req,
  input  logic      fab_resp_valid,
  output logic      fab_resp_ready,
  input  fab_resp_t fab_resp,

  // ACM invalidation by the memory broker (page migration)
  input  logic      inv_valid,
  input  pn_t       inv_pn,
  // page table changed by the memory broker: flush the page-walk cache
  input  logic      ptw_flush,

  // one-cycle event pulses
  output logic      ev_acm_hit,
  output logic      ev_acm_miss,
  output logic      ev_walk,
  output logic      ev_walk_access,
  output logic      ev_pwc_hit,
  output logic      ev_walk_large,
  output logic      ev_shared,
  output logic      ev_deny
);

  typedef enum logic [3:0] {
    T_IDLE, T_WALK_START, T_WALK, T_MAP, T_LOOKUP, T_LOOKUP_WAIT,
    T_ACM_RD, T_ACM_WAIT, T_CHECK, T_BM_RD, T_BM_WAIT, T_FWD,
    T_DENY, T_FAULT_NODE
  } state_e;
  state_e state;

  stu_req_t req_q;
  addr_t    fam_addr_q;
  acm_t     acm_q;

  logic internal_resp;
  assign internal_resp = fab_resp_valid && fab_resp.src_stu;

  // ------------------------------------------------------------------
  // page table walker
  logic  ptw_done, ptw_fault, ptw_rd_valid, ptw_rd_ready, ptw_busy;
  pn_t   ptw_fam_pn;
  addr_t ptw_rd_addr;

  fam_ptw u_ptw (
    .clk          (clk),
    .rst_n        (rst_n),
    .cfg_root     (cfg_ptw_root),
    .flush        (ptw_flush),
    .start        (state == T_WALK_START),
    .npn          (page_of(req_q.addr)),
    .busy         (ptw_busy),
    .done         (ptw_done),
    .fault        (ptw_fault),
    .fam_pn       (ptw_fam_pn),
    .rd_valid     (ptw_rd_valid),
    .rd_ready     (ptw_rd_ready),
    .rd_addr      (ptw_rd_addr),
    .rd_resp_valid(internal_resp && state == T_WALK),
    .rd_resp_data (fab_resp.rdata),
    .ev_access    (ev_walk_access),
    .ev_pwc_hit   (ev_pwc_hit),
    .ev_large     (ev_walk_large)
  );

  // ------------------------------------------------------------------
  // ACM cache and check
  logic lk_done, lk_hit, fill_valid;
  acm_t lk_acm, fill_acm;

  addr_t      acm_line_addr, bm_line_addr;
  logic [4:0] acm_slot;
  logic [8:0] bm_bit;
  logic       shared, allow_owner, allow_shared;

  acm_check u_check (
    .fam_addr     (fam_addr_q),
    .op           (req_q.op),
    .node_id      (cfg_node_id),
    .cfg_mt_base  (cfg_mt_base),
    .cfg_bm_base  (cfg_bm_base),
    .acm_line_addr(acm_line_addr),
    .acm_slot     (acm_slot),
    .bm_line_addr (bm_line_addr),
    .bm_bit       (bm_bit),
    .acm          (acm_q),
    .bm_line      (fab_resp.rdata),
    .shared       (shared),
    .allow_owner  (allow_owner),
    .allow_shared (allow_shared)
  );

  assign fill_valid = state == T_ACM_WAIT && internal_resp;
  assign fill_acm   = fab_resp.rdata[ACM_W*acm_slot +: ACM_W];

  acm_cache #(.SETS(CACHE_SETS), .WAYS(CACHE_WAYS), .TAG_W(TAG_W)) u_cache (
    .clk       (clk),
    .rst_n     (rst_n),
    .lk_valid  (state == T_LOOKUP),
    .lk_pn     (page_of(fam_addr_q)),
    .lk_done   (lk_done),
    .lk_hit    (lk_hit),
    .lk_acm    (lk_acm),
    .fill_valid(fill_valid),
    .fill_pn   (page_of(fam_addr_q)),
    .fill_acm  (fill_acm),
    .inv_valid (inv_valid),
    .inv_pn    (inv_pn)
  );

  // ------------------------------------------------------------------
  // control
  logic fsm_resp_valid;
  stu_resp_t fsm_resp;

  always_comb begin
    fsm_resp_valid = 1'b0;
    fsm_resp       = '0;
    unique case (state)
      T_MAP: begin
        fsm_resp_valid  = 1'b1;
        fsm_resp.kind   = RSP_MAP;
        fsm_resp.addr   = req_q.addr;
        fsm_resp.map_pn = page_of(fam_addr_q);
      end
      T_DENY: begin
        fsm_resp_valid = expects_resp(req_q.op);
        fsm_resp.kind  = RSP_FAULT_FAM;
        fsm_resp.addr  = fam_addr_q;
      end
      T_FAULT_NODE: begin
        fsm_resp_valid = expects_resp(req_q.op);
        fsm_resp.kind  = RSP_FAULT_NODE;
        fsm_resp.addr  = req_q.addr;
      end
      default: ;
    endcase
  end

  assign req_ready = state == T_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      req_q      <= '0;
      fam_addr_q <= '0;
      acm_q      <= '0;
    end else begin
      unique case (state)
        T_IDLE: if (req_valid) begin
          req_q      <= req;
          fam_addr_q <= req.addr;
          state      <= req.v ? T_LOOKUP : T_WALK_START;
        end
        T_WALK_START: state <= T_WALK;
        T_WALK: if (ptw_done) begin
          fam_addr_q <= {ptw_fam_pn, req_q.addr[PAGE_BITS-1:0]};
          state      <= ptw_fault ? T_FAULT_NODE : T_MAP;
        end
        T_MAP:         if (resp_ready) state <= T_LOOKUP;
        T_LOOKUP:      state <= T_LOOKUP_WAIT;
        T_LOOKUP_WAIT: if (lk_done) begin
          acm_q <= lk_acm;
          state <= lk_hit ? T_CHECK : T_ACM_RD;
        end
        T_ACM_RD:   if (fab_req_ready) state <= T_ACM_WAIT;
        T_ACM_WAIT: if (internal_resp) begin
          acm_q <= fill_acm;
          state <= T_CHECK;
        end
        T_CHECK:   state <= shared ? T_BM_RD : (allow_owner ? T_FWD : T_DENY);
        T_BM_RD:   if (fab_req_ready) state <= T_BM_WAIT;
        T_BM_WAIT: if (internal_resp) state <= allow_shared ? T_FWD : T_DENY;
        T_FWD:     if (fab_req_ready) state <= T_IDLE;
        T_DENY, T_FAULT_NODE: if (!fsm_resp_valid || resp_ready) state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

  // fabric requests
  always_comb begin
    fab_req_valid = 1'b0;
    fab_req       = '0;
    ptw_rd_ready  = 1'b0;
    unique case (state)
      T_WALK: begin
        fab_req_valid   = ptw_rd_valid;
        fab_req.src_stu = 1'b1;
        fab_req.addr    = ptw_rd_addr;
        ptw_rd_ready    = fab_req_ready;
      end
      T_ACM_RD: begin
        fab_req_valid   = 1'b1;
        fab_req.src_stu = 1'b1;
        fab_req.addr    = acm_line_addr;
      end
      T_BM_RD: begin
        fab_req_valid   = 1'b1;
        fab_req.src_stu = 1'b1;
        fab_req.addr    = bm_line_addr;
      end
      T_FWD: begin
        fab_req_valid = 1'b1;
        fab_req.we    = req_q.op == OP_WRITE;
        fab_req.addr  = fam_addr_q;
        fab_req.wdata = req_q.wdata;
      end
      default: ;
    endcase
  end

  // responses to the node: the STU's own responses first, then FAM data
  always_comb begin
    if (fsm_resp_valid) begin
      resp_valid = 1'b1;
      resp       = fsm_resp;
    end else begin
      resp_valid   = fab_resp_valid && !fab_resp.src_stu;
      resp         = '0;
      resp.kind    = RSP_MEM;
      resp.addr    = fab_resp.addr;
      resp.rdata   = fab_resp.rdata;
    end
  end
  assign fab_resp_ready = fab_resp.src_stu || (resp_ready && !fsm_resp_valid);

  assign ev_acm_hit  = state == T_LOOKUP_WAIT && lk_done && lk_hit;
  assign ev_acm_miss = state == T_LOOKUP_WAIT && lk_done && !lk_hit;
  assign ev_walk     = state == T_WALK_START;
  assign ev_shared   = state == T_CHECK && shared;
  assign ev_deny     = (state == T_CHECK && !shared && !allow_owner) ||
                       (state == T_BM_WAIT && internal_resp && !allow_shared) ||
                       (state == T_WALK && ptw_done && ptw_fault);

  // Assertions are checked from the first clock edge after reset; a flag
  // register (rather than rst_n itself) keeps the reset purely asynchronous.
  logic chk_live_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_live_q <= 1'b0;
    else        chk_live_q <= 1'b1;

  a_fab_req_stable: assert property (@(posedge clk) disable iff (!chk_live_q)
    fab_req_valid && !fab_req_ready |=> fab_req_valid && $stable(fab_req));
  a_resp_stable: assert property (@(posedge clk) disable iff (!chk_live_q)
    resp_valid && !resp_ready |=> resp_valid && $stable(resp));

  logic unused;
  assign unused = ^{ptw_busy, bm_bit};

endmodule
