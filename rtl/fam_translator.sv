// fam_translator: node-side half of DeACT, placed in the local memory
// controller.
//
// The node's OS sees one flat physical space: addresses below cfg_fam_base are
// local DRAM, addresses at or above it are FAM. Local accesses go straight to
// the DRAM port. For a FAM access the translator
//   (a) reads the 64-byte FAM translation cache (FTC) line at
//       cfg_ftc_base + (node page mod FTC_SETS) * 64 from local DRAM
//       (a four-way set-associative cache of 104-bit mappings),
//   (b) matches the four tags in one cycle (ftc_tag_match),
//   (c) on a hit replaces the node page by the FAM page, sets V = 1 and
//       records the mapping in the outstanding mapping list if the request
//       expects data back; on a miss sends the request unchanged with V = 0
//       (the STU walks the FAM page table),
// and on the response side
//   (d) turns FAM-addressed responses back into node addresses through the
//       outstanding mapping list and passes them to the LLC,
//   (e) on a mapping response from the STU registers the mapping and installs
//       it in the FTC by a read-modify-write of its line with a random victim
//       (ftc_line_update),
//   (f) on ftc_inv_valid (page migration) reads the FTC line of the given
//       node page and writes it back with that page's entry cleared; it is
//       taken only when no STU response is waiting. Requests already past
//       the lookup keep the old mapping, so the memory manager quiesces the
//       job before migrating it.
// All of that follows the paper. Our choices: the handshakes (valid/ready on
// every channel, DRAM read data returned in order one cycle or more after the
// request is accepted), one request in flight on the request side, local DRAM
// access through the same port, fault responses to the LLC, the pending state
// of the list for misses, and a DRAM lock that lets the request side and the
// FTC-update side take turns on the DRAM port (update side first).
//
// Latency of a FAM request with a 1-cycle DRAM: accept, lock, DRAM read issue,
// DRAM data, match, send: the request reaches the STU port 5 cycles after it
// is accepted (plus any extra DRAM latency).
module fam_translator
  import deact_pkg::*;
#(
  parameter int unsigned FTC_SETS    = 16384,  // 1 MB FTC / 64 B lines
  parameter int unsigned OML_ENTRIES = 128
) (
  input  logic      clk,
  input  logic      rst_n,

  input  addr_t     cfg_fam_base,   // first node address that lies in FAM
  input  addr_t     cfg_ftc_base,   // DRAM byte address of the FTC

  // LLC side
  input  logic      llc_req_valid,
  output logic      llc_req_ready,
  input  llc_req_t  llc_req,
  output logic      llc_resp_valid,
  input  logic      llc_resp_ready,
  output llc_resp_t llc_resp,

  // local DRAM
  output logic      dram_req_valid,
  input  logic      dram_req_ready,
  output mem_req_t  dram_req,
  input  logic      dram_resp_valid,
  input  line_t     dram_resp_data,

  // STU side
  output logic      stu_req_valid,
  input  logic      stu_req_ready,
  output stu_req_t  stu_req,
  input  logic      stu_resp_valid,
  output logic      stu_resp_ready,
  input  stu_resp_t stu_resp,

  // FTC invalidation (page migration): drop the mapping of one node page
  input  logic      ftc_inv_valid,
  output logic      ftc_inv_ready,
  input  pn_t       ftc_inv_npn,

  // one-cycle event pulses for performance counting
  output logic      ev_ftc_hit,
  output logic      ev_ftc_miss,
  output logic      ev_ftc_update,
  output logic      ev_ftc_inv
);


  function automatic addr_t ftc_line_addr(addr_t base, pn_t npn);
    return base + ((addr_t'(npn) % addr_t'(FTC_SETS)) << $clog2(LINE_BYTES));
  endfunction

  // ------------------------------------------------------------------
  // DRAM port lock
  typedef enum logic [1:0] {OWN_NONE, OWN_RQ, OWN_RS} owner_e;
  owner_e owner_q;

  typedef enum logic [3:0] {
    R_IDLE, R_LOCK, R_LOCAL, R_LOCAL_WAIT, R_LOCAL_RESP,
    R_FTC_RD, R_FTC_WAIT, R_MATCH, R_SEND
  } rq_state_e;

  typedef enum logic [2:0] {
    S_IDLE, S_LLC, S_LOCK, S_FTC_RD, S_FTC_WAIT, S_FTC_WR
  } rs_state_e;

  rq_state_e rq_state;
  rs_state_e rs_state;

  logic grant_rq, grant_rs, release_rq, release_rs;
  assign grant_rs = owner_q == OWN_NONE && rs_state == S_LOCK;
  assign grant_rq = owner_q == OWN_NONE && rq_state == R_LOCK && rs_state != S_LOCK;

  // ------------------------------------------------------------------
  // request side
  llc_req_t req_q;
  line_t    rq_line_q;
  pn_t      rq_fam_pn_q;
  logic     rq_v_q;
  pn_t      req_npn;
  pn_t      tm_fam_pn;
  logic     tm_v;
  logic [FTC_WAYS-1:0] tm_match;

  assign req_npn = page_of(req_q.addr);

  ftc_tag_match u_match (
    .npn   (req_npn),
    .line  (rq_line_q),
    .fam_pn(tm_fam_pn),
    .match (tm_match),
    .v     (tm_v)
  );

  logic needs_resp, oml_alloc_ready, oml_alloc;
  assign needs_resp = expects_resp(req_q.op);

  assign llc_req_ready = rq_state == R_IDLE;
  assign stu_req_valid = rq_state == R_SEND && (!needs_resp || oml_alloc_ready);
  assign stu_req.v     = rq_v_q;
  assign stu_req.op    = req_q.op;
  assign stu_req.addr  = rq_v_q ? {rq_fam_pn_q, req_q.addr[PAGE_BITS-1:0]} : req_q.addr;
  assign stu_req.wdata = req_q.wdata;
  assign oml_alloc     = stu_req_valid && stu_req_ready && needs_resp;

  assign release_rq = (rq_state == R_LOCAL && dram_req_ready && req_q.op == OP_WRITE) ||
                      (rq_state == R_LOCAL_WAIT && dram_resp_valid) ||
                      (rq_state == R_FTC_WAIT && dram_resp_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_state    <= R_IDLE;
      req_q       <= '0;
      rq_line_q   <= '0;
      rq_fam_pn_q <= '0;
      rq_v_q      <= 1'b0;
    end else begin
      unique case (rq_state)
        R_IDLE: if (llc_req_valid) begin
          req_q    <= llc_req;
          rq_state <= R_LOCK;
        end
        R_LOCK: if (grant_rq)
          rq_state <= (req_q.addr >= cfg_fam_base) ? R_FTC_RD : R_LOCAL;
        R_LOCAL: if (dram_req_ready)
          rq_state <= (req_q.op == OP_WRITE) ? R_IDLE : R_LOCAL_WAIT;
        R_LOCAL_WAIT: if (dram_resp_valid) begin
          rq_line_q <= dram_resp_data;
          rq_state  <= R_LOCAL_RESP;
        end
        R_LOCAL_RESP: if (llc_resp_ready && rs_state != S_LLC) rq_state <= R_IDLE;
        R_FTC_RD: if (dram_req_ready) rq_state <= R_FTC_WAIT;
        R_FTC_WAIT: if (dram_resp_valid) begin
          rq_line_q <= dram_resp_data;
          rq_state  <= R_MATCH;
        end
        R_MATCH: begin
          rq_fam_pn_q <= tm_fam_pn;
          rq_v_q      <= tm_v;
          rq_state    <= R_SEND;
        end
        R_SEND: if (stu_req_valid && stu_req_ready) rq_state <= R_IDLE;
        default: rq_state <= R_IDLE;
      endcase
    end
  end

  assign ev_ftc_hit  = rq_state == R_MATCH && tm_v;
  assign ev_ftc_miss = rq_state == R_MATCH && !tm_v;

  // ------------------------------------------------------------------
  // response side
  stu_resp_t rsp;
  assign rsp = stu_resp;

  llc_resp_t rs_llc_q;
  pn_t       map_npn_q, map_fam_pn_q;
  line_t     rs_line_q, upd_line, inv_line, wr_line;
  logic      inv_q;
  logic [1:0] upd_way;
  logic [15:0] rnd;

  logic oml_lkp_valid, oml_lkp_by_node, oml_lkp_hit, oml_fill;
  logic [$clog2(OML_ENTRIES+1)-1:0] oml_count;
  pn_t  oml_lkp_npn;

  assign stu_resp_ready  = rs_state == S_IDLE;
  assign ftc_inv_ready   = rs_state == S_IDLE && !stu_resp_valid;

  // invalidation: clear every entry whose tag is the node page
  always_comb begin
    inv_line = rs_line_q;
    for (int i = 0; i < FTC_WAYS; i++)
      if (rs_line_q[FTC_ENTRY_W*i + PN_W +: PN_W] == map_npn_q)
        inv_line[FTC_ENTRY_W*i +: FTC_ENTRY_W] = '0;
  end
  assign wr_line = inv_q ? inv_line : upd_line;
  assign oml_lkp_valid   = stu_resp_valid && stu_resp_ready && rsp.kind != RSP_MAP;
  assign oml_lkp_by_node = rsp.kind == RSP_FAULT_NODE;
  assign oml_fill        = stu_resp_valid && stu_resp_ready && rsp.kind == RSP_MAP;

  outstanding_mapping_list #(.ENTRIES(OML_ENTRIES)) u_oml (
    .clk         (clk),
    .rst_n       (rst_n),
    .alloc_valid (oml_alloc),
    .alloc_ready (oml_alloc_ready),
    .alloc_npn   (req_npn),
    .alloc_fam_pn(rq_fam_pn_q),
    .alloc_filled(rq_v_q),
    .fill_valid  (oml_fill),
    .fill_npn    (page_of(rsp.addr)),
    .fill_fam_pn (rsp.map_pn),
    .lkp_valid   (oml_lkp_valid),
    .lkp_by_node (oml_lkp_by_node),
    .lkp_key     (page_of(rsp.addr)),
    .lkp_free    (1'b1),
    .lkp_hit     (oml_lkp_hit),
    .lkp_npn     (oml_lkp_npn),
    .count       (oml_count)
  );

  ftc_line_update u_update (
    .line_in (rs_line_q),
    .npn     (map_npn_q),
    .fam_pn  (map_fam_pn_q),
    .rnd     (rnd[1:0]),
    .line_out(upd_line),
    .way     (upd_way)
  );

  lfsr16 #(.SEED(16'h5EED)) u_lfsr (
    .clk  (clk),
    .rst_n(rst_n),
    .step (1'b1),
    .value(rnd)
  );

  assign release_rs = rs_state == S_FTC_WR && dram_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs_state     <= S_IDLE;
      rs_llc_q     <= '0;
      map_npn_q    <= '0;
      map_fam_pn_q <= '0;
      rs_line_q    <= '0;
      inv_q        <= 1'b0;
    end else begin
      unique case (rs_state)
        S_IDLE: if (stu_resp_valid) begin
          unique case (rsp.kind)
            RSP_MAP: begin
              map_npn_q    <= page_of(rsp.addr);
              map_fam_pn_q <= rsp.map_pn;
              inv_q        <= 1'b0;
              rs_state     <= S_LOCK;
            end
            RSP_FAULT_NODE: begin
              // only reads and fetches are answered; a refused write is dropped
              rs_llc_q <= '{fault: 1'b1, addr: rsp.addr, rdata: '0};
              rs_state <= oml_lkp_hit ? S_LLC : S_IDLE;
            end
            default: begin  // RSP_MEM, RSP_FAULT_FAM
              rs_llc_q.fault <= rsp.kind == RSP_FAULT_FAM || !oml_lkp_hit;
              rs_llc_q.addr  <= oml_lkp_hit ? {oml_lkp_npn, rsp.addr[PAGE_BITS-1:0]} : rsp.addr;
              rs_llc_q.rdata <= rsp.rdata;
              rs_state       <= S_LLC;
            end
          endcase
        end else if (ftc_inv_valid) begin
          map_npn_q <= ftc_inv_npn;
          inv_q     <= 1'b1;
          rs_state  <= S_LOCK;
        end
        S_LLC:      if (llc_resp_ready) rs_state <= S_IDLE;
        S_LOCK:     if (grant_rs) rs_state <= S_FTC_RD;
        S_FTC_RD:   if (dram_req_ready) rs_state <= S_FTC_WAIT;
        S_FTC_WAIT: if (dram_resp_valid) begin
          rs_line_q <= dram_resp_data;
          rs_state  <= S_FTC_WR;
        end
        S_FTC_WR:   if (dram_req_ready) rs_state <= S_IDLE;
        default:    rs_state <= S_IDLE;
      endcase
    end
  end

  assign ev_ftc_update = release_rs && !inv_q;
  assign ev_ftc_inv    = release_rs && inv_q;

  // ------------------------------------------------------------------
  // DRAM lock and port multiplexing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) owner_q <= OWN_NONE;
    else if (grant_rs) owner_q <= OWN_RS;
    else if (grant_rq) owner_q <= OWN_RQ;
    else if ((owner_q == OWN_RQ && release_rq) || (owner_q == OWN_RS && release_rs))
      owner_q <= OWN_NONE;
  end

  always_comb begin
    dram_req_valid = 1'b0;
    dram_req       = '0;
    unique case (1'b1)
      rq_state == R_LOCAL: begin
        dram_req_valid = 1'b1;
        dram_req.we    = req_q.op == OP_WRITE;
        dram_req.addr  = {req_q.addr[ADDR_W-1:6], 6'b0};
        dram_req.wdata = req_q.wdata;
      end
      rq_state == R_FTC_RD: begin
        dram_req_valid = 1'b1;
        dram_req.addr  = ftc_line_addr(cfg_ftc_base, req_npn);
      end
      rs_state == S_FTC_RD: begin
        dram_req_valid = 1'b1;
        dram_req.addr  = ftc_line_addr(cfg_ftc_base, map_npn_q);
      end
      rs_state == S_FTC_WR: begin
        dram_req_valid = 1'b1;
        dram_req.we    = 1'b1;
        dram_req.addr  = ftc_line_addr(cfg_ftc_base, map_npn_q);
        dram_req.wdata = wr_line;
      end
      default: ;
    endcase
  end

  // LLC response: the response side goes first
  always_comb begin
    if (rs_state == S_LLC) begin
      llc_resp_valid = 1'b1;
      llc_resp       = rs_llc_q;
    end else begin
      llc_resp_valid = rq_state == R_LOCAL_RESP;
      llc_resp       = '{fault: 1'b0, addr: req_q.addr, rdata: rq_line_q};
    end
  end

  // ------------------------------------------------------------------
  // Assertions are checked from the first clock edge after reset; a flag
  // register (rather than rst_n itself) keeps the reset purely asynchronous.
  logic chk_live_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_live_q <= 1'b0;
    else        chk_live_q <= 1'b1;

  a_stu_req_stable: assert property (@(posedge clk) disable iff (!chk_live_q)
    stu_req_valid && !stu_req_ready |=> stu_req_valid && $stable(stu_req));
  a_oml_bound: assert property (@(posedge clk) disable iff (!chk_live_q)
    32'(oml_count) <= OML_ENTRIES && (32'(oml_count) == OML_ENTRIES) == !oml_alloc_ready);
  a_one_dram_user: assert property (@(posedge clk) disable iff (!chk_live_q)
    $onehot0({rq_state == R_LOCAL || rq_state == R_FTC_RD,
              rs_state == S_FTC_RD || rs_state == S_FTC_WR}));

  logic unused;
  assign unused = ^{tm_match, upd_way, rnd[15:2]};

endmodule
