// tb_deact_top: end-to-end test of one node's DeACT path at the default
// parameters (1 MB FTC = 16384 sets, 128-entry outstanding list, 1024-entry
// 8-way STU cache in the DeACT-N layout). The testbench acts as the memory
// broker (builds the node's FAM page table, ACM and bitmaps in the FAM model),
// as the LLC (issues reads, writes and instruction fetches without waiting for
// responses) and checks every response against a shadow memory kept here.
// The fabric + FAM round trip is 1120 cycles: 500 ns fabric and 60 ns NVM
// read at 2 GHz, the paper's system configuration. The local DRAM model
// answers in one cycle so that the single-request FTC lookup can issue
// faster than one FAM round trip drains and the outstanding list fills.
//
// Node pages are given classes: owned read/write, owned read-only, owned
// read/write/execute, owned by another node, shared with this node's bitmap
// bit set, shared without it, and not mapped at all. Expected outcome per
// access: data (reads/fetches allowed), fault (refused or not mapped), or
// nothing (writes; allowed writes update the shadow). Shared pages are
// reached through two 1 GB pages (level-2 leaves), private ones through
// 4 KB pages. At the end every
// written FAM line is compared with the shadow and the list must be empty.
// Each mechanism must occur at least once: local DRAM access, FTC hit, FTC
// miss, FTC update (mapping response), FTC invalidation, ACM cache hit and
// miss, page walk, page-walk cache hit, 1 GB page walk, walk fault, shared-page bitmap check, refused access, FTC line full
// (random eviction), and the request stall on a full outstanding list.
module tb_deact_top;
  import deact_pkg::*;

  localparam int    FAM_LAT  = 1120;
  localparam addr_t FAM_BASE = 64'h4000_0000;     // 1 GB local DRAM below
  localparam addr_t FTC_BASE = 64'h3FF0_0000;     // top 1 MB of local DRAM
  localparam addr_t MT       = 64'h1000_0000;
  localparam addr_t BM       = 64'h0000_0000;
  localparam addr_t ROOT     = 64'h2000_0000;
  localparam node_id_t ME    = 14'd5;
  localparam int    NPAGES   = 192;
  localparam int    NCONF    = 5;                 // extra pages in FTC set of page 0
  localparam int    NTRANS   = 3000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic llc_req_valid, llc_req_ready, llc_resp_valid, llc_resp_ready;
  llc_req_t llc_req; llc_resp_t llc_resp;
  logic dram_req_valid, dram_req_ready, dram_resp_valid; mem_req_t dram_req; line_t dram_resp_data;
  logic fab_req_valid, fab_req_ready, fab_resp_valid, fab_resp_ready; fab_req_t fab_req; fab_resp_t fab_resp;
  logic ftc_inv_valid = 1'b0, ftc_inv_ready, ev_ftc_inv;
  pn_t  ftc_inv_npn = '0;
  logic ev_ftc_hit, ev_ftc_miss, ev_ftc_update, ev_acm_hit, ev_acm_miss, ev_walk, ev_walk_access, ev_pwc_hit, ev_walk_large, ev_shared, ev_deny;

  deact_top dut (
    .clk, .rst_n,
    .cfg_fam_base(FAM_BASE), .cfg_ftc_base(FTC_BASE), .cfg_node_id(ME),
    .cfg_mt_base(MT), .cfg_bm_base(BM), .cfg_ptw_root(ROOT),
    .inv_valid(1'b0), .inv_pn('0), .ptw_flush(1'b0), .*);

  dram_model #(.LATENCY(1)) u_dram (.clk, .stall(1'b0), .req_valid(dram_req_valid), .req_ready(dram_req_ready),
                                     .req(dram_req), .resp_valid(dram_resp_valid), .resp_data(dram_resp_data));
  fam_model #(.LATENCY(FAM_LAT)) u_fam (.clk, .stall(1'b0), .req_valid(fab_req_valid), .req_ready(fab_req_ready),
                                        .req(fab_req), .resp_valid(fab_resp_valid), .resp_ready(fab_resp_ready),
                                        .resp(fab_resp));

  // ------------------------------------------------------------------
  typedef enum int {C_RW, C_R, C_RWX, C_OTHER, C_SHARED, C_SHARED_NO, C_UNMAPPED} cls_e;
  typedef enum int {E_DATA, E_FAULT} exp_kind_e;
  typedef struct { exp_kind_e kind; line_t data; } exp_t;

  pn_t   np   [NPAGES + NCONF];   // node pages
  pn_t   fp   [NPAGES + NCONF];   // FAM pages
  cls_e  cls  [NPAGES + NCONF];
  line_t shadow [addr_t];         // by node line address
  exp_t  expq   [addr_t][$];      // expected responses by node address
  int    outstanding = 0;
  bit    used_fp [pn_t];

  // mechanism counters
  int m_local = 0, m_ftc_hit = 0, m_ftc_miss = 0, m_ftc_upd = 0, m_ftc_inv = 0, m_acm_hit = 0, m_acm_miss = 0,
      m_walk = 0, m_pwc_hit = 0, m_large = 0, m_walk_fault = 0, m_shared = 0, m_deny = 0, m_evict = 0, m_oml_stall = 0, m_oml_max = 0;
  always @(posedge clk) if (rst_n) begin
    m_ftc_hit += ev_ftc_hit; m_ftc_miss += ev_ftc_miss; m_ftc_upd += ev_ftc_update; m_ftc_inv += ev_ftc_inv;
    m_acm_hit += ev_acm_hit; m_acm_miss += ev_acm_miss; m_walk += ev_walk; m_pwc_hit += ev_pwc_hit; m_large += ev_walk_large;
    m_shared += ev_shared; m_deny += ev_deny;
    if (dut.u_translator.u_oml.count > m_oml_max) m_oml_max = dut.u_translator.u_oml.count;
    if (dut.u_translator.rq_state == dut.u_translator.R_SEND && !dut.u_translator.oml_alloc_ready) m_oml_stall++;
    if (dut.u_stu.state == dut.u_stu.T_WALK && dut.u_stu.ptw_done && dut.u_stu.ptw_fault) m_walk_fault++;
    if (dut.u_translator.rs_state == dut.u_translator.S_FTC_WAIT && dram_resp_valid) begin
      int full;
      full = 1;
      for (int w = 0; w < 4; w++) if (dram_resp_data[104*w +: 52] == '0) full = 0;
      for (int w = 0; w < 4; w++) if (dram_resp_data[104*w + 52 +: 52] == dut.u_translator.map_npn_q) full = 0;
      m_evict += full;
    end
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int i = 0; i < 8; i++) l[64*i +: 64] = {a[31:0], 32'(i) ^ 32'hA5A5_0000};
    return l;
  endfunction

  addr_t next_table = ROOT + 4096;
  function automatic void map(pn_t n, pn_t f);
    addr_t t = ROOT;
    for (int l = 3; l >= 0; l--) begin
      addr_t ea = t + 8 * ((n >> (9 * l)) & 'h1ff);
      logic [63:0] e = u_fam.peek(ea)[64*ea[5:3] +: 64];
      if (l == 0) u_fam.poke64(ea, {f, 11'b0, 1'b1});
      else begin
        if (!e[0]) begin
          e = {next_table[63:12], 11'b0, 1'b1};
          next_table += 4096;
          u_fam.poke64(ea, e);
        end
        t = {e[63:12], 12'b0};
      end
    end
  endfunction

  // map a 1 GB node region (node page n, 2^18 aligned) to the 1 GB FAM
  // region at FAM page f with a level-2 leaf (bit 7 set)
  function automatic void map_large(pn_t n, pn_t f);
    addr_t t = ROOT;
    for (int l = 3; l >= 2; l--) begin
      addr_t ea = t + 8 * ((n >> (9 * l)) & 'h1ff);
      logic [63:0] e = u_fam.peek(ea)[64*ea[5:3] +: 64];
      if (l == 2) u_fam.poke64(ea, {f, 4'b0, 1'b1, 6'b0, 1'b1});
      else begin
        if (!e[0]) begin
          e = {next_table[63:12], 11'b0, 1'b1};
          next_table += 4096;
          u_fam.poke64(ea, e);
        end
        t = {e[63:12], 12'b0};
      end
    end
  endfunction

  function automatic void set_acm(pn_t f, node_id_t owner, perm_e p);
    addr_t x = {f, 12'h0};
    u_fam.poke16(MT + (x >> 17) * 64 + 2 * ((x >> 12) % 32), {owner, p});
  endfunction

  function automatic void set_bit(pn_t f, node_id_t n, bit v);
    addr_t x = {f, 12'h0};
    addr_t a = BM + (x >> 30) * 8192 + (n / 512) * 64;
    line_t l = u_fam.peek(a);
    l[n % 512] = v;
    u_fam.poke(a, l);
  endfunction

  function automatic pn_t fresh_fp(pn_t lo, int span);
    pn_t f;
    do f = lo + pn_t'($urandom_range(0, span - 1)); while (used_fp.exists(f));
    used_fp[f] = 1;
    return f;
  endfunction

  function automatic bit allowed(int k, op_e op);
    unique case (cls[k])
      C_RW:     return op != OP_EXEC;
      C_R:      return op == OP_READ;
      C_RWX:    return 1'b1;
      C_SHARED: return op != OP_EXEC;
      default:  return 1'b0;
    endcase
  endfunction

  // ------------------------------------------------------------------
  // LLC side
  assign llc_resp_ready = 1'b1;
  always @(posedge clk) if (rst_n && llc_resp_valid) begin
    addr_t a;
    exp_t e;
    a = llc_resp.addr;
    if (!expq.exists(a) || expq[a].size() == 0) begin
      check("unexpected response", 0);
      $display("  unexpected response addr=%h fault=%b", a, llc_resp.fault);
    end else begin
      e = expq[a].pop_front();
      check("fault flag", llc_resp.fault == (e.kind == E_FAULT));
      if (e.kind == E_DATA) check("read data", llc_resp.rdata == e.data);
      outstanding--;
    end
  end

  task automatic issue(op_e op, addr_t a, line_t d);
    addr_t la = {a[63:6], 6'b0};
    @(negedge clk);
    llc_req_valid = 1; llc_req = '{op: op, addr: a, wdata: d};
    do @(posedge clk); while (!llc_req_ready);
    #1 llc_req_valid = 0;
  endtask

  // decide the outcome, update the shadow, then issue
  task automatic access(int k, op_e op, int line);
    addr_t a  = {np[k], 12'h0} + 64 * line;
    bit    ok = allowed(k, op);
    if (op == OP_WRITE) begin
      line_t d;
      for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom();
      if (ok) shadow[a] = d;
      issue(op, a, d);
    end else begin
      exp_t e;
      e.kind = ok ? E_DATA : E_FAULT;
      e.data = shadow.exists(a) ? shadow[a] : '0;
      expq[a].push_back(e);
      outstanding++;
      issue(op, a, '0);
    end
  endtask

  task automatic local_access(int i, op_e op);
    addr_t a = 64'h0010_0000 + 64 * i;
    if (op == OP_WRITE) begin
      line_t d;
      for (int j = 0; j < 16; j++) d[32*j +: 32] = $urandom();
      shadow[a] = d;
      issue(op, a, d);
    end else begin
      exp_t e;
      e.kind = E_DATA;
      e.data = shadow[a];
      expq[a].push_back(e);
      outstanding++;
      issue(op, a, '0);
    end
    m_local++;
  endtask

  // ------------------------------------------------------------------
  initial begin
    llc_req_valid = 0; llc_req = '0;
    // ---- broker: page table, ACM, bitmaps, data
    // shared pages live in two 1 GB pages: node region 3 -> FAM region 15
    // (bitmap bit set), node region 4 -> FAM region 14 (bit clear)
    map_large(52'hC_0000, 52'h3C_0000);
    map_large(52'h10_0000, 52'h38_0000);
    for (int k = 0; k < NPAGES + NCONF; k++) begin
      np[k] = (k < NPAGES) ? page_of(FAM_BASE) + pn_t'(k * 3)
                           : page_of(FAM_BASE) + pn_t'((k - NPAGES + 1) * 16384);
      unique case (k % 16)
        10: cls[k] = C_R;
        11: cls[k] = C_RWX;
        12: cls[k] = C_OTHER;
        13: cls[k] = C_SHARED;
        14: cls[k] = C_SHARED_NO;
        15: cls[k] = C_UNMAPPED;
        default: cls[k] = C_RW;
      endcase
      if (k >= NPAGES) cls[k] = C_RW;
      if (cls[k] == C_SHARED)    np[k] = 52'hC_0000 + pn_t'(k * 3);
      if (cls[k] == C_SHARED_NO) np[k] = 52'h10_0000 + pn_t'(k * 3);
      unique case (cls[k])
        C_SHARED:    fp[k] = 52'h3C0000 + pn_t'(np[k][17:0]);   // 1 GB region 15
        C_SHARED_NO: fp[k] = 52'h380000 + pn_t'(np[k][17:0]);   // 1 GB region 14
        default:     fp[k] = fresh_fp(52'h100000, 52'h280000);
      endcase
      if (cls[k] != C_UNMAPPED && cls[k] != C_SHARED && cls[k] != C_SHARED_NO) map(np[k], fp[k]);
      unique case (cls[k])
        C_RW:        set_acm(fp[k], ME, PERM_RW);
        C_R:         set_acm(fp[k], ME, PERM_R);
        C_RWX:       set_acm(fp[k], ME, PERM_RWX);
        C_OTHER:     set_acm(fp[k], 14'd9, PERM_RW);
        C_SHARED:    set_acm(fp[k], SHARED_ID, PERM_RW);
        C_SHARED_NO: set_acm(fp[k], SHARED_ID, PERM_RW);
        default: ;
      endcase
      for (int i = 0; i < 4; i++) begin
        line_t d;
        d = pattern({fp[k], 12'h0} + 64 * i);
        u_fam.poke({fp[k], 12'h0} + 64 * i, d);
        if (cls[k] != C_UNMAPPED) shadow[{np[k], 12'h0} + 64 * i] = d;
      end
    end
    set_bit(52'h3C0000, ME, 1);
    set_bit(52'h3C0000, 14'd4, 1);
    set_bit(52'h380000, 14'd4, 1);
    for (int i = 0; i < 16; i++) begin
      shadow[64'h0010_0000 + 64 * i] = pattern(64'h0010_0000 + 64 * i);
      u_dram.poke(64'h0010_0000 + 64 * i, shadow[64'h0010_0000 + 64 * i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- phase 1: touch every page once (misses, walks, FTC updates)
    for (int k = 0; k < NPAGES + NCONF; k++) access(k, OP_READ, 0);
    // ---- phase 2: random mix
    for (int t = 0; t < NTRANS; t++) begin
      int r, k, l;
      r = $urandom_range(0, 99);
      k = $urandom_range(0, NPAGES + NCONF - 1);
      l = $urandom_range(0, 3);
      if (r < 10) local_access($urandom_range(0, 15), $urandom_range(0, 1) ? OP_WRITE : OP_READ);
      else if (r < 55) access(k, OP_READ, l);
      else if (r < 90) access(k, OP_WRITE, l);
      else access(k, OP_EXEC, l);
    end
    // ---- phase 2b: drop the FTC mappings of 20 pages (as for a migration),
    // then use them again: each must miss, be walked again and still work
    for (int k = 0; k < 20; k++) begin
      @(negedge clk); ftc_inv_valid = 1; ftc_inv_npn = np[k];
      do @(posedge clk); while (!ftc_inv_ready);
      #1 ftc_inv_valid = 0;
    end
    begin
      int miss0;
      repeat (200) @(posedge clk);
      miss0 = m_ftc_miss;
      for (int k = 0; k < 20; k++) access(k, OP_READ, 1);
      repeat (5000) @(posedge clk);
      check("invalidated pages miss again", m_ftc_miss - miss0 == 20);
    end
    // ---- phase 3: burst of reads to fill the outstanding list
    for (int t = 0; t < 200; t++) access(t % 8, OP_READ, t % 4);
    // ---- drain
    begin
      int n;
      n = 0;
      while (outstanding > 0 && n < 200000) begin @(posedge clk); n++; end
    end
    repeat (FAM_LAT + 100) @(posedge clk);
    check("all responses returned", outstanding == 0);
    check("outstanding list empty", dut.u_translator.u_oml.count == 0);
    // ---- final memory image
    for (int k = 0; k < NPAGES + NCONF; k++)
      if (cls[k] != C_UNMAPPED)
        for (int i = 0; i < 4; i++)
          check("FAM contents", u_fam.peek({fp[k], 12'h0} + 64 * i) == shadow[{np[k], 12'h0} + 64 * i]);
    for (int i = 0; i < 16; i++)
      check("local contents", u_dram.peek(64'h0010_0000 + 64 * i) == shadow[64'h0010_0000 + 64 * i]);
    // ---- mechanisms
    $display("mechanisms: local=%0d ftc_hit=%0d ftc_miss=%0d ftc_update=%0d ftc_inv=%0d acm_hit=%0d acm_miss=%0d walk=%0d pwc_hit=%0d walk_1g=%0d walk_fault=%0d shared=%0d deny=%0d ftc_evict=%0d oml_full_stall_cycles=%0d oml_peak=%0d",
             m_local, m_ftc_hit, m_ftc_miss, m_ftc_upd, m_ftc_inv, m_acm_hit, m_acm_miss, m_walk, m_pwc_hit, m_large, m_walk_fault, m_shared, m_deny, m_evict, m_oml_stall, m_oml_max);
    $display("FTC hit rate %0d%%, ACM hit rate %0d%%", 100 * m_ftc_hit / (m_ftc_hit + m_ftc_miss),
             100 * m_acm_hit / (m_acm_hit + m_acm_miss));
    check("local access happened", m_local > 0);
    check("FTC hit happened", m_ftc_hit > 0);
    check("FTC miss happened", m_ftc_miss > 0);
    check("FTC update happened", m_ftc_upd > 0);
    check("FTC invalidation happened", m_ftc_inv == 20);
    check("ACM hit happened", m_acm_hit > 0);
    check("ACM miss happened", m_acm_miss > 0);
    check("walk happened", m_walk > 0);
    check("page-walk cache hit happened", m_pwc_hit > 0);
    check("walk fault happened", m_walk_fault > 0);
    check("shared check happened", m_shared > 0);
    check("1 GB page walk happened", m_large > 0);
    check("refusal happened", m_deny > 0);
    check("FTC eviction happened", m_evict > 0);
    check("outstanding-list stall happened", m_oml_stall > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: outstanding=%0d", outstanding);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
