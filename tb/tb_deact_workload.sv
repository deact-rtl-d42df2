// tb_deact_workload: a streaming application footprint run through the whole
// node path at the default parameters. The HPC applications this design is
// meant for differ, as seen from the translation and access-control path,
// only in how much FAM they touch and how often they miss the LLC. This
// testbench stands in for them with one footprint, scaled down so that it
// simulates in seconds: NPG node pages (8 MB at 2048), mapped by the memory
// broker to consecutive FAM pages owned by this node with read/write
// permission, as an allocator would hand them out.
//   pass 1: the LLC streams over the footprint, one read per page, issued
//           back to back. Every page must miss the FTC exactly once and be
//           walked once.
//   pass 2: the same pages again, a mix of reads and writes to other lines.
//           The footprint is far below the 65,536 mappings a 1 MB FTC holds
//           and consecutive node pages fall in distinct FTC sets, so there
//           must be no FTC miss and no walk at all.
//   pass 3: random reuse over the footprint; again no FTC miss.
// Every read is checked against a shadow copy, every written line against
// the FAM model at the end. The fabric + FAM round trip is 1120 cycles and
// the local DRAM answers in one cycle, as in tb_deact_top.
module tb_deact_workload;
  import deact_pkg::*;

  localparam int    FAM_LAT  = 1120;
  localparam addr_t FAM_BASE = 64'h4000_0000;
  localparam addr_t FTC_BASE = 64'h3FF0_0000;
  localparam addr_t MT       = 64'h1000_0000;
  localparam addr_t BM       = 64'h0000_0000;
  localparam addr_t ROOT     = 64'h2000_0000;
  localparam node_id_t ME    = 14'd5;
  localparam int    NPG      = 2048;
  localparam pn_t   FP0      = 52'h12_3400;        // first FAM page of the footprint
  localparam int    NRAND    = 2000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic llc_req_valid, llc_req_ready, llc_resp_valid, llc_resp_ready;
  llc_req_t llc_req; llc_resp_t llc_resp;
  logic dram_req_valid, dram_req_ready, dram_resp_valid; mem_req_t dram_req; line_t dram_resp_data;
  logic fab_req_valid, fab_req_ready, fab_resp_valid, fab_resp_ready; fab_req_t fab_req; fab_resp_t fab_resp;
  logic ftc_inv_ready, ev_ftc_inv;
  logic ev_ftc_hit, ev_ftc_miss, ev_ftc_update, ev_acm_hit, ev_acm_miss, ev_walk, ev_walk_access, ev_pwc_hit,
        ev_walk_large, ev_shared, ev_deny;

  deact_top dut (
    .clk, .rst_n,
    .cfg_fam_base(FAM_BASE), .cfg_ftc_base(FTC_BASE), .cfg_node_id(ME),
    .cfg_mt_base(MT), .cfg_bm_base(BM), .cfg_ptw_root(ROOT),
    .inv_valid(1'b0), .inv_pn('0), .ptw_flush(1'b0),
    .ftc_inv_valid(1'b0), .ftc_inv_npn('0), .*);

  dram_model #(.LATENCY(1)) u_dram (.clk, .stall(1'b0), .req_valid(dram_req_valid), .req_ready(dram_req_ready),
                                     .req(dram_req), .resp_valid(dram_resp_valid), .resp_data(dram_resp_data));
  fam_model #(.LATENCY(FAM_LAT)) u_fam (.clk, .stall(1'b0), .req_valid(fab_req_valid), .req_ready(fab_req_ready),
                                        .req(fab_req), .resp_valid(fab_resp_valid), .resp_ready(fab_resp_ready),
                                        .resp(fab_resp));

  int m_ftc_hit = 0, m_ftc_miss = 0, m_acm_hit = 0, m_acm_miss = 0, m_walk = 0, m_deny = 0;
  always @(posedge clk) begin
    m_ftc_hit += ev_ftc_hit; m_ftc_miss += ev_ftc_miss;
    m_acm_hit += ev_acm_hit; m_acm_miss += ev_acm_miss;
    m_walk += ev_walk; m_deny += ev_deny;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  line_t shadow [addr_t];          // by node line address
  line_t expq   [addr_t][$];       // expected read data by node address
  int    outstanding = 0;

  function automatic pn_t np_of(int k);
    return pn_t'(FAM_BASE >> 12) + pn_t'(k);
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

  // LLC side
  assign llc_resp_ready = 1'b1;
  always @(posedge clk) if (rst_n && llc_resp_valid) begin
    addr_t a;
    a = llc_resp.addr;
    if (!expq.exists(a) || expq[a].size() == 0) check("unexpected response", 0);
    else begin
      line_t d;
      d = expq[a].pop_front();
      check("no fault", !llc_resp.fault);
      check("read data", llc_resp.rdata == d);
      outstanding--;
    end
  end

  task automatic issue(op_e op, addr_t a, line_t d);
    @(negedge clk);
    llc_req_valid = 1; llc_req = '{op: op, addr: a, wdata: d};
    do @(posedge clk); while (!llc_req_ready);
    #1 llc_req_valid = 0;
  endtask

  task automatic access(int k, op_e op, int line);
    addr_t a;
    a = {np_of(k), 12'h0} + addr_t'(64 * line);
    if (op == OP_WRITE) begin
      line_t d;
      for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom();
      shadow[a] = d;
      issue(op, a, d);
    end else begin
      expq[a].push_back(shadow.exists(a) ? shadow[a] : '0);
      outstanding++;
      issue(op, a, '0);
    end
  endtask

  task automatic drain();
    int n;
    n = 0;
    while (outstanding > 0 && n < 2000000) begin @(posedge clk); n++; end
    repeat (FAM_LAT + 100) @(posedge clk);
    check("all responses returned", outstanding == 0);
  endtask

  initial begin
    int miss0, walk0, acmh0, acmm0;
    llc_req_valid = 0; llc_req = '0;
    // broker: page table, ACM words, first line of each page
    for (int k = 0; k < NPG; k++) begin
      addr_t x, a;
      line_t d;
      map(np_of(k), FP0 + pn_t'(k));
      x = {FP0 + pn_t'(k), 12'h0};
      u_fam.poke16(MT + (x >> 17) * 64 + 2 * ((x >> 12) % 32), {ME, PERM_RW});
      for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom();
      u_fam.poke(x, d);
      a = {np_of(k), 12'h0};
      shadow[a] = d;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // pass 1: cold stream
    for (int k = 0; k < NPG; k++) access(k, OP_READ, 0);
    drain();
    check("pass 1: one FTC miss per page", m_ftc_miss == NPG);
    check("pass 1: one walk per page", m_walk == NPG);
    $display("pass 1: ftc_miss=%0d walks=%0d acm_hit=%0d acm_miss=%0d", m_ftc_miss, m_walk, m_acm_hit, m_acm_miss);

    // pass 2: warm stream, reads and writes to other lines
    miss0 = m_ftc_miss; walk0 = m_walk; acmh0 = m_acm_hit; acmm0 = m_acm_miss;
    for (int k = 0; k < NPG; k++) begin
      if ($urandom_range(0, 2) == 0) access(k, OP_WRITE, 1 + (k % 7));
      else access(k, OP_READ, k % 8);
    end
    drain();
    check("pass 2: no FTC miss", m_ftc_miss == miss0);
    check("pass 2: no walk", m_walk == walk0);
    check("pass 2: ACM hits", m_acm_hit > acmh0);
    $display("pass 2: ftc_miss=%0d walks=%0d acm_hit=%0d acm_miss=%0d", m_ftc_miss - miss0, m_walk - walk0,
             m_acm_hit - acmh0, m_acm_miss - acmm0);

    // pass 3: random reuse
    miss0 = m_ftc_miss;
    for (int t = 0; t < NRAND; t++) begin
      int k, l;
      k = $urandom_range(0, NPG - 1);
      l = $urandom_range(0, 7);
      if ($urandom_range(0, 1) == 0) access(k, OP_WRITE, l);
      else access(k, OP_READ, l);
    end
    drain();
    check("pass 3: no FTC miss", m_ftc_miss == miss0);
    check("no refusal", m_deny == 0);
    check("outstanding list empty", dut.u_translator.u_oml.count == 0);

    // final memory image of every written line
    foreach (shadow[a]) begin
      addr_t f;
      f = {FP0 + (pn_t'(a >> 12) - np_of(0)), a[11:0]};
      check("FAM contents", u_fam.peek(f) == shadow[a]);
    end
    $display("FTC hit rate %0d%%, ACM hit rate %0d%%", 100 * m_ftc_hit / (m_ftc_hit + m_ftc_miss),
             100 * m_acm_hit / (m_acm_hit + m_acm_miss));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
