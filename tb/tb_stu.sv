// tb_stu: the STU with a FAM model holding ACM, bitmaps and the node's page
// table; the testbench plays the node's FAM translator. Checks:
//  - mapped (V = 1) request: ACM read from the right FAM block on a cache
//    miss, request forwarded unchanged, FAM data returned as RSP_MEM; a
//    second access hits the ACM cache and leaves 4 cycles after acceptance;
//  - refused accesses: other owner (RSP_FAULT_FAM), write to a read-only page
//    (dropped, no FAM write), fetch from a non-executable page;
//  - shared pages: allowed with the requester's bitmap bit set, refused
//    without it, one bitmap read each;
//  - not-mapped (V = 0) request: four page-table reads, RSP_MAP with the FAM
//    page before the data, then verification and forwarding; unmapped page
//    gives RSP_FAULT_NODE;
//  - DeACT-N capacity: 16 pages of one cache set are all cached at once;
//  - invalidation makes the next access fetch the ACM again;
//  - 400 random requests (V = 1 or 0, read/write/fetch) over 48 FAM pages with
//    random owners, permissions and sharing, and 24 node pages (a third
//    unmapped): each response kind, address and data, and the FAM contents
//    after every write, match a reference decision computed here.
module tb_stu;
  import deact_pkg::*;

  localparam int LAT = 3;
  localparam addr_t MT   = 64'h1000_0000;
  localparam addr_t BM   = 64'h0000_0000;
  localparam addr_t ROOT = 64'h2000_0000;
  localparam node_id_t ME = 14'd5;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid, resp_ready, fab_req_valid, fab_req_ready, fab_resp_valid, fab_resp_ready;
  stu_req_t req; stu_resp_t resp; fab_req_t fab_req; fab_resp_t fab_resp;
  logic inv_valid; pn_t inv_pn;
  logic ptw_flush = 1'b0, ev_pwc_hit, ev_walk_large;
  logic ev_acm_hit, ev_acm_miss, ev_walk, ev_walk_access, ev_shared, ev_deny;

  stu dut (.clk, .rst_n, .cfg_node_id(ME), .cfg_mt_base(MT), .cfg_bm_base(BM), .cfg_ptw_root(ROOT), .*);
  fam_model #(.LATENCY(LAT)) u_fam (.clk, .stall(1'b0), .req_valid(fab_req_valid), .req_ready(fab_req_ready),
                                    .req(fab_req), .resp_valid(fab_resp_valid), .resp_ready(fab_resp_ready),
                                    .resp(fab_resp));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // counters
  int n_hit = 0, n_miss = 0, n_walk = 0, n_walk_acc = 0, n_shared = 0, n_deny = 0;
  always @(posedge clk) begin
    n_hit <= n_hit + ev_acm_hit; n_miss <= n_miss + ev_acm_miss; n_walk <= n_walk + ev_walk;
    n_walk_acc <= n_walk_acc + ev_walk_access; n_shared <= n_shared + ev_shared; n_deny <= n_deny + ev_deny;
  end
  // fabric log
  fab_req_t fab_log [$];
  int       fab_cyc [$];
  always @(posedge clk) if (rst_n && fab_req_valid && fab_req_ready) begin
    fab_log.push_back(fab_req); fab_cyc.push_back(cyc);
  end
  // response log
  stu_resp_t rsp_log [$];
  assign resp_ready = 1'b1;
  always @(posedge clk) if (rst_n && resp_valid) rsp_log.push_back(resp);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int i = 0; i < 8; i++) l[64*i +: 64] = a + 64'(i) * 64'h0101_0101;
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

  // send one request, return its acceptance cycle
  task automatic send(logic v, op_e op, addr_t a, line_t d, output int at);
    @(negedge clk);
    req_valid = 1; req = '{v: v, op: op, addr: a, wdata: d};
    do @(posedge clk); while (!req_ready);
    at = cyc;
    #1 req_valid = 0;
  endtask

  task automatic settle();
    repeat (40) @(posedge clk);
  endtask

  initial begin
    int at, nf, nr;
    addr_t X;
    req_valid = 0; req = '0; inv_valid = 0; inv_pn = '0;
    // FAM contents
    for (int i = 0; i < 6 * 64; i++) u_fam.poke(64'h0_4000_0000 + 64 * i, pattern(64'h0_4000_0000 + 64 * i));
    set_acm(52'h40000, ME, PERM_RW);          // own page
    set_acm(52'h40001, 14'd6, PERM_RWX);      // someone else's
    set_acm(52'h40002, ME, PERM_R);           // read only
    set_acm(52'h40003, ME, PERM_RWX);         // executable
    set_acm(52'h40004, 14'h3fff, PERM_RW);    // shared, bit set
    set_acm(52'h80005, 14'h3fff, PERM_RW);    // shared, other 1 GB region, bit clear
    set_bit(52'h40004, ME, 1);
    set_bit(52'h40004, 14'd6, 1);
    map(52'h123456, 52'h40000);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- mapped read, ACM miss then hit
    X = 64'h0_4000_0040;
    send(1, OP_READ, X, '0, at); settle();
    check("acm miss read block", fab_log.size() == 2 && fab_log[0].src_stu && fab_log[0].addr == MT + (X >> 17) * 64);
    check("forwarded unchanged", fab_log.size() == 2 && !fab_log[1].src_stu && !fab_log[1].we && fab_log[1].addr == X);
    check("data back as RSP_MEM", rsp_log.size() == 1 && rsp_log[0].kind == RSP_MEM && rsp_log[0].addr == X &&
                                  rsp_log[0].rdata == pattern(X));
    check("miss counted", n_miss == 1 && n_hit == 0);
    fab_log.delete(); fab_cyc.delete(); rsp_log.delete();
    send(1, OP_WRITE, X, pattern(64'h77), at); settle();
    check("acm hit: no metadata read", fab_log.size() == 1 && !fab_log[0].src_stu && fab_log[0].we);
    check("acm hit: 4 cycles", fab_cyc.size() == 1 && fab_cyc[0] - at == 4);
    check("write reached FAM", u_fam.peek(X) == pattern(64'h77));
    check("hit counted", n_hit == 1);
    fab_log.delete(); fab_cyc.delete(); rsp_log.delete();

    // ---- refusals
    send(1, OP_READ, 64'h0_4000_1000, '0, at); settle();
    check("other owner: fault", rsp_log.size() == 1 && rsp_log[0].kind == RSP_FAULT_FAM && rsp_log[0].addr == 64'h0_4000_1000);
    check("other owner: only its ACM read", fab_log.size() == 1 && fab_log[0].src_stu);
    fab_log.delete(); rsp_log.delete();
    send(1, OP_WRITE, 64'h0_4000_2000, pattern(1), at); settle();
    check("read-only write dropped", rsp_log.size() == 0 && u_fam.peek(64'h0_4000_2000) == pattern(64'h0_4000_2000));
    send(1, OP_EXEC, 64'h0_4000_2000, '0, at); settle();
    check("no-exec fetch refused", rsp_log.size() == 1 && rsp_log[0].kind == RSP_FAULT_FAM);
    rsp_log.delete();
    send(1, OP_EXEC, 64'h0_4000_3000, '0, at); settle();
    check("exec allowed", rsp_log.size() == 1 && rsp_log[0].kind == RSP_MEM);
    check("deny count", n_deny == 3);
    fab_log.delete(); rsp_log.delete();

    // ---- shared pages
    send(1, OP_READ, 64'h0_4000_4000, '0, at); settle();
    nf = 0; foreach (fab_log[i]) nf += fab_log[i].src_stu && fab_log[i].addr == BM + 8192 + (ME / 512) * 64;
    check("bitmap row read", nf == 1);
    check("shared with bit: data", rsp_log.size() == 1 && rsp_log[0].kind == RSP_MEM);
    rsp_log.delete();
    send(1, OP_READ, 64'h0_8000_5000, '0, at); settle();
    check("shared without bit: fault", rsp_log.size() == 1 && rsp_log[0].kind == RSP_FAULT_FAM);
    check("shared count", n_shared == 2);
    fab_log.delete(); rsp_log.delete();

    // ---- not mapped: walk
    send(0, OP_READ, {52'h123456, 12'h0c0}, '0, at); settle();
    nr = 0; foreach (fab_log[i]) nr += fab_log[i].src_stu && fab_log[i].addr >= ROOT && fab_log[i].addr < ROOT + 64'h10_0000;
    check("four page-table reads", nr == 4 && n_walk == 1 && n_walk_acc == 4);
    check("map then data", rsp_log.size() == 2 && rsp_log[0].kind == RSP_MAP && rsp_log[0].map_pn == 52'h40000 &&
                           rsp_log[0].addr == {52'h123456, 12'h0c0} && rsp_log[1].kind == RSP_MEM &&
                           rsp_log[1].addr == 64'h0_4000_00c0);
    rsp_log.delete();
    send(0, OP_READ, {52'h654321, 12'h0}, '0, at); settle();
    check("unmapped: fault node", rsp_log.size() == 1 && rsp_log[0].kind == RSP_FAULT_NODE &&
                                  rsp_log[0].addr == {52'h654321, 12'h0});
    rsp_log.delete(); fab_log.delete();

    // ---- DeACT-N: 16 pages of one set
    for (int i = 0; i < 16; i++) set_acm(52'h90007 + 52'(i * 128), ME, PERM_RW);
    for (int i = 0; i < 16; i++) begin send(1, OP_WRITE, {52'h90007 + 52'(i * 128), 12'h0}, '0, at); settle(); end
    fab_log.delete();
    nf = n_hit;
    for (int i = 0; i < 16; i++) begin send(1, OP_WRITE, {52'h90007 + 52'(i * 128), 12'h0}, '0, at); settle(); end
    check("16 pages of a set cached", n_hit - nf == 16 && fab_log.size() == 16);
    // ---- invalidate
    @(negedge clk); inv_valid = 1; inv_pn = 52'h90007; @(negedge clk); inv_valid = 0;
    fab_log.delete();
    send(1, OP_WRITE, {52'h90007, 12'h0}, '0, at); settle();
    check("invalidated: metadata read again", fab_log.size() == 2 && fab_log[0].src_stu);

    // ---- random requests against a reference decision
    begin
      pn_t      fp [48];
      node_id_t own [48];
      perm_e    prm [48];
      pn_t      np [24];
      int       npi [24];
      for (int j = 0; j < 48; j++) begin
        int r;
        // pages in 1 GB region 2 (bit set for this node) and 3 (bit clear)
        fp[j] = (j % 2 ? 52'hC0000 : 52'hA0000) + 52'(j * 613);
        r = $urandom_range(0, 3);
        own[j] = r == 0 ? 14'h3fff : (r == 1 ? 14'd7 : ME);
        prm[j] = perm_e'($urandom_range(0, 3));
        set_acm(fp[j], own[j], prm[j]);
        for (int i = 0; i < 64; i++) u_fam.poke({fp[j], 12'h0} + 64 * i, pattern({fp[j], 12'h0} + 64 * i));
      end
      set_bit(52'hA0000, ME, 1);
      for (int k = 0; k < 24; k++) begin
        np[k]  = 52'h200000 + 52'(k * 777);
        npi[k] = (k % 3 == 2) ? -1 : $urandom_range(0, 47);
        if (npi[k] >= 0) map(np[k], fp[npi[k]]);
      end
      for (int t = 0; t < 400; t++) begin
        bit    v, mapped, ok;
        int    j, k, ln;
        op_e   op;
        line_t d, old_w;
        addr_t fa, na;
        v  = $urandom_range(0, 1);
        j  = $urandom_range(0, 47);
        k  = $urandom_range(0, 23);
        op = op_e'($urandom_range(0, 2));
        ln = $urandom_range(0, 63);
        for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom();
        if (!v) j = npi[k];
        mapped = v || j >= 0;
        fa = '0; ok = 0; old_w = '0;
        if (mapped) begin
          fa = {fp[j], 12'h0} + 64 * ln;
          ok = perm_allows(prm[j], op) && (own[j] == 14'h3fff ? (j % 2 == 0) : own[j] == ME);
          old_w = u_fam.peek(fa);
        end
        na = {np[k], 12'h0} + 64 * ln;
        rsp_log.delete();
        send(v, op, v ? fa : na, d, at);
        repeat (80) @(posedge clk);
        nr = 0;
        if (!v) begin
          if (mapped) begin
            check("rnd: mapping response", rsp_log.size() > 0 && rsp_log[0].kind == RSP_MAP &&
                                            rsp_log[0].addr == na && rsp_log[0].map_pn == fp[j]);
            nr = 1;
          end else if (op == OP_WRITE) begin
            check("rnd: unmapped write silent", rsp_log.size() == 0);
          end else begin
            check("rnd: unmapped fault", rsp_log.size() == 1 && rsp_log[0].kind == RSP_FAULT_NODE &&
                                         rsp_log[0].addr == na);
          end
        end
        if (mapped) begin
          if (op == OP_WRITE) begin
            check("rnd: no response to a write", rsp_log.size() == nr);
            check("rnd: write effect", u_fam.peek(fa) == (ok ? d : old_w));
          end else begin
            check("rnd: one response", rsp_log.size() == nr + 1);
            if (rsp_log.size() == nr + 1) begin
              check("rnd: response kind", rsp_log[nr].kind == (ok ? RSP_MEM : RSP_FAULT_FAM));
              check("rnd: response address", rsp_log[nr].addr == fa);
              if (ok) check("rnd: data", rsp_log[nr].rdata == u_fam.peek(fa));
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
