// tb_fam_ptw: builds 4-level FAM page tables in the FAM model and walks them.
// Checks: a mapped page returns its FAM page; the 64-byte reads issued are
// exactly those expected from a reference model of the 32-entry page-walk
// cache (four reads on a cold walk, fewer when upper levels are cached,
// round-robin eviction past 32 tables, none kept after a flush); a missing
// entry at any level, a final FAM page of 0 and a node page with bits above
// 35 set all fault (the last without any read); a level-2 entry with bit 7
// set ends the walk as a 1 GB page (FAM page = 1 GB base + node page bits
// 17:0, three reads, ev_large, not kept in the page-walk cache); the walk time equals
// reads x (fabric latency + 1) + 1 cycles with the model's latency.
module tb_fam_ptw;
  import deact_pkg::*;

  localparam int LAT = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  addr_t cfg_root = 64'h0010_0000;
  logic  flush = 0, ev_pwc_hit, ev_large;
  logic  start, busy, done, fault, rd_valid, rd_ready, rd_resp_valid, ev_access;
  pn_t   npn, fam_pn;
  addr_t rd_addr;
  line_t rd_resp_data;

  fam_ptw dut (.*);

  logic      f_req_valid, f_req_ready, f_resp_valid;
  fab_req_t  f_req;
  fab_resp_t f_resp;
  assign f_req_valid = rd_valid;
  assign f_req = '{src_stu: 1'b1, we: 1'b0, addr: rd_addr, wdata: '0};
  assign rd_ready = f_req_ready;
  assign rd_resp_valid = f_resp_valid;
  assign rd_resp_data = f_resp.rdata;

  fam_model #(.LATENCY(LAT)) u_fam (.clk, .stall(1'b0), .req_valid(f_req_valid), .req_ready(f_req_ready),
                                    .req(f_req), .resp_valid(f_resp_valid), .resp_ready(1'b1), .resp(f_resp));

  addr_t next_table = 64'h0020_0000;
  addr_t reads [$];
  always @(posedge clk) if (rd_valid && rd_ready) reads.push_back(rd_addr);
  int n_access = 0, n_expected = 0;
  always @(posedge clk) n_access += ev_access;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t npn=%h", what, $time, npn);
    end
  endtask

  // broker side: install a mapping, allocating tables on demand
  function automatic void map(pn_t n, pn_t f);
    addr_t t = cfg_root;
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

  // broker side: map the 1 GB node region holding n to the 1 GB FAM region
  // starting at page f (f aligned to 2^18 pages)
  function automatic void map_large(pn_t n, pn_t f);
    addr_t t = cfg_root;
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

  int n_large = 0;
  always @(posedge clk) n_large += ev_large;

  // reference page-walk cache: {level, prefix, table}, round-robin
  localparam int PWC = 32;
  int  r_lvl [PWC]; pn_t r_pfx [PWC]; addr_t r_tab [PWC]; bit r_v [PWC];
  int  r_ptr = 0;
  int  n_pwc_hits = 0;
  always @(posedge clk) n_pwc_hits += ev_pwc_hit;

  // expected read addresses for a walk of n (stops at the first absent
  // entry), starting at the deepest page-walk cache hit; updates the model
  function automatic void exp_reads(pn_t n, ref addr_t q[$]);
    addr_t t = cfg_root;
    int    top = 3;
    q.delete();
    for (int l = 2; l >= 0; l--)
      for (int e = 0; e < PWC; e++)
        if (r_v[e] && r_lvl[e] == l && r_pfx[e] == (n >> (9 * (l + 1)))) begin
          top = l; t = r_tab[e];
        end
    for (int l = top; l >= 0; l--) begin
      addr_t ea = t + 8 * ((n >> (9 * l)) & 'h1ff);
      logic [63:0] e = u_fam.peek(ea)[64*ea[5:3] +: 64];
      q.push_back({ea[63:6], 6'b0});
      if (!e[0] || (l == 2 && e[7])) break;
      t = {e[63:12], 12'b0};
      if (l > 0) begin
        r_v[r_ptr] = 1; r_lvl[r_ptr] = l - 1; r_pfx[r_ptr] = n >> (9 * l); r_tab[r_ptr] = t;
        r_ptr = (r_ptr + 1) % PWC;
      end
    end
  endfunction

  // exp_n_reads < 0: take the count from the reference model
  task automatic walk(pn_t n, bit exp_fault, pn_t exp_pn, int exp_n_reads);
    int cyc = 0;
    addr_t q[$];
    if (n[51:36] == '0) exp_reads(n, q);
    if (exp_n_reads < 0) exp_n_reads = q.size();
    reads.delete();
    @(negedge clk); start = 1; npn = n;
    @(negedge clk); start = 0;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    check("done", done);
    check("fault", fault == exp_fault);
    if (!exp_fault) check("fam_pn", fam_pn == exp_pn);
    check("read count", reads.size() == exp_n_reads);
    if (exp_n_reads > 0) begin
      check("read addresses", reads == q);
      check("walk time", cyc == exp_n_reads * (LAT + 1) + 1);
      if (cyc != exp_n_reads * (LAT + 1) + 1) $display("walk took %0d, %0d reads", cyc, exp_n_reads);
    end
    n_expected += exp_n_reads;
  endtask

  initial begin
    start = 0; npn = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) map(52'h1_0000 + 52'(i * 37), 52'h400 + 52'(i));
    map(52'h8_1234_5678, 52'h777);        // far away: new upper tables
    map(52'h2_0000, 52'h0);               // maps to reserved page 0
    // first walk reads all four levels, the others reuse cached upper levels
    walk(52'h1_0000, 0, 52'h400, 4);
    for (int i = 1; i < 40; i++) walk(52'h1_0000 + 52'(i * 37), 0, 52'h400 + 52'(i), -1);
    check("page-walk cache hits", n_pwc_hits == 39);
    walk(52'h8_1234_5678, 0, 52'h777, 4);
    walk(52'h2_0000, 1, '0, -1);                  // page 0 is not a mapping
    walk(52'h1_0001, 1, '0, 1);                   // leaf entry absent, level-0 table cached
    walk(52'h7_0000_0000, 1, '0, 1);              // absent at the top level
    walk(52'h10_0000_0000, 1, '0, 0);             // bit 36 set: out of reach
    // 40 level-0 tables: more than the cache holds, round-robin eviction
    for (int i = 0; i < 40; i++) map(52'h40_0000 + 52'(i * 512), 52'h900 + 52'(i));
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < 40; i++) walk(52'h40_0000 + 52'(i * 512), 0, 52'h900 + 52'(i), -1);
    // random walks over everything mapped so far
    for (int t = 0; t < 200; t++) begin
      int i;
      i = $urandom_range(0, 39);
      if ($urandom_range(0, 1)) walk(52'h1_0000 + 52'(i * 37), 0, 52'h400 + 52'(i), -1);
      else walk(52'h40_0000 + 52'(i * 512), 0, 52'h900 + 52'(i), -1);
    end
    // 1 GB pages: one region mapped at FAM region 5, one at region 0
    map_large(52'h300_0000, 52'h14_0000);
    map_large(52'h304_0000, 52'h0);
    begin
      int n0;
      n0 = n_large;
      for (int t = 0; t < 30; t++) begin
        pn_t o;
        o = pn_t'($urandom_range(0, (1 << 18) - 1));
        walk(52'h300_0000 + o, 0, 52'h14_0000 + o, -1);
      end
      walk(52'h304_0000, 1, '0, -1);                 // FAM page 0 inside a 1 GB page
      walk(52'h304_0000 + 52'h3_fffe, 0, 52'h3_fffe, -1);
      walk(52'h1_0000, 0, 52'h400, -1);              // 4 KB pages still walk to level 0
      check("1 GB leaf events", n_large == n0 + 31);
    end
    // flush: the next walk reads all four levels again
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int e = 0; e < PWC; e++) r_v[e] = 0;
    r_ptr = 0;
    walk(52'h1_0000, 0, 52'h400, 4);
    check("access pulses", n_access == n_expected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
