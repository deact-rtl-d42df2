// tb_acm_cache: checks the DeACT-N ACM cache. First it shows the doubled
// capacity: 16 pages mapping to one set (8 ways x 2 sub-ways) all hit after
// being filled, and a 17th evicts exactly one of them. Then random fills,
// lookups and invalidations run against a reference that records, for every
// page, the ACM last filled: a hit must return that ACM, a page never filled
// or invalidated since its last fill must miss, and each set never holds more
// than 16 pages. The lookup result is checked one cycle after the request.
module tb_acm_cache;
  import deact_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lk_valid, lk_done, lk_hit, fill_valid, inv_valid;
  pn_t  lk_pn, fill_pn, inv_pn;
  acm_t lk_acm, fill_acm;

  acm_cache dut (.*);

  acm_t  ref_acm [pn_t];     // pages the reference believes may be cached

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t pn=%h", what, $time, lk_pn);
    end
  endtask

  task automatic fill(pn_t p, acm_t a);
    fill_valid = 1; fill_pn = p; fill_acm = a;
    @(posedge clk); #1; fill_valid = 0;
    ref_acm[p] = a;
  endtask

  task automatic inval(pn_t p);
    inv_valid = 1; inv_pn = p;
    @(posedge clk); #1; inv_valid = 0;
    if (ref_acm.exists(p)) ref_acm.delete(p);
  endtask

  // returns hit
  task automatic lookup(pn_t p, output logic hit);
    lk_valid = 1; lk_pn = p;
    @(posedge clk); #1; lk_valid = 0;
    check("lk_done", lk_done == 1);
    hit = lk_hit;
    if (lk_hit) check("hit returns filled ACM", ref_acm.exists(p) && lk_acm == ref_acm[p]);
    else if (ref_acm.exists(p)) ref_acm.delete(p);   // evicted
    @(posedge clk); #1;
    check("lk_done one cycle", lk_done == 0);
  endtask

  function automatic pn_t pg(int set, int tag);
    return (52'(tag) << 7) | 52'(set);
  endfunction

  initial begin
    logic h;
    int hits;
    lk_valid = 0; fill_valid = 0; inv_valid = 0; lk_pn = '0; fill_pn = '0; inv_pn = '0; fill_acm = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    // empty cache misses
    lookup(pg(5, 1), h); check("cold miss", h == 0);
    // 16 pages of set 5 fit
    for (int t = 0; t < 16; t++) fill(pg(5, 1000 + t), 16'(t * 3 + 1));
    hits = 0;
    for (int t = 0; t < 16; t++) begin lookup(pg(5, 1000 + t), h); hits += h; end
    check("16 sub-ways per set", hits == 16);
    fill(pg(5, 2000), 16'hBEEF);
    hits = 0;
    for (int t = 0; t < 16; t++) begin lookup(pg(5, 1000 + t), h); hits += h; end
    lookup(pg(5, 2000), h);
    check("17th page hits", h == 1);
    check("17th page evicts exactly one", hits == 15);
    // refill of a present page overwrites it
    fill(pg(5, 2000), 16'h1234);
    lookup(pg(5, 2000), h); check("overwrite", h == 1);
    // invalidate
    inval(pg(5, 2000));
    lookup(pg(5, 2000), h); check("invalidated misses", h == 0);
    // random traffic over few sets so that evictions happen
    for (int t = 0; t < 4000; t++) begin
      pn_t p;
      int  r;
      p = pg($urandom_range(0, 3), $urandom_range(0, 40));
      r = $urandom_range(0, 9);
      if (r < 4) fill(p, 16'($urandom()));
      else if (r < 5) inval(p);
      else begin
        lookup(p, h);
        if (!ref_acm.exists(p)) check("unknown page misses", h == 0);
      end
    end
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
