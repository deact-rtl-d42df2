// tb_outstanding_mapping_list: drives the list against a reference model kept
// here (an array of {valid, filled, node page, FAM page}). Checks: 128 entries
// can be held and the 129th is refused (alloc_ready low); lookup by FAM page
// finds only filled entries and returns their node page; a fill completes
// every pending entry of its node page; lookup by node page finds only pending
// entries; a freed entry can no longer be found; the count follows.
module tb_outstanding_mapping_list;
  import deact_pkg::*;

  localparam int N = 128;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic alloc_valid, alloc_ready, alloc_filled, fill_valid, lkp_valid, lkp_by_node, lkp_free, lkp_hit;
  pn_t  alloc_npn, alloc_fam_pn, fill_npn, fill_fam_pn, lkp_key, lkp_npn;
  logic [$clog2(N+1)-1:0] count;

  outstanding_mapping_list dut (.*);   // default size: N = 128 entries

  // reference
  typedef struct { bit valid, filled; pn_t npn, fam; } ent_t;
  ent_t ref_e [N];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic idle();
    alloc_valid = 0; fill_valid = 0; lkp_valid = 0; lkp_free = 0; lkp_by_node = 0;
  endtask

  task automatic do_alloc(pn_t n, pn_t f, bit filled);
    int k = -1;
    for (int i = N - 1; i >= 0; i--) if (!ref_e[i].valid) k = i;
    check("alloc_ready", alloc_ready == (k >= 0));
    if (k >= 0 && alloc_ready) begin   // never allocate into a full list
      alloc_valid = 1; alloc_npn = n; alloc_fam_pn = f; alloc_filled = filled;
      ref_e[k] = '{1, filled, n, f};
      @(posedge clk); #1; idle();
    end
  endtask

  task automatic do_fill(pn_t n, pn_t f);
    fill_valid = 1; fill_npn = n; fill_fam_pn = f;
    for (int i = 0; i < N; i++)
      if (ref_e[i].valid && !ref_e[i].filled && ref_e[i].npn == n) begin
        ref_e[i].filled = 1; ref_e[i].fam = f;
      end
    @(posedge clk); #1; idle();
  endtask

  // look up, compare with the reference, optionally free
  task automatic do_lookup(pn_t key, bit by_node, bit free_it);
    int k = -1;
    for (int i = N - 1; i >= 0; i--)
      if (ref_e[i].valid && (by_node ? (!ref_e[i].filled && ref_e[i].npn == key)
                                     : (ref_e[i].filled && ref_e[i].fam == key))) k = i;
    lkp_valid = 1; lkp_key = key; lkp_by_node = by_node; lkp_free = free_it;
    #1;
    check("lkp_hit", lkp_hit == (k >= 0));
    if (k >= 0) check("lkp_npn", lkp_npn == ref_e[k].npn);
    if (k >= 0 && free_it) ref_e[k].valid = 0;
    @(posedge clk); #1; idle();
  endtask

  function automatic int ref_count();
    int c = 0;
    foreach (ref_e[i]) c += ref_e[i].valid;
    return c;
  endfunction

  initial begin
    idle();
    foreach (ref_e[i]) ref_e[i] = '{0, 0, '0, '0};
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    // fill the list: pages 100+i mapped to FAM 5000+i, every 4th pending
    for (int i = 0; i < N; i++) do_alloc(52'(100 + i), 52'(5000 + i), (i % 4) != 0);
    check("count full", count == N);
    check("full refuses", alloc_ready == 0);
    // pending entries are not visible by FAM page
    do_lookup(52'(5000 + 4), 0, 0);
    // lookup by node finds pending entries only
    do_lookup(52'(100 + 8), 1, 0);
    do_lookup(52'(100 + 9), 1, 0);
    // complete the pending ones with new FAM pages
    for (int i = 0; i < N; i += 4) do_fill(52'(100 + i), 52'(9000 + i));
    do_lookup(52'(9000 + 8), 0, 0);
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      int r;
      r = $urandom_range(0, 9);
      if (r < 3) do_alloc(52'($urandom_range(100, 140)), 52'($urandom_range(5000, 5040)), $urandom_range(0, 1));
      else if (r < 4) do_fill(52'($urandom_range(100, 140)), 52'($urandom_range(5000, 5040)));
      else if (r < 7) do_lookup(52'($urandom_range(5000, 5040)), 0, 1);
      else if (r < 9) do_lookup(52'($urandom_range(100, 140)), 1, $urandom_range(0, 1));
      else do_lookup(52'($urandom_range(9000, 9130)), 0, 1);
      check("count", count == ref_count());
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
