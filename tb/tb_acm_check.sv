// tb_acm_check: checks the STU access rules and metadata addressing against a
// reference written here: ACM block address MT + (X >> 17) * 64 and slot
// (X >> 12) mod 32; bitmap row BM + (X >> 30) * 8192 + (node >> 9) * 64 and
// bit node mod 512; owner match, shared-page bitmap check and the R/W/E
// permission rule (R: any non-zero, W: RW or RWX, X: RWX).
module tb_acm_check;
  import deact_pkg::*;

  int checks = 0, failures = 0;
  addr_t fam_addr, mt, bm, acm_line_addr, bm_line_addr;
  op_e op;
  node_id_t node_id;
  logic [4:0] acm_slot;
  logic [8:0] bm_bit;
  acm_t acm;
  line_t bm_line;
  logic shared, allow_owner, allow_shared;

  acm_check dut (.fam_addr, .op, .node_id, .cfg_mt_base(mt), .cfg_bm_base(bm),
                 .acm_line_addr, .acm_slot, .bm_line_addr, .bm_bit, .acm, .bm_line,
                 .shared, .allow_owner, .allow_shared);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: X=%h op=%0d node=%h acm=%h", what, fam_addr, op, node_id, acm);
    end
  endtask

  initial begin
    int n_allow = 0, n_shared_allow = 0;
    for (int t = 0; t < 4000; t++) begin
      logic perm_ok, own_ok, sh_ok;
      int p, k;
      fam_addr = {$urandom(), $urandom()};
      if (t % 10 != 0) fam_addr[63] = 1'b0;
      mt = {$urandom(), 26'h0};
      bm = {$urandom(), 26'h0};
      op = op_e'($urandom_range(0, 2));
      node_id = 14'($urandom());
      p = $urandom_range(0, 3);
      k = $urandom_range(0, 2);
      unique case (k)
        0: acm = {node_id, 2'(p)};
        1: acm = {14'h3fff, 2'(p)};
        default: acm = {14'($urandom()), 2'(p)};
      endcase
      for (int i = 0; i < 16; i++) bm_line[32*i +: 32] = $urandom();
      #1;
      check("acm addr", acm_line_addr == mt + (fam_addr / (4096*32)) * 64);
      check("acm slot", acm_slot == 5'((fam_addr / 4096) % 32));
      check("bm addr", bm_line_addr == bm + (fam_addr / (64'd1 << 30)) * 8192 + (node_id / 512) * 64);
      check("bm bit", bm_bit == 9'(node_id % 512));
      perm_ok = (op == OP_READ  && p != 0) || (op == OP_WRITE && p >= 2) || (op == OP_EXEC && p == 3);
      own_ok  = acm[15:2] == node_id && acm[15:2] != 14'h3fff;
      sh_ok   = acm[15:2] == 14'h3fff && node_id != 14'h3fff && bm_line[node_id % 512];
      check("shared", shared == (acm[15:2] == 14'h3fff));
      check("allow_owner",  allow_owner  == (!fam_addr[63] && perm_ok && own_ok));
      check("allow_shared", allow_shared == (!fam_addr[63] && perm_ok && sh_ok));
      n_allow        += allow_owner;
      n_shared_allow += allow_shared;
    end
    check("some owner accesses allowed", n_allow > 100);
    check("some shared accesses allowed", n_shared_allow > 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
