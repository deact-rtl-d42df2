// tb_ftc_tag_match: checks the four-way parallel tag match against a
// reference search written here: a hit returns the FAM page of the matching
// entry and V = 1; a miss (or a match on an entry whose value is 0) returns 0
// and V = 0; the comparator outputs are checked one by one.
module tb_ftc_tag_match;
  import deact_pkg::*;

  int checks = 0, failures = 0;
  pn_t   npn, fam_pn;
  line_t line;
  logic [FTC_WAYS-1:0] match;
  logic  v;

  ftc_tag_match dut (.npn, .line, .fam_pn, .match, .v);

  function automatic pn_t rnd_pn();
    return {$urandom(), $urandom()} & {PN_W{1'b1}};
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: npn=%h fam_pn=%h v=%b match=%b", what, npn, fam_pn, v, match);
    end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      pn_t tags[4], vals[4];
      int  hitway;
      pn_t exp_pn;
      npn = rnd_pn();
      line = '0;
      for (int i = 0; i < 4; i++) begin
        tags[i] = rnd_pn();
        vals[i] = rnd_pn();
        if (t % 7 == 0 && i == 2) vals[i] = '0;   // empty value
      end
      hitway = $urandom_range(0, 4);              // 4 = miss
      if (hitway < 4) tags[hitway] = npn;
      // near misses: tags differing from the looked-up page in one bit
      if (t % 3 == 1)
        for (int i = 0; i < 4; i++) if (i != hitway) tags[i] = npn ^ (pn_t'(1) << $urandom_range(0, PN_W - 1));
      for (int i = 0; i < 4; i++) line[104*i +: 104] = {tags[i], vals[i]};
      line[511:416] = {$urandom(), $urandom(), $urandom()};
      #1;
      exp_pn = '0;
      for (int i = 3; i >= 0; i--) if (tags[i] == npn) exp_pn = vals[i];
      check("fam_pn", fam_pn == exp_pn);
      check("v", v == (exp_pn != '0));
      for (int i = 0; i < 4; i++) check("match", match[i] == (tags[i] == npn));
    end
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
