// tb_ftc_line_update: checks the read-modify-write merge of a mapping into a
// translation line: an entry already holding the node page is replaced, else
// the lowest empty entry (value 0), else the entry chosen by the random
// input; the new entry reads
// {node page, FAM page}, and every other bit of the line is unchanged.
module tb_ftc_line_update;
  import deact_pkg::*;

  int checks = 0, failures = 0;
  line_t line_in, line_out;
  pn_t   npn, fam_pn;
  logic [1:0] rnd, way;

  ftc_line_update dut (.line_in, .npn, .fam_pn, .rnd, .line_out, .way);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: rnd=%0d way=%0d", what, rnd, way);
    end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int    present, exp_way, empty;
      line_t exp;
      for (int i = 0; i < 16; i++) line_in[32*i +: 32] = $urandom();
      npn    = {$urandom(), $urandom()};
      fam_pn = {$urandom(), $urandom()};
      rnd    = 2'($urandom());
      present = $urandom_range(0, 5);             // 0..3: page already in entry
      if (present < 4) line_in[104*present + 52 +: 52] = npn;
      empty = -1;
      if ($urandom_range(0, 2) == 0) begin
        int e;
        e = $urandom_range(0, 3);
        line_in[104*e +: 52] = '0;
        if (line_in[104*e + 52 +: 52] != npn && e != present) line_in[104*e + 52 +: 52] = '0;
        if ($urandom_range(0, 1) == 0 && e < 3 && e + 1 != present) line_in[104*(e+1) +: 52] = '0;
      end
      for (int i = 3; i >= 0; i--) if (line_in[104*i +: 52] == '0) empty = i;
      #1;
      exp_way = (present < 4) ? present : (empty >= 0 ? empty : rnd);
      exp = line_in;
      exp[104*exp_way +: 104] = {npn, fam_pn};
      check("way", way == 2'(exp_way));
      check("line", line_out == exp);
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
