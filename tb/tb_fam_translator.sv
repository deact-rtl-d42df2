// tb_fam_translator: the FAM translator with a DRAM model; the testbench plays
// the STU. Checks, each against values computed here:
//  - local-zone reads and writes go to DRAM unchanged and never to the STU;
//  - an FTC hit sends V = 1 with the FAM address, 5 cycles after acceptance
//    with a 1-cycle DRAM; its FAM response returns to the LLC with the node
//    address; a write hit is sent and gets no list entry;
//  - an FTC miss sends V = 0 with the node address; the mapping response is
//    written into the right DRAM line (read-modify-write, other entries kept)
//    and the data response is translated back; the next access hits;
//  - five pages of one set fill the four empty entries, then the fifth
//    replaces one at random: four of the five stay, the last among them;
//  - refused accesses (both fault kinds) come back to the LLC as faults;
//  - with 128 reads outstanding the 129th waits until a response frees a slot;
//  - an invalidation clears exactly the page's entry in its DRAM line and the
//    next access to that page misses.
module tb_fam_translator;
  import deact_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam addr_t FAM_BASE = 64'h4000_0000;
  localparam addr_t FTC_BASE = 64'h3FF0_0000;

  logic llc_req_valid, llc_req_ready, llc_resp_valid, llc_resp_ready;
  llc_req_t llc_req; llc_resp_t llc_resp;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  mem_req_t dram_req; line_t dram_resp_data;
  logic stu_req_valid, stu_req_ready, stu_resp_valid, stu_resp_ready;
  stu_req_t stu_req; stu_resp_t stu_resp;
  logic ev_ftc_hit, ev_ftc_miss, ev_ftc_update, ev_ftc_inv;
  logic ftc_inv_valid = 1'b0, ftc_inv_ready;
  pn_t  ftc_inv_npn = '0;

  fam_translator dut (.clk, .rst_n, .cfg_fam_base(FAM_BASE), .cfg_ftc_base(FTC_BASE), .*);
  dram_model #(.LATENCY(1)) u_dram (.clk, .stall(1'b0), .req_valid(dram_req_valid), .req_ready(dram_req_ready),
                                    .req(dram_req), .resp_valid(dram_resp_valid), .resp_data(dram_resp_data));

  int n_stu_reqs = 0, n_hit = 0, n_miss = 0, n_upd = 0, n_inv = 0;
  always @(posedge clk) begin
    n_stu_reqs <= n_stu_reqs + (stu_req_valid && stu_req_ready);
    n_hit <= n_hit + ev_ftc_hit; n_miss <= n_miss + ev_ftc_miss; n_upd <= n_upd + ev_ftc_update; n_inv <= n_inv + ev_ftc_inv;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic addr_t ftc_addr(pn_t npn);
    return FTC_BASE + 64 * (npn % 16384);
  endfunction

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int i = 0; i < 8; i++) l[64*i +: 64] = a ^ (64'h1111_0000_0000 * (i + 1));
    return l;
  endfunction

  // LLC side
  task automatic llc_send(op_e op, addr_t a, line_t d, output int accept_cycle);
    @(negedge clk);
    llc_req_valid = 1; llc_req = '{op: op, addr: a, wdata: d};
    do @(posedge clk); while (!llc_req_ready);
    accept_cycle = cyc;
    #1 llc_req_valid = 0;
  endtask

  task automatic llc_get(output llc_resp_t r);
    int n = 0;
    llc_resp_ready = 1;
    do begin @(posedge clk); n++; end while (!llc_resp_valid && n < 2000);
    r = llc_resp;
    check("llc response arrives", llc_resp_valid);
    #1 llc_resp_ready = 0;
  endtask

  // STU side
  task automatic stu_get(output stu_req_t r, output int at_cycle);
    int n = 0;
    stu_req_ready = 1;
    do begin @(posedge clk); n++; end while (!stu_req_valid && n < 2000);
    r = stu_req; at_cycle = cyc;
    check("stu request arrives", stu_req_valid);
    #1 stu_req_ready = 0;
  endtask

  task automatic stu_put(rsp_kind_e k, addr_t a, pn_t map, line_t d);
    @(negedge clk);
    stu_resp_valid = 1; stu_resp = '{kind: k, addr: a, map_pn: map, rdata: d};
    do @(posedge clk); while (!stu_resp_ready);
    #1 stu_resp_valid = 0;
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic wait_idle(int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    int ac, sc;
    stu_req_t  s;
    llc_resp_t r;
    line_t l;
    addr_t A, B, C, F;
    pn_t   npn;

    llc_req_valid = 0; llc_req = '0; llc_resp_ready = 0; stu_req_ready = 0; stu_resp_valid = 0; stu_resp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- local zone
    u_dram.poke(64'h1000, pattern(64'h1000));
    llc_send(OP_READ, 64'h1010, '0, ac);
    llc_get(r);
    check("local read data", r.rdata == pattern(64'h1000) && !r.fault && r.addr == 64'h1010);
    llc_send(OP_WRITE, 64'h2000, pattern(64'h2), ac);
    wait_idle(5);
    check("local write", u_dram.peek(64'h2000) == pattern(64'h2));
    check("local never reaches STU", n_stu_reqs == 0);

    // ---- FTC hit
    A = 64'h5_0000_1040; npn = page_of(A);
    l = '0; l[104*2 +: 104] = {npn, 52'h777};
    u_dram.poke(ftc_addr(npn), l);
    llc_send(OP_READ, A, '0, ac);
    stu_get(s, sc);
    check("hit: V=1", s.v == 1);
    check("hit: FAM address", s.addr == {52'h777, 12'h040});
    check("hit: latency 5 cycles", sc - ac == 5);
    if (sc - ac != 5) $display("hit latency %0d", sc - ac);
    stu_put(RSP_MEM, {52'h777, 12'h040}, '0, pattern(A));
    llc_get(r);
    check("hit: response node address", r.addr == A && !r.fault && r.rdata == pattern(A));
    check("hit counted", n_hit == 1);

    // write hit: no list entry
    llc_send(OP_WRITE, A, pattern(64'h99), ac);
    stu_get(s, sc);
    check("write hit", s.v == 1 && s.op == OP_WRITE && s.addr == {52'h777, 12'h040} && s.wdata == pattern(64'h99));
    check("write leaves no entry", dut.u_oml.count == 0);

    // ---- FTC miss
    B = 64'h6_1234_5080; npn = page_of(B);
    l = '0; l[104*0 +: 104] = {52'h1, 52'h2}; l[104*1 +: 104] = {52'h3, 52'h4};
    l[104*2 +: 104] = {52'h5, 52'h6}; l[104*3 +: 104] = {52'h7, 52'h8};
    u_dram.poke(ftc_addr(npn), l);
    llc_send(OP_READ, B, '0, ac);
    stu_get(s, sc);
    check("miss: V=0 node address", s.v == 0 && s.addr == B);
    check("miss counted", n_miss == 1);
    check("miss: pending entry", dut.u_oml.count == 1);
    stu_put(RSP_MAP, B, 52'h888, '0);
    wait_idle(8);
    begin
      automatic line_t nl = u_dram.peek(ftc_addr(npn));
      automatic int found = -1, kept = 0;
      for (int i = 0; i < 4; i++) begin
        if (nl[104*i +: 104] == {npn, 52'h888}) found = i;
        else if (nl[104*i +: 104] == l[104*i +: 104]) kept++;
      end
      check("update: new entry in line", found >= 0);
      check("update: other three entries kept", kept == 3);
    end
    check("update counted", n_upd == 1);
    stu_put(RSP_MEM, {52'h888, 12'h080}, '0, pattern(B));
    llc_get(r);
    check("miss: response translated", r.addr == B && !r.fault && r.rdata == pattern(B));
    llc_send(OP_EXEC, B, '0, ac);
    stu_get(s, sc);
    check("after update: hit", s.v == 1 && s.addr == {52'h888, 12'h080} && s.op == OP_EXEC);
    stu_put(RSP_FAULT_FAM, {52'h888, 12'h080}, '0, '0);
    llc_get(r);
    check("refused hit: fault to LLC", r.fault && r.addr == B);

    // ---- walk fault
    C = 64'h7_0000_0000;
    llc_send(OP_READ, C, '0, ac);
    stu_get(s, sc);
    check("miss to unmapped page", s.v == 0);
    stu_put(RSP_FAULT_NODE, C, '0, '0);
    llc_get(r);
    check("unmapped: fault to LLC", r.fault && r.addr == C);
    check("list empty again", dut.u_oml.count == 0);

    // ---- random replacement: five pages of one set
    for (int i = 0; i < 5; i++) begin
      automatic addr_t D = {52'h9_0000 + 52'(i * 16384), 12'h0};
      llc_send(OP_WRITE, D, '0, ac);
      stu_get(s, sc);
      check("set fill: miss", s.v == 0);
      stu_put(RSP_MAP, D, 52'h1000 + 52'(i), '0);
      wait_idle(8);
    end
    begin
      automatic line_t nl = u_dram.peek(ftc_addr(52'h9_0000));
      automatic int present = 0;
      for (int i = 0; i < 5; i++)
        for (int w = 0; w < 4; w++)
          if (nl[104*w +: 104] == {52'h9_0000 + 52'(i * 16384), 52'h1000 + 52'(i)}) present++;
      check("set holds four of five", present == 4);
      check("last page present", nl[0 +: 104] == {52'h9_0000 + 52'(4 * 16384), 52'h1004} ||
                                 nl[104 +: 104] == {52'h9_0000 + 52'(4 * 16384), 52'h1004} ||
                                 nl[208 +: 104] == {52'h9_0000 + 52'(4 * 16384), 52'h1004} ||
                                 nl[312 +: 104] == {52'h9_0000 + 52'(4 * 16384), 52'h1004});
    end

    // ---- outstanding mapping list full
    for (int i = 0; i < 128; i++) begin
      llc_send(OP_READ, A + 64 * (i % 64), '0, ac);
      stu_get(s, sc);
    end
    check("128 outstanding", dut.u_oml.count == 128);
    llc_send(OP_READ, A, '0, ac);
    stu_req_ready = 1;
    repeat (30) @(posedge clk);
    check("129th waits", !stu_req_valid && n_stu_reqs == 128 + 10);
    stu_req_ready = 0;
    stu_put(RSP_MEM, {52'h777, 12'h040}, '0, pattern(A));
    llc_get(r);
    check("response frees a slot", r.addr == A && !r.fault);
    stu_get(s, sc);
    check("129th proceeds", s.v == 1);

    // ---- invalidation (page migration)
    begin
      automatic line_t old_line = u_dram.peek(ftc_addr(page_of(B)));
      automatic line_t new_line;
      automatic int upd0 = n_upd, cleared = 0, same = 0;
      @(negedge clk); ftc_inv_valid = 1; ftc_inv_npn = page_of(B);
      do @(posedge clk); while (!ftc_inv_ready);
      #1 ftc_inv_valid = 0;
      wait_idle(8);
      new_line = u_dram.peek(ftc_addr(page_of(B)));
      for (int w = 0; w < 4; w++)
        if (old_line[104*w + 52 +: 52] == page_of(B)) cleared += new_line[104*w +: 104] == '0;
        else same += new_line[104*w +: 104] == old_line[104*w +: 104];
      check("invalidation clears the entry", cleared == 1);
      check("invalidation keeps the others", same == 3);
      check("invalidation counted", n_inv == 1 && n_upd == upd0);
      llc_send(OP_WRITE, B, pattern(64'h5), ac);
      stu_get(s, sc);
      check("after invalidation: miss", s.v == 0 && s.addr == B);
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
