// ftc_line_update: merge of one new mapping into a FAM translation cache line.
//
// The FAM translation cache lives in local DRAM and is accessed 64 bytes at a
// time, so installing a mapping is a read-modify-write of the whole line: the
// caller reads the line, this block replaces one of its four 104-bit entries,
// and the caller writes the result back. As in the paper the victim entry is
// chosen at random (the two 'rnd' bits from an LFSR) when the line is full.
// Two refinements of our own: an entry that already holds the same node page
// is overwritten, so a page never appears twice in a line (two misses to one
// page, or a re-mapped page, would otherwise leave a duplicate); otherwise the
// lowest empty entry (FAM page 0, see ftc_tag_match) is used before any
// valid mapping is evicted. Combinational.
module ftc_line_update
  import deact_pkg::*;
(
  input  line_t       line_in,
  input  pn_t         npn,       // tag of the new entry
  input  pn_t         fam_pn,    // value of the new entry
  input  logic [1:0]  rnd,       // random victim
  output line_t       line_out,
  output logic [1:0]  way        // entry written
);

  logic       same_found, empty_found;
  logic [1:0] same_way, empty_way;

  always_comb begin
    same_found  = 1'b0;
    same_way    = '0;
    empty_found = 1'b0;
    empty_way   = '0;
    for (int i = FTC_WAYS - 1; i >= 0; i--) begin
      if (line_in[FTC_ENTRY_W*i + PN_W +: PN_W] == npn) begin
        same_found = 1'b1;
        same_way   = 2'(i);
      end
      if (line_in[FTC_ENTRY_W*i +: PN_W] == '0) begin
        empty_found = 1'b1;
        empty_way   = 2'(i);
      end
    end
    way      = same_found ? same_way : (empty_found ? empty_way : rnd);
    line_out = line_in;
    line_out[FTC_ENTRY_W*way +: FTC_ENTRY_W] = {npn, fam_pn};
  end

endmodule
