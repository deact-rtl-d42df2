// ftc_tag_match: parallel tag match of one FAM translation cache line.
//
// A 64-byte line fetched from the node's local DRAM holds four translation
// entries of 104 bits, entry i at bits [104*i +: 104], laid out as
// {node page (tag, 52 b), FAM page (value, 52 b)}; bits 511:416 are unused.
// Following the paper, four comparators check the requested node page against
// the four tags at once and a multiplexer selects the FAM page of the matching
// entry; when no tag matches the multiplexer's default input, 0, is selected.
// A fifth comparator tests the multiplexer output against 0: a non-zero result
// sets the 'V' (verified-mapping) flag that goes to the STU with the request.
// FAM page 0 is therefore never a valid mapping; this design keeps the ACM and
// bitmap region at the bottom of FAM, so page 0 is never handed to a node.
// If more than one tag matches (not possible when updates go through
// ftc_line_update) the lowest entry wins - this priority is our choice.
// Purely combinational: the paper's match takes one cycle, the caller
// registers the result.
module ftc_tag_match
  import deact_pkg::*;
(
  input  pn_t                 npn,       // node page number being translated
  input  line_t               line,      // translation line read from DRAM
  output pn_t                 fam_pn,    // multiplexer output (0 on a miss)
  output logic [FTC_WAYS-1:0] match,     // comparator outputs
  output logic                v          // mapping found
);

  always_comb begin
    fam_pn = '0;
    for (int i = FTC_WAYS - 1; i >= 0; i--) begin
      match[i] = line[FTC_ENTRY_W*i + PN_W +: PN_W] == npn;
      if (match[i]) fam_pn = line[FTC_ENTRY_W*i +: PN_W];
    end
  end

  assign v = fam_pn != '0;

endmodule
