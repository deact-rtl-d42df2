// fam_model: behavioural model of the fabric plus a fabric-attached memory
// module (testbench only; the paper uses an off-the-shelf fabric and NVM).
// A sparse memory of 64-byte lines (unwritten lines read as zero). Requests
// are accepted when 'stall' is low and take effect in arrival order: a write
// updates memory on acceptance and gets no response, a read samples memory on
// acceptance and returns, with the request's src_stu bit and address, at least
// LATENCY cycles later, in order, held until resp_ready.
module fam_model
  import deact_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic      clk,
  input  logic      stall,
  input  logic      req_valid,
  output logic      req_ready,
  input  fab_req_t  req,
  output logic      resp_valid,
  input  logic      resp_ready,
  output fab_resp_t resp
);

  line_t mem [addr_t];
  int unsigned stu_reads = 0, node_reads = 0, node_writes = 0;

  typedef struct { int unsigned due; fab_resp_t r; } pend_t;
  pend_t       pend [$];
  int unsigned cycle = 0;

  assign req_ready = !stall;

  function automatic line_t peek(addr_t a);
    addr_t la = {a[ADDR_W-1:6], 6'b0};
    return mem.exists(la) ? mem[la] : '0;
  endfunction

  function automatic void poke(addr_t a, line_t d);
    mem[{a[ADDR_W-1:6], 6'b0}] = d;
  endfunction

  // write one 64-bit word at a byte address (8-byte aligned)
  function automatic void poke64(addr_t a, logic [63:0] w);
    line_t l = peek(a);
    l[64*a[5:3] +: 64] = w;
    poke(a, l);
  endfunction

  // write one 16-bit field at a byte address (2-byte aligned)
  function automatic void poke16(addr_t a, logic [15:0] w);
    line_t l = peek(a);
    l[16*a[5:1] +: 16] = w;
    poke(a, l);
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (req_valid && req_ready) begin
      if (req.we) begin
        poke(req.addr, req.wdata);
        node_writes <= node_writes + 1;
      end else begin
        pend.push_back('{due: cycle + LATENCY,
                         r: '{src_stu: req.src_stu, addr: req.addr, rdata: peek(req.addr)}});
        if (req.src_stu) stu_reads <= stu_reads + 1;
        else             node_reads <= node_reads + 1;
      end
    end
  end

  always_comb begin
    resp_valid = pend.size() > 0 && pend[0].due <= cycle;
    resp       = resp_valid ? pend[0].r : '0;
  end

  always @(posedge clk) begin
    if (resp_valid && resp_ready) void'(pend.pop_front());
  end

endmodule
