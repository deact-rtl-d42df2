// dram_model: behavioural model of the node's local DRAM (testbench only).
// Not synthesizable logic of the design: a sparse memory of 64-byte lines
// (unwritten lines read as zero) behind the memory controller's DRAM port.
// Requests are accepted when 'stall' is low; a read returns its line exactly
// LATENCY cycles after acceptance, in order. Writes complete on acceptance.
module dram_model
  import deact_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic     clk,
  input  logic     stall,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     resp_valid,
  output line_t    resp_data
);

  line_t mem [addr_t];
  int unsigned reads = 0, writes = 0;

  typedef struct { int unsigned due; line_t data; } pend_t;
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

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (req_valid && req_ready) begin
      if (req.we) begin
        poke(req.addr, req.wdata);
        writes <= writes + 1;
      end else begin
        pend.push_back('{due: cycle + LATENCY, data: peek(req.addr)});
        reads <= reads + 1;
      end
    end
  end

  always_comb begin
    resp_valid = pend.size() > 0 && pend[0].due <= cycle;
    resp_data  = resp_valid ? pend[0].data : '0;
  end

  always @(posedge clk) begin
    if (resp_valid) void'(pend.pop_front());
  end

endmodule
