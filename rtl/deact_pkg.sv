// deact_pkg: types and constants shared by the DeACT blocks.
//
// DeACT splits the second (system-level) address translation of a
// fabric-attached-memory (FAM) node into two halves: the node memory
// controller caches node-page -> FAM-page mappings in its own DRAM and puts
// the FAM address on the request itself ("unverified" translation), while the
// system translation unit (STU) outside the node only checks the access
// control metadata (ACM) of the FAM page before the request reaches FAM.
//
// Sizes taken from the paper: 4 KB pages, 52-bit node and FAM page numbers,
// 64-byte memory blocks, 104-bit translation entries (four per block), 16-bit
// ACM = 14-bit node ID + 2-bit R/W/E field, node ID all ones = shared page.
// Own choices (the paper does not give them): the 64-bit address width, the
// encoding of the 2-bit permission field, the operation and response
// encodings, and the packet structs below.
package deact_pkg;

  localparam int unsigned ADDR_W      = 64;   // byte address width
  localparam int unsigned PAGE_BITS   = 12;   // 4 KB pages
  localparam int unsigned PN_W        = 52;   // page number width (node and FAM)
  localparam int unsigned LINE_BYTES  = 64;   // memory access granularity
  localparam int unsigned LINE_W      = 512;
  localparam int unsigned FTC_WAYS    = 4;    // mappings per 64-byte line
  localparam int unsigned FTC_ENTRY_W = 2 * PN_W;  // 104 bits: tag + value
  localparam int unsigned ACM_W       = 16;
  localparam int unsigned NODE_ID_W   = 14;
  localparam int unsigned PERM_W      = 2;

  typedef logic [ADDR_W-1:0]    addr_t;
  typedef logic [PN_W-1:0]      pn_t;
  typedef logic [LINE_W-1:0]    line_t;
  typedef logic [ACM_W-1:0]     acm_t;
  typedef logic [NODE_ID_W-1:0] node_id_t;

  // Node ID with every bit set marks a page shared through a bitmap.
  localparam node_id_t SHARED_ID = '1;

  // Memory operation carried by a request. OP_EXEC is an instruction fetch.
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_WRITE = 2'd1,
    OP_EXEC  = 2'd2
  } op_e;

  // 2-bit R/W/E permission field of the ACM (encoding is this design's choice).
  typedef enum logic [1:0] {
    PERM_NONE = 2'd0,
    PERM_R    = 2'd1,
    PERM_RW   = 2'd2,
    PERM_RWX  = 2'd3
  } perm_e;

  // Reads and instruction fetches return data; writes are posted.
  function automatic logic expects_resp(op_e op);
    return op != OP_WRITE;
  endfunction

  function automatic logic perm_allows(perm_e perm, op_e op);
    unique case (op)
      OP_READ:  return perm != PERM_NONE;
      OP_WRITE: return perm == PERM_RW || perm == PERM_RWX;
      OP_EXEC:  return perm == PERM_RWX;
      default:  return 1'b0;
    endcase
  endfunction

  function automatic pn_t page_of(addr_t a);
    return a[ADDR_W-1:PAGE_BITS];
  endfunction

  // LLC -> memory controller request, and the response back.
  typedef struct packed {
    op_e   op;
    addr_t addr;
    line_t wdata;
  } llc_req_t;

  typedef struct packed {
    logic  fault;   // access refused by the STU or no FAM mapping
    addr_t addr;    // node address of the request
    line_t rdata;
  } llc_resp_t;

  // Memory controller (FAM translator) -> STU request. v = 1: addr is a FAM
  // address already translated by the node; v = 0: addr is a node address.
  typedef struct packed {
    logic  v;
    op_e   op;
    addr_t addr;
    line_t wdata;
  } stu_req_t;

  typedef enum logic [1:0] {
    RSP_MEM        = 2'd0,  // data from FAM, addr is the FAM address
    RSP_MAP        = 2'd1,  // mapping response: addr = node address, map_pn = FAM page
    RSP_FAULT_FAM  = 2'd2,  // access refused, addr is the FAM address
    RSP_FAULT_NODE = 2'd3   // no FAM mapping, addr is the node address
  } rsp_kind_e;

  typedef struct packed {
    rsp_kind_e kind;
    addr_t     addr;
    pn_t       map_pn;
    line_t     rdata;
  } stu_resp_t;

  // 64-byte memory port (local DRAM, and FAM behind the fabric).
  typedef struct packed {
    logic  we;
    addr_t addr;
    line_t wdata;
  } mem_req_t;

  // Fabric packets carry one source bit so the STU can tell the responses to
  // its own metadata and page-table reads from data for the node.
  typedef struct packed {
    logic  src_stu;
    logic  we;
    addr_t addr;
    line_t wdata;
  } fab_req_t;

  typedef struct packed {
    logic  src_stu;
    addr_t addr;
    line_t rdata;
  } fab_resp_t;

endpackage
