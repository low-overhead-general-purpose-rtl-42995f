// m2ndp_pkg: types and constants shared by the memory-mapped NDP (M2NDP) blocks.
//
// The on-chip memory system moves 32-byte flits (the crossbar flit size and the
// DRAM sector size of LPDDR5). A request carries one 32-byte sector with a byte
// mask; an atomic add carries its 64-bit addend in the lane of the sector the
// address selects and returns the old sector. Host-side CXL.mem packets carry a
// 64-byte cache line. Request ids carry the source so that responses can be
// routed back: id[15:10] = source port, id[9:0] = tag local to that source.
// Field layouts, id split and the function offsets' decoding are this design's
// choices; the function offsets (n << 5) and the argument order of kernel
// launch follow the paper's API table and launch example.
package m2ndp_pkg;

  localparam int unsigned FLIT_BYTES = 32;
  localparam int unsigned FLIT_W     = FLIT_BYTES * 8;   // 256
  localparam int unsigned LINE_W     = 512;              // CXL.mem 64 B line
  localparam int unsigned ID_W       = 16;
  localparam int unsigned XLEN       = 64;
  localparam int unsigned VLEN       = 256;              // vector unit width
  localparam int unsigned VLMAX64    = VLEN / 64;        // elements at SEW=64

  // Local tag sources inside an NDP unit (id[9:8])
  localparam logic [1:0] SRC_LSU  = 2'd0;
  localparam logic [1:0] SRC_IFU  = 2'd1;
  localparam logic [1:0] SRC_WALK = 2'd2;

  typedef enum logic [1:0] {
    MEM_RD     = 2'd0,
    MEM_WR     = 2'd1,
    MEM_AMOADD = 2'd2
  } mem_op_e;

  typedef struct packed {
    mem_op_e            op;
    logic [63:0]        addr;
    logic [FLIT_W-1:0]  wdata;
    logic [31:0]        wmask;
    logic [ID_W-1:0]    id;
  } mem_req_t;

  typedef struct packed {
    logic [FLIT_W-1:0]  rdata;
    logic [ID_W-1:0]    id;
  } mem_rsp_t;

  // CXL.mem request/response as seen after the CXL transaction layer
  typedef struct packed {
    logic               is_wr;
    logic [63:0]        addr;
    logic [LINE_W-1:0]  data;
    logic [15:0]        tag;
  } cxl_req_t;

  typedef struct packed {
    logic               is_wr;   // 1: write completion, 0: read data
    logic [LINE_W-1:0]  data;
    logic [15:0]        tag;
  } cxl_rsp_t;

  // M2func call forwarded by the packet filter to the NDP controller
  typedef struct packed {
    logic               is_wr;
    logic [9:0]         entry;   // packet filter entry = host process
    logic [15:0]        asid;
    logic               priv;    // region opened by a privileged (driver) entry
    logic [63:0]        offset;  // offset from the M2func region base
    logic [LINE_W-1:0]  data;
    logic [15:0]        tag;
  } func_req_t;

  // M2func function numbers: offset = fn << 5
  typedef enum logic [2:0] {
    FN_REGISTER   = 3'd0,
    FN_UNREGISTER = 3'd1,
    FN_LAUNCH     = 3'd2,
    FN_POLL       = 3'd3,
    FN_SHOOTDOWN  = 3'd4
  } m2func_e;

  localparam logic [63:0] ERR = 64'hFFFF_FFFF_FFFF_FFFF;  // -1

  // Kernel instance status returned by ndpPollKernelStatus
  localparam logic [63:0] ST_FINISHED = 64'd0;
  localparam logic [63:0] ST_RUNNING  = 64'd1;
  localparam logic [63:0] ST_PENDING  = 64'd2;

  // Registered kernel descriptor
  typedef struct packed {
    logic [63:0] init_pc;    // initializer entry (codeLoc)
    logic [63:0] body_pc;    // kernel body entry
    logic [63:0] final_pc;   // finalizer entry
    logic        has_init;
    logic        has_final;
    logic [7:0]  num_int;    // integer registers x0..x(n-1)
    logic [7:0]  num_fp;
    logic [7:0]  num_vec;    // vector registers v0..v(n-1)
    logic [31:0] spad_size;
    logic [15:0] asid;
  } kernel_desc_t;

  // Command from the NDP controller to every NDP unit's uthread generator
  typedef struct packed {
    kernel_desc_t k;
    logic [63:0]  pool_base;
    logic [63:0]  pool_bound;  // inclusive, as in the launch example
  } launch_cmd_t;

  // Memory access from a sub-core's LSU to its NDP unit
  typedef enum logic [2:0] {
    LS_LOAD  = 3'd0,
    LS_STORE = 3'd1,
    LS_AMO   = 3'd2
  } ls_op_e;

  typedef struct packed {
    ls_op_e             op;
    logic [63:0]        vaddr;
    logic [FLIT_W-1:0]  wdata;   // lane-placed within the 32 B sector
    logic [31:0]        wmask;
    logic [5:0]         tag;     // sub-core * 16 + slot
  } ls_req_t;

  typedef struct packed {
    logic [FLIT_W-1:0]  rdata;   // whole 32 B sector holding vaddr
    logic [5:0]         tag;
  } ls_rsp_t;

  // Memory channel of a physical address: 256 B interleaving with an XOR hash
  function automatic int unsigned chan_of(logic [63:0] a, int unsigned bits);
    logic [63:0] h;
    h = (a >> 8) ^ (a >> (8 + bits)) ^ (a >> (8 + 2 * bits));
    return (bits == 0) ? 0 : int'(h & ((64'd1 << bits) - 1));
  endfunction

endpackage
