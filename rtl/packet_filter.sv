// packet_filter: splits incoming CXL.mem traffic into normal memory accesses and
// M2func calls (memory-mapped NDP management functions).
//
// Each entry holds one host process's M2func region: a 64-bit base, a 64-bit
// bound (inclusive) and a 16-bit ASID, the 18 bytes per process the paper
// counts; the driver fills entries over CXL.io, modelled here by the cfg_*
// port. Every request's address is compared against all valid entries in
// parallel. A hit is forwarded to the NDP controller with the entry index,
// ASID and the offset from the region base; a miss goes on to memory
// unchanged. One register stage; a new request is taken whenever the output
// register is empty or is being emptied (valid/ready on all three sides).
// The privileged flag per entry (which lets the TLB-shootdown function be
// called only from the driver's own region) and the lowest-index-wins rule for
// overlapping entries are this design's choices.
module packet_filter
  import m2ndp_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration (CXL.io side, by the driver)
  input  logic                 cfg_we,
  input  logic [9:0]           cfg_idx,
  input  logic                 cfg_valid,
  input  logic                 cfg_priv,
  input  logic [63:0]          cfg_base,
  input  logic [63:0]          cfg_bound,
  input  logic [15:0]          cfg_asid,
  // CXL.mem requests from the host
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cxl_req_t             in_req,
  // normal accesses
  output logic                 mem_valid,
  input  logic                 mem_ready,
  output cxl_req_t             mem_req,
  // M2func calls
  output logic                 func_valid,
  input  logic                 func_ready,
  output func_req_t            func_req
);

  typedef struct packed {
    logic        valid;
    logic        priv;
    logic [63:0] base;
    logic [63:0] bound;
    logic [15:0] asid;
  } entry_t;

  entry_t tbl [NUM_ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_ENTRIES; i++) tbl[i] <= '0;
    end else if (cfg_we && int'(cfg_idx) < NUM_ENTRIES) begin
      tbl[cfg_idx] <= '{valid: cfg_valid, priv: cfg_priv, base: cfg_base,
                        bound: cfg_bound, asid: cfg_asid};
    end
  end

  // parallel match, lowest index wins
  logic        hit;
  logic [9:0]  hit_idx;
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = NUM_ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].valid && in_req.addr >= tbl[i].base && in_req.addr <= tbl[i].bound) begin
        hit     = 1'b1;
        hit_idx = 10'(i);
      end
    end
  end

  logic out_full, out_is_func, out_taken;
  assign out_taken = out_full && (out_is_func ? func_ready : mem_ready);
  assign in_ready  = !out_full || out_taken;
  assign mem_valid  = out_full && !out_is_func;
  assign func_valid = out_full &&  out_is_func;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_full    <= 1'b0;
      out_is_func <= 1'b0;
      mem_req     <= '0;
      func_req    <= '0;
    end else begin
      if (out_taken) out_full <= 1'b0;
      if (in_valid && in_ready) begin
        out_full    <= 1'b1;
        out_is_func <= hit;
        mem_req     <= in_req;
        func_req    <= '{is_wr: in_req.is_wr, entry: hit_idx, asid: tbl[hit_idx].asid,
                         priv: tbl[hit_idx].priv, offset: in_req.addr - tbl[hit_idx].base,
                         data: in_req.data, tag: in_req.tag};
      end
    end
  end

endmodule
