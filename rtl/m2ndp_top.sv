// m2ndp_top: the CXL controller of a CXL memory expander with memory-mapped
// near-data processing (M2NDP).
//
// CXL.mem requests from the host enter the packet filter. Those that fall in
// a process's M2func region are management calls for the NDP controller; all
// others are normal reads and writes, which the host port turns into 32-byte
// sector accesses. The NDP controller runs launched kernels on NUM_UNITS NDP
// units; each unit reaches every memory channel through the request crossbar
// (units and host port to channels) and gets answers through the response
// crossbar. Each channel has a memory-side L2 slice (which also executes
// global atomics) and a memory controller; the DRAM devices themselves and
// the host's address translation service are outside this module, on ports.
// Channel of a physical address: 256-byte interleaving with an XOR hash
// (m2ndp_pkg::chan_of). The CXL PHY/link layers are not included: the host
// side is the decoded CXL.mem request/response.
// Sizes default to the paper's main configuration: 32 NDP units of 4
// sub-cores with 16 uthread slots, 32 LPDDR5 channels with 128 KB L2 each.
// The paper's four 32x32 crossbars are built as one request and one response
// crossbar with an extra port for the host.
module m2ndp_top
  import m2ndp_pkg::*;
#(
  parameter int unsigned NUM_UNITS   = 32,
  parameter int unsigned NUM_CH      = 32,
  parameter int unsigned NUM_SC      = 4,
  parameter int unsigned SLOTS       = 16,
  parameter int unsigned INT_REGS    = 256,
  parameter int unsigned VEC_REGS    = 320,
  parameter int unsigned SPAD_BYTES  = 131072,
  parameter int unsigned L2_BYTES    = 131072,
  parameter int unsigned NUM_PROCS   = 1024,
  parameter int unsigned MAX_INST    = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  // packet filter configuration (driver, over CXL.io)
  input  logic              cfg_we,
  input  logic [9:0]        cfg_idx,
  input  logic              cfg_valid,
  input  logic              cfg_priv,
  input  logic [63:0]       cfg_base,
  input  logic [63:0]       cfg_bound,
  input  logic [15:0]       cfg_asid,
  input  logic [63:0]       dtlb_base,
  // CXL.mem
  input  logic              cxl_in_valid,
  output logic              cxl_in_ready,
  input  cxl_req_t          cxl_in,
  output logic              cxl_out_valid,
  input  logic              cxl_out_ready,
  output cxl_rsp_t          cxl_out,
  // host address translation service, one port per NDP unit
  output logic [NUM_UNITS-1:0] ats_valid,
  output logic [51:0]       ats_vpn  [NUM_UNITS],
  output logic [15:0]       ats_asid [NUM_UNITS],
  input  logic [NUM_UNITS-1:0] ats_rsp_valid,
  input  logic [47:0]       ats_rsp_ppn [NUM_UNITS],
  // DRAM devices, one port per channel
  output logic [NUM_CH-1:0] d_valid,
  output logic [NUM_CH-1:0] d_we,
  output logic [63:0]       d_addr  [NUM_CH],
  output logic [255:0]      d_wdata [NUM_CH],
  input  logic [NUM_CH-1:0] d_rvalid,
  input  logic [255:0]      d_rdata [NUM_CH],
  // status and statistics
  output logic              ndp_busy,
  output logic [7:0]        ndp_pending,
  output logic [NUM_UNITS-1:0] unit_illegal,
  output logic [31:0]       st_retired  [NUM_UNITS],
  output logic [31:0]       st_spad     [NUM_UNITS],
  output logic [31:0]       st_threads  [NUM_UNITS],
  output logic [31:0]       st_tlb_miss [NUM_UNITS],
  output logic [31:0]       st_walks    [NUM_UNITS],
  output logic [31:0]       st_ats      [NUM_UNITS],
  output logic [31:0]       st_imiss    [NUM_UNITS],
  output logic [4:0]        st_max_active [NUM_UNITS],
  output logic [31:0]       st_l2_hits  [NUM_CH],
  output logic [31:0]       st_l2_miss  [NUM_CH],
  output logic [31:0]       st_l2_amo   [NUM_CH],
  output logic [31:0]       st_row_hits [NUM_CH],
  output logic [31:0]       st_row_miss [NUM_CH]
);

  localparam int unsigned CHW = $clog2(NUM_CH);
  localparam int unsigned NP  = NUM_UNITS + 1;        // + host port
  localparam int unsigned PPW = $clog2(NP);
  localparam int unsigned RQW = $bits(mem_req_t);
  localparam int unsigned RSW = $bits(mem_rsp_t);

  // ---------------------------------------------------------------- front end
  logic      pf_mem_valid, pf_mem_ready, pf_fn_valid, pf_fn_ready;
  cxl_req_t  pf_mem;
  func_req_t pf_fn;
  packet_filter #(.NUM_ENTRIES(NUM_PROCS)) u_pf (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_valid, .cfg_priv, .cfg_base, .cfg_bound, .cfg_asid,
    .in_valid(cxl_in_valid), .in_ready(cxl_in_ready), .in_req(cxl_in),
    .mem_valid(pf_mem_valid), .mem_ready(pf_mem_ready), .mem_req(pf_mem),
    .func_valid(pf_fn_valid), .func_ready(pf_fn_ready), .func_req(pf_fn));

  logic        c_rsp_valid, c_rsp_ready, arg_we, gen_start, ic_flush, sd_valid;
  cxl_rsp_t    c_rsp;
  logic [1:0]  arg_idx;
  logic [63:0] arg_data;
  launch_cmd_t gen_cmd;
  logic [NUM_UNITS-1:0] gen_done;
  logic [15:0] sd_asid;
  logic [51:0] sd_vpn;
  ndp_controller #(.NUM_UNITS(NUM_UNITS), .NUM_PROCS(NUM_PROCS), .MAX_INST(MAX_INST)) u_ctl (
    .clk, .rst_n, .func_valid(pf_fn_valid), .func_ready(pf_fn_ready), .func_req(pf_fn),
    .rsp_valid(c_rsp_valid), .rsp_ready(c_rsp_ready), .rsp(c_rsp),
    .arg_we, .arg_idx, .arg_data, .gen_start, .gen_cmd, .gen_done,
    .icache_flush(ic_flush), .sd_valid, .sd_asid, .sd_vpn,
    .busy(ndp_busy), .num_pending(ndp_pending));

  logic     hp_mvalid, hp_mready, hp_rvalid, h_rsp_valid, h_rsp_ready;
  mem_req_t hp_mreq;
  mem_rsp_t hp_rsp;
  cxl_rsp_t h_rsp;
  host_port #(.SRC_PORT(6'(NUM_UNITS))) u_hp (
    .clk, .rst_n, .in_valid(pf_mem_valid), .in_ready(pf_mem_ready), .in_req(pf_mem),
    .m_valid(hp_mvalid), .m_ready(hp_mready), .m_req(hp_mreq),
    .m_rsp_valid(hp_rvalid), .m_rsp(hp_rsp),
    .out_valid(h_rsp_valid), .out_ready(h_rsp_ready), .out_rsp(h_rsp));

  // responses to the host: the NDP controller's first
  assign cxl_out_valid = c_rsp_valid || h_rsp_valid;
  assign cxl_out       = c_rsp_valid ? c_rsp : h_rsp;
  assign c_rsp_ready   = cxl_out_ready;
  assign h_rsp_ready   = cxl_out_ready && !c_rsp_valid;

  // ---------------------------------------------------------------- crossbars
  logic [NP-1:0]     rq_in_valid, rq_in_ready;
  logic [RQW-1:0]    rq_in_data [NP];
  logic [CHW-1:0]    rq_in_dst  [NP];
  logic [NUM_CH-1:0] rq_out_valid, rq_out_ready;
  logic [RQW-1:0]    rq_out_data [NUM_CH];

  logic [NUM_CH-1:0] rs_in_valid, rs_in_ready;
  logic [RSW-1:0]    rs_in_data [NUM_CH];
  logic [PPW-1:0]    rs_in_dst  [NUM_CH];
  logic [NP-1:0]     rs_out_valid, rs_out_ready;
  logic [RSW-1:0]    rs_out_data [NP];

  crossbar #(.N_IN(NP), .N_OUT(NUM_CH), .W(RQW)) u_xbar_req (
    .clk, .rst_n, .in_valid(rq_in_valid), .in_ready(rq_in_ready), .in_data(rq_in_data),
    .in_dst(rq_in_dst), .out_valid(rq_out_valid), .out_ready(rq_out_ready),
    .out_data(rq_out_data));

  crossbar #(.N_IN(NUM_CH), .N_OUT(NP), .W(RSW)) u_xbar_rsp (
    .clk, .rst_n, .in_valid(rs_in_valid), .in_ready(rs_in_ready), .in_data(rs_in_data),
    .in_dst(rs_in_dst), .out_valid(rs_out_valid), .out_ready(rs_out_ready),
    .out_data(rs_out_data));

  // host port on the last crossbar port
  assign rq_in_valid[NUM_UNITS] = hp_mvalid;
  assign rq_in_data[NUM_UNITS]  = hp_mreq;
  assign rq_in_dst[NUM_UNITS]   = CHW'(chan_of(hp_mreq.addr, CHW));
  assign hp_mready              = rq_in_ready[NUM_UNITS];
  assign hp_rvalid              = rs_out_valid[NUM_UNITS];
  assign hp_rsp                 = rs_out_data[NUM_UNITS];
  assign rs_out_ready[NUM_UNITS] = 1'b1;

  // ---------------------------------------------------------------- NDP units
  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    mem_req_t ureq;
    ndp_unit #(.NUM_UNITS(NUM_UNITS), .UNIT_ID(u), .NUM_SC(NUM_SC), .SLOTS(SLOTS),
               .INT_REGS(INT_REGS), .VEC_REGS(VEC_REGS), .SPAD_BYTES(SPAD_BYTES)) u_ndp (
      .clk, .rst_n, .gen_start, .gen_cmd, .gen_done(gen_done[u]),
      .arg_we, .arg_idx, .arg_data, .icache_flush(ic_flush), .sd_valid, .sd_asid, .sd_vpn,
      .dtlb_base,
      .m_valid(rq_in_valid[u]), .m_ready(rq_in_ready[u]), .m_req(ureq),
      .m_rsp_valid(rs_out_valid[u]), .m_rsp_ready(rs_out_ready[u]), .m_rsp(rs_out_data[u]),
      .ats_valid(ats_valid[u]), .ats_vpn(ats_vpn[u]), .ats_asid(ats_asid[u]),
      .ats_rsp_valid(ats_rsp_valid[u]), .ats_rsp_ppn(ats_rsp_ppn[u]),
      .st_retired(st_retired[u]), .st_spad(st_spad[u]), .st_tlb_miss(st_tlb_miss[u]),
      .st_walks(st_walks[u]), .st_ats(st_ats[u]), .st_imiss(st_imiss[u]),
      .st_threads(st_threads[u]), .st_max_active(st_max_active[u]),
      .illegal(unit_illegal[u]));
    assign rq_in_data[u] = ureq;
    assign rq_in_dst[u]  = CHW'(chan_of(ureq.addr, CHW));
  end

  // ---------------------------------------------------------------- channels
  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    mem_req_t    creq;
    mem_rsp_t    crsp;
    logic        mc_valid, mc_ready, mc_we, mc_rvalid, mc_rready;
    logic [63:0] mc_addr;
    logic [255:0] mc_wdata, mc_rdata;
    assign creq = rq_out_data[c];
    l2_slice #(.SIZE_BYTES(L2_BYTES)) u_l2 (
      .clk, .rst_n, .req_valid(rq_out_valid[c]), .req_ready(rq_out_ready[c]), .req(creq),
      .rsp_valid(rs_in_valid[c]), .rsp_ready(rs_in_ready[c]), .rsp(crsp),
      .mc_valid, .mc_ready, .mc_we, .mc_addr, .mc_wdata,
      .mc_rsp_valid(mc_rvalid), .mc_rsp_ready(mc_rready), .mc_rdata,
      .hits(st_l2_hits[c]), .misses(st_l2_miss[c]), .atomics(st_l2_amo[c]));
    assign rs_in_data[c] = crsp;
    assign rs_in_dst[c]  = PPW'(crsp.id[15:10]);
    mem_ctrl u_mc (
      .clk, .rst_n, .req_valid(mc_valid), .req_ready(mc_ready), .req_we(mc_we),
      .req_addr(mc_addr), .req_wdata(mc_wdata), .rsp_valid(mc_rvalid), .rsp_ready(mc_rready),
      .rsp_rdata(mc_rdata), .d_valid(d_valid[c]), .d_we(d_we[c]), .d_addr(d_addr[c]),
      .d_wdata(d_wdata[c]), .d_rvalid(d_rvalid[c]), .d_rdata(d_rdata[c]),
      .row_hits(st_row_hits[c]), .row_misses(st_row_miss[c]));
  end

endmodule
