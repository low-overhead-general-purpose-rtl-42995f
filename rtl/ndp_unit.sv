// ndp_unit: one NDP unit, NUM_SC sub-cores sharing a uthread generator,
// scratchpad, L1 instruction cache, data TLB with DRAM-TLB walker and one
// port into the on-chip crossbar.
//
// Data accesses of the sub-cores are taken one per cycle (round-robin). An
// address inside [SPAD_BASE, SPAD_BASE + SPAD_BYTES) is a scratchpad access
// and needs no translation (the scratchpad is mapped into an unused part of
// the virtual address space). Any other address is a virtual address of the
// running kernel's process: it is looked up in the D-TLB with the kernel's
// ASID; on a hit the physical sector request goes to the crossbar, on a miss
// the request is held and the DRAM-TLB walker refills the TLB. The memory
// port is shared by the walker (first), the instruction cache and the data
// accesses; responses are steered by the id's source field. A memory
// response that would reach a sub-core in the same cycle as a scratchpad
// response is held back one cycle (rsp_ready low).
//
// The composition (four sub-cores, generator, scratchpad, L1 I$, TLB) follows
// the paper's NDP unit figure; the scratchpad base 0x1000_0000 is taken from
// its reduction-kernel example. Not built: the L1 data cache mode of the
// scratchpad (global data goes straight to the memory-side L2, consistent
// with a write-through L1), the per-sub-core L0 I$ and the I-TLB.
module ndp_unit
  import m2ndp_pkg::*;
#(
  parameter int unsigned NUM_UNITS  = 32,
  parameter int unsigned UNIT_ID    = 0,
  parameter int unsigned NUM_SC     = 4,
  parameter int unsigned SLOTS      = 16,
  parameter int unsigned INT_REGS   = 256,
  parameter int unsigned VEC_REGS   = 320,
  parameter int unsigned SPAD_BYTES = 131072,
  parameter int unsigned ICACHE_BYTES = 2048,
  parameter int unsigned TLB_ENTRIES  = 256,
  parameter int unsigned TLB_WAYS     = 8,
  parameter int unsigned DTLB_IDX_BITS = 20,
  parameter logic [63:0] SPAD_BASE  = 64'h0000_0000_1000_0000
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the NDP controller
  input  logic              gen_start,
  input  launch_cmd_t       gen_cmd,
  output logic              gen_done,
  input  logic              arg_we,
  input  logic [1:0]        arg_idx,
  input  logic [63:0]       arg_data,
  input  logic              icache_flush,
  input  logic              sd_valid,
  input  logic [15:0]       sd_asid,
  input  logic [51:0]       sd_vpn,
  input  logic [63:0]       dtlb_base,
  // crossbar port
  output logic              m_valid,
  input  logic              m_ready,
  output mem_req_t          m_req,
  input  logic              m_rsp_valid,
  output logic              m_rsp_ready,
  input  mem_rsp_t          m_rsp,
  // host address translation service (DRAM-TLB miss)
  output logic              ats_valid,
  output logic [51:0]       ats_vpn,
  output logic [15:0]       ats_asid,
  input  logic              ats_rsp_valid,
  input  logic [47:0]       ats_rsp_ppn,
  // statistics
  output logic [31:0]       st_retired,
  output logic [31:0]       st_spad,
  output logic [31:0]       st_tlb_miss,
  output logic [31:0]       st_walks,
  output logic [31:0]       st_ats,
  output logic [31:0]       st_imiss,
  output logic [31:0]       st_threads,
  output logic [4:0]        st_max_active,
  output logic              illegal
);

  localparam logic [5:0] SRC = 6'(UNIT_ID);
  localparam int unsigned SCW = (NUM_SC > 1) ? $clog2(NUM_SC) : 1;

  // ---------------------------------------------------------------- generator
  kernel_desc_t       kdesc;
  logic [4:0]         usable;
  logic [NUM_SC-1:0]  sp_valid, sp_ready, t_done;
  logic [63:0]        sp_pc, sp_x1, sp_x2;
  logic               gen_active;

  uthread_generator #(.NUM_UNITS(NUM_UNITS), .UNIT_ID(UNIT_ID), .NUM_SC(NUM_SC),
                      .SLOTS(SLOTS), .INT_REGS(INT_REGS), .VEC_REGS(VEC_REGS)) u_gen (
    .clk, .rst_n, .start(gen_start), .cmd(gen_cmd), .kdesc, .usable_slots(usable),
    .spawn_valid(sp_valid), .spawn_ready(sp_ready), .spawn_pc(sp_pc), .spawn_x1(sp_x1),
    .spawn_x2(sp_x2), .thread_done(t_done), .done(gen_done), .active(gen_active));

  // ---------------------------------------------------------------- sub-cores
  logic [NUM_SC-1:0]  if_valid, if_ready, ir_valid;
  logic [63:0]        if_pc   [NUM_SC];
  logic [3:0]         if_slot [NUM_SC];
  logic [3:0]         ir_tag;
  logic [31:0]        ir_instr;
  logic [NUM_SC-1:0]  ls_valid, ls_ready, lr_valid, sc_retire, sc_ill;
  ls_req_t            ls_req  [NUM_SC];
  ls_rsp_t            lr_rsp;
  logic [4:0]         sc_active [NUM_SC];

  for (genvar c = 0; c < NUM_SC; c++) begin : g_sc
    ndp_subcore #(.SC_ID(c), .SLOTS(SLOTS), .INT_REGS(INT_REGS), .VEC_REGS(VEC_REGS)) u_sc (
      .clk, .rst_n, .kdesc, .usable_slots(usable),
      .spawn_valid(sp_valid[c]), .spawn_ready(sp_ready[c]), .spawn_pc(sp_pc),
      .spawn_x1(sp_x1), .spawn_x2(sp_x2), .thread_done(t_done[c]),
      .if_valid(if_valid[c]), .if_ready(if_ready[c]), .if_pc(if_pc[c]), .if_slot(if_slot[c]),
      .if_rsp_valid(ir_valid[c]), .if_rsp_slot(ir_tag), .if_rsp_instr(ir_instr),
      .ls_valid(ls_valid[c]), .ls_ready(ls_ready[c]), .ls_req(ls_req[c]),
      .ls_rsp_valid(lr_valid[c]), .ls_rsp(lr_rsp),
      .retire(sc_retire[c]), .active_slots(sc_active[c]), .illegal(sc_ill[c]));
  end

  // ---------------------------------------------------------------- I-cache
  logic     ic_mvalid, ic_mready, ic_rvalid;
  mem_req_t ic_mreq;
  icache #(.SIZE_BYTES(ICACHE_BYTES), .NPORTS(NUM_SC), .SRC_PORT(SRC)) u_ic (
    .clk, .rst_n, .flush(icache_flush), .f_valid(if_valid), .f_ready(if_ready),
    .f_pc(if_pc), .f_tag(if_slot), .r_valid(ir_valid), .r_tag(ir_tag), .r_instr(ir_instr),
    .m_valid(ic_mvalid), .m_ready(ic_mready), .m_req(ic_mreq),
    .m_rsp_valid(ic_rvalid), .m_rsp(m_rsp), .misses(st_imiss));

  // ---------------------------------------------------------------- LSU select
  logic [SCW-1:0] ls_rr, ls_sel;
  logic           ls_any;
  always_comb begin
    ls_any = 1'b0; ls_sel = '0;
    for (int j = NUM_SC - 1; j >= 0; j--) begin
      int unsigned c;
      c = (int'(ls_rr) + j) % NUM_SC;
      if (ls_valid[c]) begin ls_any = 1'b1; ls_sel = SCW'(c); end
    end
  end
  ls_req_t q;
  assign q = ls_req[ls_sel];

  logic is_spad;
  assign is_spad = q.vaddr >= SPAD_BASE && q.vaddr < SPAD_BASE + 64'(SPAD_BYTES);

  mem_op_e q_op;
  assign q_op = (q.op == LS_STORE) ? MEM_WR : (q.op == LS_AMO) ? MEM_AMOADD : MEM_RD;

  // scratchpad
  logic     sp_req_ready, sp_rsp_valid;
  logic [FLIT_W-1:0] sp_rdata;
  logic [5:0] sp_rtag;
  scratchpad #(.SIZE_BYTES(SPAD_BYTES)) u_spad (
    .clk, .rst_n, .req_valid(ls_any && is_spad), .req_ready(sp_req_ready), .req_op(q_op),
    .req_addr(32'(q.vaddr - SPAD_BASE)), .req_wdata(q.wdata), .req_wmask(q.wmask),
    .req_tag(q.tag), .rsp_valid(sp_rsp_valid), .rsp_rdata(sp_rdata), .rsp_tag(sp_rtag),
    .arg_we, .arg_idx, .arg_data);

  // TLB and walker
  logic        tl_hit, wk_busy, fill_v;
  logic [47:0] tl_ppn, fill_ppn;
  logic [51:0] fill_vpn;
  logic [15:0] fill_asid;
  tlb #(.ENTRIES(TLB_ENTRIES), .WAYS(TLB_WAYS)) u_tlb (
    .clk, .rst_n, .lk_vpn(q.vaddr[63:12]), .lk_asid(kdesc.asid), .lk_hit(tl_hit),
    .lk_ppn(tl_ppn), .fill_valid(fill_v), .fill_vpn, .fill_asid, .fill_ppn,
    .sd_valid, .sd_vpn, .sd_asid, .flush_all(1'b0));

  logic     wk_mvalid, wk_mready, wk_rvalid;
  mem_req_t wk_mreq;
  logic     glob_miss;
  assign glob_miss = ls_any && !is_spad && !tl_hit;
  dram_tlb_walker #(.IDX_BITS(DTLB_IDX_BITS), .SRC_PORT(SRC)) u_walk (
    .clk, .rst_n, .dtlb_base, .miss_valid(glob_miss && !fill_v), .miss_vpn(q.vaddr[63:12]),
    .miss_asid(kdesc.asid), .busy(wk_busy), .m_valid(wk_mvalid), .m_ready(wk_mready),
    .m_req(wk_mreq), .m_rsp_valid(wk_rvalid), .m_rsp(m_rsp), .fill_valid(fill_v),
    .fill_vpn, .fill_asid, .fill_ppn, .ats_valid, .ats_vpn, .ats_asid, .ats_rsp_valid,
    .ats_rsp_ppn, .walks(st_walks), .ats_requests(st_ats));

  // global data request
  logic     gl_valid, gl_ready;
  mem_req_t gl_req;
  assign gl_valid = ls_any && !is_spad && tl_hit;
  always_comb begin
    gl_req       = '0;
    gl_req.op    = q_op;
    gl_req.addr  = 64'({tl_ppn[47:0], q.vaddr[11:0]});
    gl_req.addr[4:0] = q.vaddr[4:0];
    gl_req.wdata = q.wdata;
    gl_req.wmask = q.wmask;
    gl_req.id    = {SRC, SRC_LSU, 2'b00, q.tag};
  end

  // memory port arbitration: walker, then I-cache, then data
  always_comb begin
    wk_mready = 1'b0; ic_mready = 1'b0; gl_ready = 1'b0;
    if (wk_mvalid)      begin m_valid = 1'b1; m_req = wk_mreq; wk_mready = m_ready; end
    else if (ic_mvalid) begin m_valid = 1'b1; m_req = ic_mreq; ic_mready = m_ready; end
    else                begin m_valid = gl_valid; m_req = gl_req; gl_ready = m_ready; end
  end

  always_comb begin
    ls_ready = '0;
    if (ls_any) ls_ready[ls_sel] = is_spad ? sp_req_ready : (tl_hit && gl_ready);
  end

  // response steering
  logic rsp_lsu;
  assign rsp_lsu     = m_rsp.id[9:8] == SRC_LSU;
  // The sub-cores share one response bus, so a global load response waits
  // for a cycle in which the scratchpad does not answer.
  assign m_rsp_ready = !(rsp_lsu && sp_rsp_valid);
  assign ic_rvalid   = m_rsp_valid && m_rsp.id[9:8] == SRC_IFU;
  assign wk_rvalid   = m_rsp_valid && m_rsp.id[9:8] == SRC_WALK;

  always_comb begin
    lr_valid = '0;
    lr_rsp   = '0;
    if (m_rsp_valid && rsp_lsu && m_rsp_ready) begin
      lr_valid[m_rsp.id[5:4]] = 1'b1;
      lr_rsp = '{rdata: m_rsp.rdata, tag: m_rsp.id[5:0]};
    end
    if (sp_rsp_valid) begin
      lr_valid[sp_rtag[5:4]] = 1'b1;
      lr_rsp = '{rdata: sp_rdata, tag: sp_rtag};
    end
  end

  // ---------------------------------------------------------------- stats
  logic [4:0] act_sum;
  always_comb begin
    act_sum = '0;
    for (int c = 0; c < NUM_SC; c++) act_sum += sc_active[c];
  end
  assign illegal = |sc_ill;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls_rr <= '0; st_retired <= '0; st_spad <= '0; st_tlb_miss <= '0; st_threads <= '0;
      st_max_active <= '0;
    end else begin
      if (ls_any && ls_ready[ls_sel]) ls_rr <= (int'(ls_sel) == NUM_SC - 1) ? '0 : ls_sel + 1'b1;
      st_retired <= st_retired + 32'($countones(sc_retire));
      st_threads <= st_threads + 32'($countones(sp_valid & sp_ready));
      if (ls_any && is_spad && sp_req_ready) st_spad <= st_spad + 1'b1;
      if (glob_miss && !wk_busy && !fill_v) st_tlb_miss <= st_tlb_miss + 1'b1;
      if (act_sum > st_max_active) st_max_active <= act_sum;
    end
  end

endmodule
