// ndp_subcore: one NDP sub-core, a fine-grained multithreaded RISC-V scalar +
// vector core that holds up to SLOTS uthreads.
//
// A uthread slot keeps the thread's PC, its decoded current instruction
// (operation and physical register ids) and its state. Registers are renamed
// by adding the logical register number to the slot's base in the INT or
// vector register file; slot s of a kernel that needs nI integer and nV vector
// registers gets bases s*nI and s*nV, so only x0..x(nI-1) and v0..v(nV-1) are
// backed by storage. Instructions of one uthread run strictly one after the
// other; different uthreads interleave cycle by cycle, so no dependency
// checks or forwarding are needed.
//
// Per cycle: the fetch stage sends one slot's PC to the NDP unit's
// instruction cache (round-robin over slots that need an instruction); the
// response is decoded and renamed into the slot. The issue stage picks one
// slot with a decoded instruction (round-robin) and executes it: scalar ALU
// and SFU (multiply) and vector ALU/SFU operations complete in that cycle,
// loads, stores, AMOADD.D and vector loads/stores go to the NDP unit as one
// 32-byte sector access and the slot waits for the answer. EBREAK ends the
// uthread and frees its slot at once for the next one.
//
// Supported subset (this design's choice; the paper allows any RV64IMAFDV
// instruction the hardware supports): LUI AUIPC JAL JALR, branches, OP/OP-IMM
// (and MUL), LD LW LWU SD SW, AMOADD.D, and with SEW=64 and vl = VLEN/64 = 4
// fixed: VLE64.V VSE64.V (32-byte aligned), VADD.VV/.VX, VMUL.VV, VMV.V.I,
// VMV.V.X, VREDSUM.VS, VMV.X.S; VSETVLI only returns vl. No floating point.
// Issue is one instruction per cycle; the paper's 4-way dispatch to two
// scalar ALUs, SFU, LSU, vALU, vSFU and vLSU is not modelled.
module ndp_subcore
  import m2ndp_pkg::*;
#(
  parameter int unsigned SC_ID    = 0,
  parameter int unsigned SLOTS    = 16,
  parameter int unsigned INT_REGS = 256,
  parameter int unsigned VEC_REGS = 320
) (
  input  logic              clk,
  input  logic              rst_n,
  input  kernel_desc_t      kdesc,
  input  logic [4:0]        usable_slots,
  // uthread spawn
  input  logic              spawn_valid,
  output logic              spawn_ready,
  input  logic [63:0]       spawn_pc,
  input  logic [63:0]       spawn_x1,
  input  logic [63:0]       spawn_x2,
  output logic              thread_done,
  // instruction fetch
  output logic              if_valid,
  input  logic              if_ready,
  output logic [63:0]       if_pc,
  output logic [3:0]        if_slot,
  input  logic              if_rsp_valid,
  input  logic [3:0]        if_rsp_slot,
  input  logic [31:0]       if_rsp_instr,
  // data access
  output logic              ls_valid,
  input  logic              ls_ready,
  output ls_req_t           ls_req,
  input  logic              ls_rsp_valid,
  input  ls_rsp_t           ls_rsp,
  // status
  output logic              retire,
  output logic [4:0]        active_slots,
  output logic              illegal
);

  localparam int unsigned IRW = $clog2(INT_REGS);
  localparam int unsigned VRW = $clog2(VEC_REGS);
  localparam int unsigned SW  = $clog2(SLOTS);

  typedef enum logic [4:0] {
    C_ALU, C_ALUI, C_LUI, C_AUIPC, C_BR, C_JAL, C_JALR, C_MUL,
    C_LD, C_ST, C_AMO, C_EXIT, C_VLD, C_VST, C_VADDVV, C_VADDVX,
    C_VMULVV, C_VMVVI, C_VMVVX, C_VREDSUM, C_VMVXS, C_VSETVL, C_ILL
  } iclass_e;

  typedef struct packed {
    iclass_e      cls;
    logic [2:0]   f3;
    logic         alt;       // SUB / SRA
    logic [4:0]   rd, rs1, rs2;
    logic [63:0]  imm;
    logic [IRW-1:0] prd, prs1, prs2;
    logic [VRW-1:0] pvd, pvs1, pvs2;
  } dec_t;

  typedef enum logic [2:0] {S_FREE, S_FETCH, S_FWAIT, S_READY, S_MEM} sst_e;

  sst_e          st   [SLOTS];
  logic [63:0]   pc   [SLOTS];
  dec_t          dec  [SLOTS];
  logic [IRW-1:0] ibase[SLOTS];
  logic [VRW-1:0] vbase[SLOTS];
  logic [4:0]    moff [SLOTS];   // byte offset of the pending access

  logic [63:0]   irf [INT_REGS];
  logic [VLEN-1:0] vrf [VEC_REGS];

  // ---------------------------------------------------------------- decode
  function automatic dec_t decode(input logic [31:0] i, input logic [IRW-1:0] ib,
                                  input logic [VRW-1:0] vb);
    dec_t d;
    d      = '0;
    d.cls  = C_ILL;
    d.f3   = i[14:12];
    d.alt  = i[30];
    d.rd   = i[11:7];
    d.rs1  = i[19:15];
    d.rs2  = i[24:20];
    d.imm  = {{52{i[31]}}, i[31:20]};
    unique case (i[6:0])
      7'b0110111: begin d.cls = C_LUI;   d.imm = {{32{i[31]}}, i[31:12], 12'b0}; end
      7'b0010111: begin d.cls = C_AUIPC; d.imm = {{32{i[31]}}, i[31:12], 12'b0}; end
      7'b1101111: begin d.cls = C_JAL;
                        d.imm = {{44{i[31]}}, i[19:12], i[20], i[30:21], 1'b0}; end
      7'b1100111: d.cls = C_JALR;
      7'b1100011: begin d.cls = C_BR;
                        d.imm = {{52{i[31]}}, i[7], i[30:25], i[11:8], 1'b0}; end
      7'b0000011: d.cls = (i[14:12] == 3'd3 || i[14:12] == 3'd2 || i[14:12] == 3'd6) ? C_LD : C_ILL;
      7'b0100011: begin d.cls = (i[14:12] == 3'd3 || i[14:12] == 3'd2) ? C_ST : C_ILL;
                        d.imm = {{52{i[31]}}, i[31:25], i[11:7]}; end
      7'b0010011: begin d.cls = C_ALUI; d.alt = (i[14:12] == 3'd5) ? i[30] : 1'b0; end
      7'b0110011: d.cls = (i[31:25] == 7'b0000001) ? ((i[14:12] == 3'd0) ? C_MUL : C_ILL) : C_ALU;
      7'b0101111: d.cls = (i[14:12] == 3'd3 && i[31:27] == 5'b00000) ? C_AMO : C_ILL;
      7'b1110011: d.cls = (i == 32'h0010_0073) ? C_EXIT : C_ILL;
      7'b0000111: d.cls = (i[14:12] == 3'b111 && i[27:26] == 2'b00 && i[24:20] == 5'd0) ? C_VLD : C_ILL;
      7'b0100111: d.cls = (i[14:12] == 3'b111 && i[27:26] == 2'b00 && i[24:20] == 5'd0) ? C_VST : C_ILL;
      7'b1010111: begin
        d.imm = {{59{i[19]}}, i[19:15]};
        unique case ({i[31:26], i[14:12]})
          {6'b000000, 3'b000}: d.cls = C_VADDVV;
          {6'b000000, 3'b100}: d.cls = C_VADDVX;
          {6'b100101, 3'b010}: d.cls = C_VMULVV;
          {6'b010111, 3'b011}: d.cls = C_VMVVI;
          {6'b010111, 3'b100}: d.cls = C_VMVVX;
          {6'b000000, 3'b010}: d.cls = C_VREDSUM;
          {6'b010000, 3'b010}: d.cls = C_VMVXS;
          default:             d.cls = (i[14:12] == 3'b111) ? C_VSETVL : C_ILL;
        endcase
      end
      default: d.cls = C_ILL;
    endcase
    // register renaming: physical id = base + logical id
    d.prd  = ib + IRW'(d.rd);
    d.prs1 = ib + IRW'(d.rs1);
    d.prs2 = ib + IRW'(d.rs2);
    d.pvd  = vb + VRW'(d.rd);
    d.pvs1 = vb + VRW'(d.rs1);
    d.pvs2 = vb + VRW'(d.rs2);
    return d;
  endfunction

  function automatic logic [63:0] alu(input logic [63:0] a, input logic [63:0] b,
                                      input logic [2:0] f3, input logic alt);
    unique case (f3)
      3'd0: return alt ? a - b : a + b;
      3'd1: return a << b[5:0];
      3'd2: return {63'b0, $signed(a) < $signed(b)};
      3'd3: return {63'b0, a < b};
      3'd4: return a ^ b;
      3'd5: return alt ? 64'($signed(a) >>> b[5:0]) : a >> b[5:0];
      3'd6: return a | b;
      default: return a & b;
    endcase
  endfunction

  // ---------------------------------------------------------------- spawn
  logic          sp_ok;
  logic [SW-1:0] sp_slot;
  always_comb begin
    sp_ok = 1'b0; sp_slot = '0;
    for (int s = SLOTS - 1; s >= 0; s--)
      if (st[s] == S_FREE && 5'(s) < usable_slots) begin sp_ok = 1'b1; sp_slot = SW'(s); end
  end
  assign spawn_ready = sp_ok;

  // ---------------------------------------------------------------- fetch
  logic [SW-1:0] f_rr, i_rr;
  logic          ls_stall_q;
  logic          f_ok;
  logic [SW-1:0] f_slot;
  always_comb begin
    f_ok = 1'b0; f_slot = '0;
    for (int j = SLOTS - 1; j >= 0; j--) begin
      int unsigned s;
      s = (int'(f_rr) + j) % SLOTS;
      if (st[s] == S_FETCH) begin f_ok = 1'b1; f_slot = SW'(s); end
    end
  end
  assign if_valid = f_ok;
  assign if_pc    = pc[f_slot];
  assign if_slot  = 4'(f_slot);

  // ---------------------------------------------------------------- issue
  logic          i_ok;
  logic [SW-1:0] i_slot;
  dec_t          d;
  always_comb begin
    i_ok = 1'b0; i_slot = '0;
    for (int j = SLOTS - 1; j >= 0; j--) begin
      int unsigned s;
      s = (int'(i_rr) + j) % SLOTS;
      if (st[s] == S_READY &&
          !((dec[s].cls inside {C_LD, C_ST, C_AMO, C_VLD, C_VST}) && ls_stall_q)) begin
        i_ok = 1'b1; i_slot = SW'(s);
      end
    end
  end
  assign d = dec[i_slot];

  // a memory instruction refused by the NDP unit lets the other slots issue
  // for one cycle before it retries (keeps ls_valid independent of ls_ready)
  logic i_fire, i_mem;
  assign i_mem  = d.cls inside {C_LD, C_ST, C_AMO, C_VLD, C_VST};
  assign i_fire = i_ok && (!i_mem || ls_ready);

  logic [63:0]     a, b;
  logic [VLEN-1:0] va, vb, vdo;
  assign a   = (d.rs1 == 5'd0) ? 64'd0 : irf[d.prs1];
  assign b   = (d.rs2 == 5'd0) ? 64'd0 : irf[d.prs2];
  assign va  = vrf[d.pvs1];
  assign vb  = vrf[d.pvs2];
  assign vdo = vrf[d.pvd];

  logic [63:0] ea;
  assign ea = (d.cls == C_AMO || d.cls == C_VLD || d.cls == C_VST) ? a : a + d.imm;

  // memory request of the issuing instruction
  always_comb begin
    ls_valid = i_ok && (d.cls inside {C_LD, C_ST, C_AMO, C_VLD, C_VST});
    ls_req   = '0;
    ls_req.vaddr = ea;
    ls_req.tag   = 6'(SC_ID * 16) + 6'(i_slot);
    unique case (d.cls)
      C_ST: begin
        ls_req.op    = LS_STORE;
        ls_req.wdata = FLIT_W'(b) << (8 * ea[4:0]);
        ls_req.wmask = ((d.f3 == 3'd3) ? 32'hFF : 32'hF) << ea[4:0];
      end
      C_AMO: begin
        ls_req.op    = LS_AMO;
        ls_req.wdata = FLIT_W'(b) << (8 * ea[4:0]);
        ls_req.wmask = 32'hFF << ea[4:0];
      end
      C_VST: begin
        ls_req.op    = LS_STORE;
        ls_req.wdata = vdo;               // vs3 is in the rd field
        ls_req.wmask = '1;
      end
      default: ls_req.op = LS_LOAD;
    endcase
  end

  // scalar / vector result of the issuing instruction
  logic [63:0]     res;
  logic [VLEN-1:0] vres;
  logic            wr_int, wr_vec;
  logic [63:0]     npc;
  logic        br_t;
  logic [63:0] acc;
  always_comb begin
    res = '0; vres = '0; wr_int = 1'b0; wr_vec = 1'b0; br_t = 1'b0; acc = '0;
    npc = pc[i_slot] + 64'd4;
    unique case (d.cls)
      C_ALU:   begin res = alu(a, b, d.f3, d.alt); wr_int = 1'b1; end
      C_ALUI:  begin res = alu(a, d.imm, d.f3, d.alt); wr_int = 1'b1; end
      C_MUL:   begin res = a * b; wr_int = 1'b1; end
      C_LUI:   begin res = d.imm; wr_int = 1'b1; end
      C_AUIPC: begin res = pc[i_slot] + d.imm; wr_int = 1'b1; end
      C_JAL:   begin res = npc; wr_int = 1'b1; npc = pc[i_slot] + d.imm; end
      C_JALR:  begin res = npc; wr_int = 1'b1; npc = (a + d.imm) & ~64'd1; end
      C_BR: begin
        unique case (d.f3)
          3'd0: br_t = (a == b);
          3'd1: br_t = (a != b);
          3'd4: br_t = ($signed(a) <  $signed(b));
          3'd5: br_t = ($signed(a) >= $signed(b));
          3'd6: br_t = (a <  b);
          default: br_t = (a >= b);
        endcase
        if (br_t) npc = pc[i_slot] + d.imm;
      end
      C_VADDVV: begin for (int e = 0; e < VLMAX64; e++) vres[64*e +: 64] = vb[64*e +: 64] + va[64*e +: 64]; wr_vec = 1'b1; end
      C_VADDVX: begin for (int e = 0; e < VLMAX64; e++) vres[64*e +: 64] = vb[64*e +: 64] + a; wr_vec = 1'b1; end
      C_VMULVV: begin for (int e = 0; e < VLMAX64; e++) vres[64*e +: 64] = vb[64*e +: 64] * va[64*e +: 64]; wr_vec = 1'b1; end
      C_VMVVI:  begin for (int e = 0; e < VLMAX64; e++) vres[64*e +: 64] = d.imm; wr_vec = 1'b1; end
      C_VMVVX:  begin for (int e = 0; e < VLMAX64; e++) vres[64*e +: 64] = a; wr_vec = 1'b1; end
      C_VREDSUM: begin
        acc = va[63:0];
        for (int e = 0; e < VLMAX64; e++) acc += vb[64*e +: 64];
        vres = {vdo[VLEN-1:64], acc};   // tail elements undisturbed
        wr_vec = 1'b1;
      end
      C_VMVXS:  begin res = vb[63:0]; wr_int = 1'b1; end
      C_VSETVL: begin res = 64'(VLMAX64); wr_int = 1'b1; end
      default: ;
    endcase
    if (d.rd == 5'd0) wr_int = 1'b0;
  end

  // memory response write-back
  logic [SW-1:0]   m_slot;
  dec_t            md;
  logic [63:0]     m_word;
  assign m_slot = SW'(ls_rsp.tag[3:0]);
  assign md     = dec[m_slot];
  always_comb begin
    m_word = ls_rsp.rdata[8 * moff[m_slot] +: 64];
    if (md.cls == C_LD && md.f3 == 3'd2) m_word = {{32{m_word[31]}}, m_word[31:0]};
    if (md.cls == C_LD && md.f3 == 3'd6) m_word = {32'd0, m_word[31:0]};
  end

  logic [4:0] n_active;
  always_comb begin
    n_active = '0;
    for (int s = 0; s < SLOTS; s++) n_active += 5'(st[s] != S_FREE);
  end
  assign active_slots = n_active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SLOTS; s++) begin
        st[s] <= S_FREE; pc[s] <= '0; dec[s] <= '0; ibase[s] <= '0; vbase[s] <= '0; moff[s] <= '0;
      end
      f_rr <= '0; i_rr <= '0; ls_stall_q <= 1'b0; thread_done <= 1'b0; retire <= 1'b0; illegal <= 1'b0;
    end else begin
      thread_done <= 1'b0;
      retire      <= 1'b0;
      // spawn: allocate slot and registers, set x1/x2, start at the entry PC
      if (spawn_valid && sp_ok) begin
        st[sp_slot]    <= S_FETCH;
        pc[sp_slot]    <= spawn_pc;
        ibase[sp_slot] <= IRW'(int'(sp_slot) * int'(kdesc.num_int));
        vbase[sp_slot] <= VRW'(int'(sp_slot) * int'(kdesc.num_vec));
        if (kdesc.num_int > 8'd1) irf[IRW'(int'(sp_slot) * int'(kdesc.num_int) + 1)] <= spawn_x1;
        if (kdesc.num_int > 8'd2) irf[IRW'(int'(sp_slot) * int'(kdesc.num_int) + 2)] <= spawn_x2;
      end
      // fetch
      if (f_ok && if_ready) begin
        st[f_slot] <= S_FWAIT;
        f_rr <= f_slot + 1'b1;
      end
      if (if_rsp_valid) begin
        st[SW'(if_rsp_slot)]  <= S_READY;
        dec[SW'(if_rsp_slot)] <= decode(if_rsp_instr, ibase[SW'(if_rsp_slot)], vbase[SW'(if_rsp_slot)]);
      end
      // issue / execute
      ls_stall_q <= ls_valid && !ls_ready;
      if (i_fire) begin
        i_rr   <= i_slot + 1'b1;
        retire <= 1'b1;
        if (d.cls inside {C_LD, C_ST, C_AMO, C_VLD, C_VST}) begin
          st[i_slot]   <= S_MEM;
          moff[i_slot] <= ea[4:0];
        end else if (d.cls == C_EXIT || d.cls == C_ILL) begin
          st[i_slot]  <= S_FREE;
          thread_done <= 1'b1;
          if (d.cls == C_ILL) illegal <= 1'b1;
        end else begin
          st[i_slot] <= S_FETCH;
          pc[i_slot] <= npc;
        end
        if (wr_int) irf[d.prd] <= res;
        if (wr_vec) vrf[d.pvd] <= vres;
      end
      // memory completion
      if (ls_rsp_valid) begin
        st[m_slot] <= S_FETCH;
        pc[m_slot] <= pc[m_slot] + 64'd4;
        if ((md.cls == C_LD || md.cls == C_AMO) && md.rd != 5'd0) irf[md.prd] <= m_word;
        if (md.cls == C_VLD) vrf[md.pvd] <= ls_rsp.rdata;
      end
    end
  end

  // a vector access must be sector aligned
  assert property (@(posedge clk) disable iff (!rst_n)
                   ls_valid && ls_ready && (d.cls inside {C_VLD, C_VST}) |-> ea[4:0] == 5'd0);

endmodule
