// dram_tlb_walker: refills the on-chip TLB of an NDP unit from the DRAM-TLB,
// a large translation table kept in the CXL memory itself.
//
// A DRAM-TLB entry is 16 bytes. Its location is computed from a hash of the
// virtual page number and the ASID and from the DRAM-TLB base address of this
// CXL memory, so all NDP units of the memory share the same entries:
//   idx  = (vpn ^ (vpn >> IDX_BITS) ^ (asid << 4)) mod 2^IDX_BITS
//   addr = dtlb_base + 16 * idx
// Entry layout (this design's choice): word0 = {valid, 11'b0, vpn[51:0]},
// word1 = {asid[15:0], ppn[47:0]}. On a TLB miss the walker reads the
// 32-byte sector holding the entry; if the entry's valid bit, VPN and ASID
// match it refills the TLB. Otherwise it asks the host's address translation
// service (a port of this block, the host side is not part of the design),
// writes the answer into the DRAM-TLB entry and then refills the TLB.
// One walk at a time. The hashed placement and the 16-byte entry follow the
// paper; the hash function, layout and ATS handshake are assumed.
module dram_tlb_walker
  import m2ndp_pkg::*;
#(
  parameter int unsigned IDX_BITS = 20,
  parameter logic [5:0]  SRC_PORT = 6'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] dtlb_base,
  input  logic        miss_valid,
  input  logic [51:0] miss_vpn,
  input  logic [15:0] miss_asid,
  output logic        busy,
  output logic        m_valid,
  input  logic        m_ready,
  output mem_req_t    m_req,
  input  logic        m_rsp_valid,
  input  mem_rsp_t    m_rsp,
  output logic        fill_valid,
  output logic [51:0] fill_vpn,
  output logic [15:0] fill_asid,
  output logic [47:0] fill_ppn,
  output logic        ats_valid,
  output logic [51:0] ats_vpn,
  output logic [15:0] ats_asid,
  input  logic        ats_rsp_valid,
  input  logic [47:0] ats_rsp_ppn,
  output logic [31:0] walks,
  output logic [31:0] ats_requests
);

  typedef enum logic [2:0] {W_IDLE, W_RD, W_RWAIT, W_ATS, W_WB, W_WWAIT, W_FILL} wst_e;
  wst_e        st;
  logic [51:0] vpn;
  logic [15:0] asid;
  logic [47:0] ppn;
  logic [63:0] eaddr;

  function automatic logic [63:0] entry_addr(input logic [63:0] base, input logic [51:0] v,
                                             input logic [15:0] as);
    logic [63:0] h;
    h = 64'(v) ^ (64'(v) >> IDX_BITS) ^ (64'(as) << 4);
    return base + ((h & ((64'd1 << IDX_BITS) - 1)) << 4);
  endfunction

  logic [127:0] ent;
  assign ent = m_rsp.rdata[128 * eaddr[4] +: 128];

  assign busy      = (st != W_IDLE);
  assign m_valid   = (st == W_RD) || (st == W_WB);
  assign ats_valid = (st == W_ATS);
  assign ats_vpn   = vpn;
  assign ats_asid  = asid;
  assign fill_valid = (st == W_FILL);
  assign fill_vpn   = vpn;
  assign fill_asid  = asid;
  assign fill_ppn   = ppn;

  always_comb begin
    m_req       = '0;
    m_req.addr  = {eaddr[63:5], 5'b0};
    m_req.id    = {SRC_PORT, SRC_WALK, 8'd0};
    m_req.op    = (st == W_WB) ? MEM_WR : MEM_RD;
    m_req.wdata = FLIT_W'({asid, ppn, 1'b1, 11'b0, vpn}) << (128 * eaddr[4]);
    m_req.wmask = 32'h0000_FFFF << (16 * eaddr[4]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; vpn <= '0; asid <= '0; ppn <= '0; eaddr <= '0;
      walks <= '0; ats_requests <= '0;
    end else begin
      unique case (st)
        W_IDLE: if (miss_valid) begin
          vpn   <= miss_vpn;
          asid  <= miss_asid;
          eaddr <= entry_addr(dtlb_base, miss_vpn, miss_asid);
          walks <= walks + 1'b1;
          st    <= W_RD;
        end
        W_RD:    if (m_ready) st <= W_RWAIT;
        W_RWAIT: if (m_rsp_valid) begin
          if (ent[63] && ent[51:0] == vpn && ent[127:112] == asid) begin
            ppn <= ent[111:64];
            st  <= W_FILL;
          end else begin
            ats_requests <= ats_requests + 1'b1;
            st <= W_ATS;
          end
        end
        W_ATS:   if (ats_rsp_valid) begin ppn <= ats_rsp_ppn; st <= W_WB; end
        W_WB:    if (m_ready) st <= W_WWAIT;
        W_WWAIT: if (m_rsp_valid) st <= W_FILL;
        W_FILL:  st <= W_IDLE;
        default: st <= W_IDLE;
      endcase
    end
  end

endmodule
