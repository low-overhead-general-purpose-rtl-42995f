// icache: the L1 instruction cache of an NDP unit, shared by its sub-cores.
//
// Direct-mapped, SIZE_BYTES in LINE = 32-byte lines (one memory sector), read
// only. One fetch is looked up per cycle, the ports being served round-robin;
// a hit answers the next cycle with the 32-bit instruction, a miss reads the
// line through the unit's memory port and stalls further lookups until it is
// filled (blocking). `flush` invalidates every line; the NDP controller raises
// it when a kernel is unregistered so that no stale code is executed.
// The 2 KB size and the flush rule follow the paper; direct mapping and the
// blocking miss are this design's choices. Code addresses are used as
// physical addresses (no instruction TLB).
module icache
  import m2ndp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 2048,
  parameter int unsigned NPORTS     = 4,
  parameter logic [5:0]  SRC_PORT   = 6'd0   // id[15:10] of this cache's requests
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic [NPORTS-1:0] f_valid,
  output logic [NPORTS-1:0] f_ready,
  input  logic [63:0]       f_pc   [NPORTS],
  input  logic [3:0]        f_tag  [NPORTS],
  output logic [NPORTS-1:0] r_valid,
  output logic [3:0]        r_tag,
  output logic [31:0]       r_instr,
  // memory
  output logic              m_valid,
  input  logic              m_ready,
  output mem_req_t          m_req,
  input  logic              m_rsp_valid,
  input  mem_rsp_t          m_rsp,
  output logic [31:0]       misses
);

  localparam int unsigned LINES = SIZE_BYTES / FLIT_BYTES;
  localparam int unsigned LW    = $clog2(LINES);
  localparam int unsigned PW    = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  logic [FLIT_W-1:0] data  [LINES];
  logic [63:0]       tagm  [LINES];   // line address
  logic              valid [LINES];

  typedef enum logic [1:0] {C_RUN, C_MISS, C_WAIT} cst_e;
  cst_e          st;
  logic [PW-1:0] rr, sel, mport;
  logic          sel_ok;
  logic [63:0]   mpc;
  logic [3:0]    mtag;

  always_comb begin
    sel_ok = 1'b0; sel = '0;
    for (int j = NPORTS - 1; j >= 0; j--) begin
      int unsigned p;
      p = (int'(rr) + j) % NPORTS;
      if (f_valid[p]) begin sel_ok = 1'b1; sel = PW'(p); end
    end
  end

  logic [LW-1:0] idx;
  logic          hit;
  assign idx = f_pc[sel][5 +: LW];
  assign hit = valid[idx] && tagm[idx] == (f_pc[sel] >> 5);

  always_comb begin
    f_ready = '0;
    if (st == C_RUN && sel_ok) f_ready[sel] = 1'b1;
  end

  assign m_valid = (st == C_MISS);
  always_comb begin
    m_req       = '0;
    m_req.op    = MEM_RD;
    m_req.addr  = {mpc[63:5], 5'b0};
    m_req.id    = {SRC_PORT, SRC_IFU, 8'(mport)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_RUN; rr <= '0; mport <= '0; mpc <= '0; mtag <= '0;
      r_valid <= '0; r_tag <= '0; r_instr <= '0; misses <= '0;
      for (int l = 0; l < LINES; l++) begin valid[l] <= 1'b0; tagm[l] <= '0; end
    end else begin
      r_valid <= '0;
      unique case (st)
        C_RUN: if (sel_ok) begin
          rr <= (int'(sel) == NPORTS - 1) ? '0 : sel + 1'b1;
          if (hit) begin
            r_valid[sel] <= 1'b1;
            r_tag        <= f_tag[sel];
            r_instr      <= data[idx][32*f_pc[sel][4:2] +: 32];
          end else begin
            st <= C_MISS; mport <= sel; mpc <= f_pc[sel]; mtag <= f_tag[sel];
            misses <= misses + 1'b1;
          end
        end
        C_MISS: if (m_ready) st <= C_WAIT;
        C_WAIT: if (m_rsp_valid) begin
          data[mpc[5 +: LW]]  <= m_rsp.rdata;
          tagm[mpc[5 +: LW]]  <= mpc >> 5;
          valid[mpc[5 +: LW]] <= 1'b1;
          r_valid[mport] <= 1'b1;
          r_tag          <= mtag;
          r_instr        <= m_rsp.rdata[32*mpc[4:2] +: 32];
          st <= C_RUN;
        end
        default: st <= C_RUN;
      endcase
      if (flush) for (int l = 0; l < LINES; l++) valid[l] <= 1'b0;
    end
  end

endmodule
