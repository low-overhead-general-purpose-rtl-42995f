// dram_tlb_walker_tb: the DRAM-TLB walker of one NDP unit. Random misses
// (VPN, ASID) are handed to the walker; a memory model holds the DRAM-TLB
// table and a host model answers address translation requests. Checks the
// entry address (base + 16 x hash of VPN and ASID), that a table hit needs
// no host request, that a miss asks the host once and writes the entry
// back in the 16-byte layout, and that the TLB fill carries the right
// translation. The expected table contents are tracked here, including
// entries that overwrite each other at the same index.
module dram_tlb_walker_tb;
  import m2ndp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [63:0] BASE = 64'h8000_0000;
  logic miss_valid = 0, busy, m_valid, m_ready, m_rsp_valid = 0, fill_valid;
  logic [51:0] miss_vpn = 0, fill_vpn, ats_vpn;
  logic [15:0] miss_asid = 0, fill_asid, ats_asid;
  logic [47:0] fill_ppn, ats_rsp_ppn;
  logic ats_valid, ats_rsp_valid;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  logic [31:0] walks, ats_requests;

  dram_tlb_walker #(.SRC_PORT(6'd3)) dut (.clk, .rst_n, .dtlb_base(BASE), .miss_valid,
    .miss_vpn, .miss_asid, .busy, .m_valid, .m_ready, .m_req, .m_rsp_valid, .m_rsp,
    .fill_valid, .fill_vpn, .fill_asid, .fill_ppn, .ats_valid, .ats_vpn, .ats_asid,
    .ats_rsp_valid, .ats_rsp_ppn, .walks, .ats_requests);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic logic [47:0] xlate(input logic [51:0] v, input logic [15:0] a);
    return 48'(v) * 48'd7 + 48'(a) * 48'h10000 + 48'h123;
  endfunction
  function automatic logic [19:0] hidx(input logic [51:0] v, input logic [15:0] a);
    logic [63:0] h;
    h = 64'(v) ^ (64'(v) >> 20) ^ (64'(a) << 4);
    return h[19:0];
  endfunction

  // memory model
  logic [255:0] mem [logic [58:0]];
  int ats_seen = 0, mreads = 0, mwrites = 0;
  logic [63:0] last_rd;
  always @(posedge clk) begin
    m_rsp_valid <= 1'b0;
    ats_rsp_valid <= 1'b0;
    if (m_valid && m_ready) begin
      logic [255:0] s;
      s = mem.exists(m_req.addr[63:5]) ? mem[m_req.addr[63:5]] : '0;
      m_rsp_valid <= 1'b1;
      m_rsp.id    <= m_req.id;
      m_rsp.rdata <= s;
      if (m_req.op == MEM_WR) begin
        for (int i = 0; i < 32; i++) if (m_req.wmask[i]) s[8*i +: 8] = m_req.wdata[8*i +: 8];
        mem[m_req.addr[63:5]] = s;
        mwrites++;
      end else begin
        mreads++;
        last_rd = m_req.addr;
      end
    end
    if (ats_valid && !ats_rsp_valid) begin
      ats_rsp_valid <= 1'b1;
      ats_rsp_ppn   <= xlate(ats_vpn, ats_asid);
      ats_seen++;
    end
  end
  always @(negedge clk) m_ready = $urandom % 2;

  // expected table: index -> (vpn, asid)
  logic [67:0] tab [logic [19:0]];
  int exp_ats = 0, n_hit = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      logic [51:0] v;
      logic [15:0] a;
      logic [19:0] ix;
      bit tab_hit;
      int a0;
      v = 52'($urandom % 200);
      a = 16'($urandom % 3);
      ix = hidx(v, a);
      tab_hit = tab.exists(ix) && tab[ix] == {a, v};
      a0 = ats_seen;
      @(negedge clk);
      check(!busy, "idle between walks");
      miss_valid = 1; miss_vpn = v; miss_asid = a;
      @(negedge clk);
      miss_valid = 0;
      check(busy, "busy after a miss");
      while (!fill_valid) @(negedge clk);
      check(fill_vpn == v && fill_asid == a && fill_ppn == xlate(v, a),
            $sformatf("fill of vpn %0d asid %0d", v, a));
      check(last_rd == ((BASE + (64'(ix) << 4)) & ~64'h1F), "entry address from the hash");
      if (tab_hit) begin check(ats_seen == a0, "table hit: no host request"); n_hit++; end
      else begin
        check(ats_seen == a0 + 1, "table miss: one host request");
        exp_ats++;
        begin
          logic [255:0] s;
          logic [127:0] e;
          s = mem[(BASE + (64'(ix) << 4)) >> 5];
          e = s[128 * ix[0] +: 128];
          check(e == {a, xlate(v, a), 1'b1, 11'b0, v}, "entry written back");
        end
      end
      tab[ix] = {a, v};
    end
    check(walks == 600 && ats_requests == 32'(exp_ats), "walk and host request counters");
    check(n_hit > 100 && exp_ats > 100, "table hits and misses both happened");
    $display("walks=%0d ats=%0d table hits=%0d", walks, ats_requests, n_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
