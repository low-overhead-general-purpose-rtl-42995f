// ndp_unit_tb: one NDP unit (generator, four sub-cores, instruction cache,
// scratchpad, data TLB and DRAM-TLB walker) as the only unit of the device,
// with a memory model behind its memory port (random delays, responses in
// any order, back-pressure honoured) and a host translation model
// (physical page = virtual page + 0x1000). It runs the paper's scratchpad
// reduction kernel: the initializer zeroes the local sum, each body
// uthread reduces one 32-byte granule with the vector unit and adds it to
// the scratchpad sum atomically, and the finalizer adds the sum to the
// global result (pointer passed as argument word 1). The kernel runs twice,
// with a TLB shootdown between, and the result is checked each time along
// with the unit's counters (walks, host requests, scratchpad accesses,
// instruction misses, uthreads).
module ndp_unit_tb;
  import m2ndp_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic gen_start = 0, gen_done, arg_we = 0, icache_flush = 0, sd_valid = 0;
  launch_cmd_t gen_cmd;
  logic [1:0] arg_idx = 0;
  logic [63:0] arg_data = 0;
  logic [15:0] sd_asid = 0;
  logic [51:0] sd_vpn = 0;
  logic m_valid, m_ready, m_rsp_valid, m_rsp_ready, ats_valid, ats_rsp_valid, illegal;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  logic [51:0] ats_vpn;
  logic [15:0] ats_asid;
  logic [47:0] ats_rsp_ppn;
  logic [31:0] st_retired, st_spad, st_tlb_miss, st_walks, st_ats, st_imiss, st_threads;
  logic [4:0] st_max_active;

  ndp_unit #(.NUM_UNITS(1)) dut (.clk, .rst_n, .gen_start, .gen_cmd, .gen_done, .arg_we,
    .arg_idx, .arg_data, .icache_flush, .sd_valid, .sd_asid, .sd_vpn,
    .dtlb_base(64'h8000_0000), .m_valid, .m_ready, .m_req, .m_rsp_valid, .m_rsp_ready, .m_rsp,
    .ats_valid, .ats_vpn, .ats_asid, .ats_rsp_valid, .ats_rsp_ppn, .st_retired, .st_spad,
    .st_tlb_miss, .st_walks, .st_ats, .st_imiss, .st_threads, .st_max_active, .illegal);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic [255:0] mem [logic [58:0]];
  function automatic logic [255:0] rs(input logic [63:0] a);
    return mem.exists(a[63:5]) ? mem[a[63:5]] : '0;
  endfunction
  function automatic void wr64(input logic [63:0] a, input logic [63:0] v);
    logic [255:0] s;
    s = rs(a); s[64*a[4:3] +: 64] = v; mem[a[63:5]] = s;
  endfunction
  function automatic void wr32(input logic [63:0] a, input logic [31:0] v);
    logic [255:0] s;
    s = rs(a); s[32*a[4:2] +: 32] = v; mem[a[63:5]] = s;
  endfunction

  // memory model: requests executed on arrival, answered after 2..20 cycles
  typedef struct { mem_rsp_t r; int t; } pend_t;
  pend_t pq [$];
  int cyc = 0, n_req = 0, n_amo = 0, max_q = 0;
  always @(negedge clk) m_ready = ($urandom % 5) != 0;
  assign m_rsp_valid = pq.size() > 0 && pq[0].t <= cyc;
  assign m_rsp = (pq.size() > 0) ? pq[0].r : '0;
  always @(posedge clk) begin
    cyc++;
    if (m_rsp_valid && m_rsp_ready) void'(pq.pop_front());
    // reorder: a random pending response may move to the front
    if (pq.size() > 1 && $urandom % 4 == 0) begin
      pend_t x;
      int k;
      k = 1 + int'($urandom % (pq.size() - 1));
      x = pq[k]; pq.delete(k); pq.push_front(x);
    end
    if (rst_n && m_valid && m_ready) begin
      logic [255:0] s, u;
      pend_t p;
      s = rs(m_req.addr); u = s;
      if (m_req.op == MEM_WR)
        for (int i = 0; i < 32; i++) begin if (m_req.wmask[i]) u[8*i +: 8] = m_req.wdata[8*i +: 8]; end
      else if (m_req.op == MEM_AMOADD) begin
        u[64*m_req.addr[4:3] +: 64] = s[64*m_req.addr[4:3] +: 64] + m_req.wdata[64*m_req.addr[4:3] +: 64];
        n_amo++;
      end
      mem[m_req.addr[63:5]] = u;
      p.r = '{rdata: s, id: m_req.id};
      p.t = cyc + 2 + int'($urandom % 18);
      pq.push_back(p);
      n_req++;
      if (pq.size() > max_q) max_q = pq.size();
    end
  end
  always @(posedge clk) begin
    ats_rsp_valid <= ats_valid && !ats_rsp_valid;
    ats_rsp_ppn   <= 48'(ats_vpn) + 48'h1000;
  end

  localparam logic [63:0] CODE = 64'h4000_0000, VA = 64'h0020_0000, RES = 64'h0050_0000;
  localparam logic [63:0] OFF = 64'h0100_0000;
  localparam int N = 4096;   // elements: 1024 uthreads

  task automatic run_kernel(input logic [63:0] res_va, output int cycles);
    int t0;
    @(negedge clk);
    arg_we = 1; arg_idx = 1; arg_data = res_va;
    @(negedge clk);
    arg_we = 0;
    gen_cmd = '0;
    gen_cmd.k.init_pc = CODE; gen_cmd.k.body_pc = CODE + 64'h100; gen_cmd.k.final_pc = CODE + 64'h200;
    gen_cmd.k.has_init = 1; gen_cmd.k.has_final = 1;
    gen_cmd.k.num_int = 8'd7; gen_cmd.k.num_vec = 8'd4; gen_cmd.k.asid = 16'd7;
    gen_cmd.pool_base = VA; gen_cmd.pool_bound = VA + 64'(8 * N) - 1;
    gen_start = 1;
    t0 = cyc;
    @(negedge clk);
    gen_start = 0;
    while (!gen_done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  logic [63:0] exp_sum;
  int cyc1, w1, a1;

  initial begin
    logic [31:0] ki [], kb [], kf [];
    ki = '{lui(3, 32'h10000), sd(0, 3, 0), ebreak()};
    kb = '{vle64(2, 1), vmv_v_i(1, 0), vredsum_vs(3, 2, 1), vmv_x_s(4, 3),
           lui(3, 32'h10000), amoadd_d(4, 4, 3), ebreak()};
    kf = '{andi(6, 2, 63), bne(6, 0, 20), lui(3, 32'h10000), ld(4, 3, 0), ld(5, 3, 8),
           amoadd_d(4, 4, 5), ebreak()};
    foreach (ki[i]) wr32(CODE + 64'(4 * i), ki[i]);
    foreach (kb[i]) wr32(CODE + 64'h100 + 64'(4 * i), kb[i]);
    foreach (kf[i]) wr32(CODE + 64'h200 + 64'(4 * i), kf[i]);
    exp_sum = 0;
    for (int i = 0; i < N; i++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      wr64(VA + OFF + 64'(8 * i), v);
      exp_sum += v;
    end
    wr64(RES + OFF, 64'd11);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_kernel(RES, cyc1);
    check(rs(RES + OFF)[63:0] == exp_sum + 64'd11, "reduction result");
    check(st_threads == 64 + 1024 + 64, $sformatf("uthreads %0d", st_threads));
    check(st_max_active == 5'd16 || st_max_active > 5'd8, "slots filled");
    check(st_ats > 0 && st_walks >= st_ats, "walks and host requests");
    check(st_imiss > 0 && st_spad > 0 && n_amo > 0, "instruction misses, scratchpad, atomics");
    check(max_q > 2, "several memory requests in flight");
    w1 = st_walks; a1 = st_ats;
    // shootdown of the result page, then run again: one more walk, found in the DRAM-TLB
    @(negedge clk);
    sd_valid = 1; sd_asid = 16'd7; sd_vpn = RES[63:12];
    @(negedge clk);
    sd_valid = 0;
    run_kernel(RES, cyc1);
    check(rs(RES + OFF)[63:0] == 2 * exp_sum + 64'd11, "second reduction result");
    check(st_walks == w1 + 1 && st_ats == a1, "after a shootdown the page is walked again and found in DRAM");
    check(!illegal, "no illegal instruction");
    $display("cycles=%0d retired=%0d walks=%0d ats=%0d spad=%0d imiss=%0d threads=%0d",
             cyc1, st_retired, st_walks, st_ats, st_spad, st_imiss, st_threads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
