// m2ndp_top_tb: end-to-end test of the M2NDP CXL controller at reduced size
// (4 NDP units, 4 memory channels, 16 KB L2 slices, 2 kernel instances).
//
// The testbench plays the host (CXL.mem requests), the host's address
// translation service (page VA -> VA + 16 MB) and the DRAM devices. It
//  1. writes and reads a line through the normal CXL.mem path;
//  2. registers two kernels with M2func calls: the scratchpad reduction of
//     the paper's example (initializer / body / finalizer; the finalizer adds
//     the unit's local sum to the global result once per unit) and a vector
//     add C = A + B with one 32-byte granule per uthread;
//  3. launches the vector add asynchronously and the reduction synchronously,
//     polls both (running / pending), and waits on the synchronous return;
//  4. reads the results back over CXL.mem and compares them with values
//     computed here;
//  5. checks the error returns (unknown kernel, full launch buffer,
//     unprivileged shootdown, second unregister) and a privileged shootdown.
// Every mechanism is counted and a mechanism that never happened is a failure.
module m2ndp_top_tb;
  import m2ndp_pkg::*;
  import rv_asm_pkg::*;

  localparam int NU = 4, NCH = 4;
  localparam logic [63:0] FN_BASE  = 64'h00FF_0000;
  localparam logic [63:0] DRV_BASE = 64'h00FE_0000;
  localparam logic [63:0] CODE_R   = 64'h4000_0000;
  localparam logic [63:0] CODE_V   = 64'h4000_1000;
  localparam logic [63:0] VA_A = 64'h0020_0000, VA_B = 64'h0030_0000, VA_C = 64'h0040_0000;
  localparam logic [63:0] VA_R = 64'h0050_0000;
  localparam logic [63:0] PA_OFF = 64'h0100_0000;
  localparam int N_RED = 2048;   // 64-bit elements reduced (512 uthreads)
  localparam int N_VEC = 512;    // 64-bit elements added (128 uthreads)

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cfg_we = 0, cfg_valid = 0, cfg_priv = 0;
  logic [9:0] cfg_idx = 0;
  logic [63:0] cfg_base = 0, cfg_bound = 0;
  logic [15:0] cfg_asid = 0;
  logic cxl_in_valid = 0, cxl_in_ready, cxl_out_valid, cxl_out_ready;
  cxl_req_t cxl_in;
  cxl_rsp_t cxl_out;
  logic [NU-1:0] ats_valid, ats_rsp_valid;
  logic [51:0] ats_vpn [NU];
  logic [15:0] ats_asid [NU];
  logic [47:0] ats_rsp_ppn [NU];
  logic [NCH-1:0] d_valid, d_we, d_rvalid;
  logic [63:0] d_addr [NCH];
  logic [255:0] d_wdata [NCH], d_rdata [NCH];
  logic ndp_busy;
  logic [7:0] ndp_pending;
  logic [NU-1:0] unit_illegal;
  logic [31:0] st_retired[NU], st_spad[NU], st_threads[NU], st_tlb_miss[NU], st_walks[NU],
               st_ats[NU], st_imiss[NU];
  logic [4:0]  st_max_active[NU];
  logic [31:0] st_l2_hits[NCH], st_l2_miss[NCH], st_l2_amo[NCH], st_row_hits[NCH], st_row_miss[NCH];

  assign cxl_out_ready = 1'b1;

  m2ndp_top #(.NUM_UNITS(NU), .NUM_CH(NCH), .NUM_PROCS(4), .MAX_INST(2), .L2_BYTES(16384)) dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_valid, .cfg_priv, .cfg_base, .cfg_bound, .cfg_asid,
    .dtlb_base(64'h8000_0000), .cxl_in_valid, .cxl_in_ready, .cxl_in, .cxl_out_valid,
    .cxl_out_ready, .cxl_out, .ats_valid, .ats_vpn, .ats_asid, .ats_rsp_valid, .ats_rsp_ppn,
    .d_valid, .d_we, .d_addr, .d_wdata, .d_rvalid, .d_rdata, .ndp_busy, .ndp_pending,
    .unit_illegal, .st_retired, .st_spad, .st_threads, .st_tlb_miss, .st_walks, .st_ats,
    .st_imiss, .st_max_active, .st_l2_hits, .st_l2_miss, .st_l2_amo, .st_row_hits, .st_row_miss);

  dram_model #(.NUM_CH(NCH)) dram (.clk, .d_valid, .d_we, .d_addr, .d_wdata, .d_rvalid, .d_rdata);

  // host address translation service
  always_ff @(posedge clk) begin
    for (int u = 0; u < NU; u++) begin
      ats_rsp_valid[u] <= ats_valid[u] && !ats_rsp_valid[u];
      ats_rsp_ppn[u]   <= 48'(ats_vpn[u]) + 48'(PA_OFF >> 12);
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] tag = 0;
  task automatic cxl(input bit wr, input logic [63:0] a, input logic [511:0] d,
                     output logic [511:0] q);
    cxl_in <= '{is_wr: wr, addr: a, data: d, tag: tag};
    cxl_in_valid <= 1'b1;
    @(posedge clk);
    while (!cxl_in_ready) @(posedge clk);
    cxl_in_valid <= 1'b0;
    while (!(cxl_out_valid && cxl_out.tag == tag)) @(posedge clk);
    q = cxl_out.data;
    check(cxl_out.is_wr == wr, "response kind");
    tag++;
    @(posedge clk);
  endtask
  task automatic fn_call(input logic [63:0] base, input int fn, input logic [63:0] w [8],
                         output logic [63:0] ret);
    logic [511:0] d, q;
    for (int i = 0; i < 8; i++) d[64*i +: 64] = w[i];
    cxl(1, base + 64'(fn << 5), d, q);
    cxl(0, base + 64'(fn << 5), '0, q);
    ret = q[63:0];
  endtask
  task automatic fn_write(input logic [63:0] base, input int fn, input logic [63:0] w [8]);
    logic [511:0] d, q;
    for (int i = 0; i < 8; i++) d[64*i +: 64] = w[i];
    cxl(1, base + 64'(fn << 5), d, q);
  endtask
  task automatic fn_read(input logic [63:0] base, input int fn, output logic [63:0] ret);
    logic [511:0] q;
    cxl(0, base + 64'(fn << 5), '0, q);
    ret = q[63:0];
  endtask
  task automatic poll(input logic [63:0] id, output logic [63:0] st);
    logic [63:0] w [8];
    w = '{default: 0};
    w[0] = id;
    fn_call(FN_BASE, 3, w, st);
  endtask

  task automatic put_code(input logic [63:0] a, input logic [31:0] p []);
    for (int i = 0; i < p.size(); i++) dram.poke32(a + 64'(4 * i), p[i]);
  endtask

  logic [63:0] exp_sum;
  logic [63:0] w [8];
  logic [63:0] r, kid_r, kid_v, id_v, id_r, s;
  logic [511:0] q;
  longint t_sync_ret, t_busy_end;
  int n_pending = 0, n_running = 0, n_finished = 0, n_err = 0, n_sync_wait = 0;

  always @(posedge clk) if (ndp_busy) t_busy_end = $time;

  initial begin
    logic [31:0] kr_init [], kr_body [], kr_fin [], kv_body [];
    // kernels
    kr_init = '{lui(3, 32'h10000), sd(0, 3, 0), ebreak()};
    kr_body = '{vle64(2, 1), vmv_v_i(1, 0), vredsum_vs(3, 2, 1), vmv_x_s(4, 3),
                lui(3, 32'h10000), amoadd_d(4, 4, 3), ebreak()};
    kr_fin  = '{andi(6, 2, 63), bne(6, 0, 20), lui(3, 32'h10000), ld(4, 3, 0), ld(5, 3, 8),
                amoadd_d(4, 4, 5), ebreak()};
    kv_body = '{lui(3, 32'h10000), ld(4, 3, 0), ld(5, 3, 8), add(4, 4, 2), add(5, 5, 2),
                vle64(1, 1), vle64(2, 4), vadd_vv(3, 1, 2), vse64(3, 5), ebreak()};
    put_code(CODE_R, kr_init);
    put_code(CODE_R + 64'h100, kr_body);
    put_code(CODE_R + 64'h200, kr_fin);
    put_code(CODE_V, kv_body);
    exp_sum = 0;
    for (int i = 0; i < N_RED; i++) begin
      dram.poke64(VA_A + PA_OFF + 64'(8 * i), 64'(i * 3 + 1));
      exp_sum += 64'(i * 3 + 1);
    end
    for (int i = 0; i < N_VEC; i++) dram.poke64(VA_B + PA_OFF + 64'(8 * i), 64'(1000 * i));
    dram.poke64(VA_R + PA_OFF, 64'd5);   // the global sum starts at 5

    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // packet filter: process (ASID 7) and the driver's privileged region
    cfg_we <= 1; cfg_idx <= 0; cfg_valid <= 1; cfg_priv <= 0;
    cfg_base <= FN_BASE; cfg_bound <= FN_BASE + 64'hFFFF; cfg_asid <= 16'h07;
    @(posedge clk);
    cfg_idx <= 1; cfg_priv <= 1; cfg_base <= DRV_BASE; cfg_bound <= DRV_BASE + 64'hFFFF;
    cfg_asid <= 16'h00;
    @(posedge clk);
    cfg_we <= 0;

    $display("[%0t] 1. normal", $time);
    // 1. normal CXL.mem traffic
    cxl(1, 64'h3000_0040, {8{64'hDEAD_BEEF_0000_0001}}, q);
    cxl(0, 64'h3000_0040, '0, q);
    check(q == {8{64'hDEAD_BEEF_0000_0001}}, "normal write/read through the packet filter");

    $display("[%0t] 2. registration", $time);
    // 2. registration
    w = '{CODE_R, 64'd16, 64'd7, 64'd0, 64'd4, 64'd3, 64'h100, 64'h200};
    fn_call(FN_BASE, 0, w, kid_r);
    check(kid_r == 0, "first kernel id");
    w = '{CODE_V, 64'd16, 64'd6, 64'd0, 64'd4, 64'd0, 64'd0, 64'd0};
    fn_call(FN_BASE, 0, w, kid_v);
    check(kid_v == 1, "second kernel id");

    $display("[%0t] 3. launches", $time);
    // 3. launches
    w = '{64'd0, kid_v, VA_A, VA_A + 64'(8 * N_VEC) - 1, 64'd16, VA_B, VA_C, 64'd0};
    fn_call(FN_BASE, 2, w, id_v);
    check(id_v == 0, "async launch returns the instance id");
    w = '{64'd1, kid_r, VA_A, VA_A + 64'(8 * N_RED) - 1, 64'd16, 64'd0, VA_R, 64'd0};
    fn_write(FN_BASE, 2, w);
    // third launch: the two-entry buffer is full
    w = '{64'd0, kid_v, VA_A, VA_A + 64'hFF, 64'd16, VA_B, VA_C, 64'd0};
    fn_call(FN_BASE, 2, w, r);
    if (r == ERR) n_err++;
    check(r == ERR, "launch with a full buffer returns ERR");
    // the reduction (instance 1) waits behind the running vector add
    poll(id_v, s);
    if (s == ST_RUNNING) n_running++;
    check(s == ST_RUNNING, "vector add running");
    poll(64'd1, s);
    if (s == ST_PENDING) n_pending++;
    check(s == ST_PENDING, "reduction pending behind the vector add");
    // the process's last launch call was the rejected one, so reading the
    // launch offset returns ERR at once (no synchronous wait)
    fn_read(FN_BASE, 2, r);
    check(r == ERR, "launch return value is that of the latest call");
    // poll the reduction until it has finished
    poll(64'd1, s);
    while (s != ST_FINISHED) begin
      if (s == ST_RUNNING) n_running++;
      repeat (50) @(posedge clk);
      poll(64'd1, s);
    end
    n_finished++;
    poll(id_v, s);
    check(s == ST_FINISHED, "vector add finished");
    if (s == ST_FINISHED) n_finished++;
    poll(id_v, s);
    check(s == ERR, "a finished instance is freed once reported");

    exp_sum = exp_sum + 64'd5;
    cxl(0, VA_R + PA_OFF, '0, q);
    check(q[63:0] == exp_sum, $sformatf("reduction result %0d expected %0d", q[63:0], exp_sum));
    for (int i = 0; i < N_VEC; i += 8) begin
      cxl(0, VA_C + PA_OFF + 64'(8 * i), '0, q);
      for (int e = 0; e < 8; e++)
        check(q[64*e +: 64] == 64'((i + e) * 3 + 1) + 64'(1000 * (i + e)),
              $sformatf("C[%0d] = %0d", i + e, q[64*e +: 64]));
    end

    // synchronous launch: the read waits for the end of the kernel
    dram.poke64(VA_R + PA_OFF + 64'h40, 64'd0);
    w = '{64'd1, kid_r, VA_A, VA_A + 64'(8 * N_RED) - 1, 64'd16, 64'd0, VA_R + 64'h40, 64'd0};
    fn_write(FN_BASE, 2, w);
    fn_read(FN_BASE, 2, id_r);
    t_sync_ret = $time;
    check(id_r != ERR, "synchronous launch accepted");
    check(!ndp_busy && t_sync_ret > t_busy_end, "synchronous return after the kernel ended");
    if (t_sync_ret > t_busy_end) n_sync_wait++;
    cxl(0, VA_R + PA_OFF + 64'h40, '0, q);
    check(q[63:0] == exp_sum - 64'd5, "second reduction result");

    $display("[%0t] 5. errors", $time);
    // 5. errors, unregister, shootdown
    w = '{64'd0, 64'd9, VA_A, VA_A + 64'hFF, 64'd0, 64'd0, 64'd0, 64'd0};
    fn_call(FN_BASE, 2, w, r);
    check(r == ERR, "launch of an unregistered kernel returns ERR");
    if (r == ERR) n_err++;
    w = '{64'd7, 64'h200, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0};
    fn_call(FN_BASE, 4, w, r);
    check(r == ERR, "shootdown from a user region is refused");
    fn_call(DRV_BASE, 4, w, r);
    check(r == 0, "privileged shootdown");
    w = '{kid_v, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0};
    fn_call(FN_BASE, 1, w, r);
    check(r == 0, "unregister");
    fn_call(FN_BASE, 1, w, r);
    check(r == ERR, "second unregister returns ERR");

    $display("[%0t] mechanisms", $time);
    // mechanisms
    begin
      int thr = 0, walks = 0, ats = 0, spad = 0, imiss = 0, l2h = 0, l2m = 0, amo = 0,
          rh = 0, rm = 0, maxact = 0, tlbm = 0;
      for (int u = 0; u < NU; u++) begin
        thr += st_threads[u]; walks += st_walks[u]; ats += st_ats[u]; spad += st_spad[u];
        imiss += st_imiss[u]; tlbm += st_tlb_miss[u];
        if (st_max_active[u] > maxact) maxact = st_max_active[u];
      end
      for (int c = 0; c < NCH; c++) begin
        l2h += st_l2_hits[c]; l2m += st_l2_miss[c]; amo += st_l2_amo[c];
        rh += st_row_hits[c]; rm += st_row_miss[c];
      end
      $display("threads=%0d tlb_miss=%0d walks=%0d ats=%0d spad=%0d imiss=%0d l2 hit/miss=%0d/%0d amo=%0d row hit/miss=%0d/%0d max_active=%0d",
               thr, tlbm, walks, ats, spad, imiss, l2h, l2m, amo, rh, rm, maxact);
      $display("pending=%0d running=%0d finished=%0d errors=%0d sync_wait=%0d",
               n_pending, n_running, n_finished, n_err, n_sync_wait);
      check(thr > NU * 4 * 16, "slots reused: more uthreads than slots");
      check(walks > ats && ats > 0, "DRAM-TLB hits and ATS requests both happened");
      check(tlbm > 0, "on-chip TLB misses");
      check(spad > 0, "scratchpad accesses");
      check(imiss > 0, "instruction cache misses");
      check(l2h > 0 && l2m > 0, "L2 hits and misses");
      check(amo > 0, "global atomics at the L2");
      check(rh > 0 && rm > 0, "DRAM row hits and misses");
      check(n_pending > 0 && n_running > 0 && n_finished > 0, "pending / running / finished");
      check(n_err >= 2 && n_sync_wait > 0, "error returns and a synchronous wait");
      check(unit_illegal == 0, "no illegal instruction");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
