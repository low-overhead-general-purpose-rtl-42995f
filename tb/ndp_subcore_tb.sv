// ndp_subcore_tb: one NDP sub-core with 16 uthread slots, an instruction
// memory model behind the fetch port and a data memory model behind the
// load/store port (both answer after random delays). Thirty-two uthreads
// run one program that uses the scalar ALU, multiply, a counted loop,
// 64- and 32-bit loads and stores, a global atomic add, and the vector unit
// (unit-stride 256-bit load and store, add, multiply, splat, reduction and
// move to a scalar register). Each uthread gets its own granule in x1 and
// its id in x2; renaming gives each slot its own registers. The results in
// memory are compared with values computed here. Also checks the slot
// limit, one done pulse per uthread, the retire count and that an illegal
// instruction ends its uthread and raises the illegal flag.
module ndp_subcore_tb;
  import m2ndp_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  kernel_desc_t kdesc;
  logic [4:0] usable_slots, active_slots;
  logic spawn_valid = 0, spawn_ready, thread_done, if_valid, if_ready, if_rsp_valid;
  logic [63:0] spawn_pc = 0, spawn_x1 = 0, spawn_x2 = 0, if_pc;
  logic [3:0] if_slot, if_rsp_slot;
  logic [31:0] if_rsp_instr;
  logic ls_valid, ls_ready, ls_rsp_valid, retire, illegal;
  ls_req_t ls_req;
  ls_rsp_t ls_rsp;

  ndp_subcore dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  localparam logic [63:0] PC0 = 64'h4000_0000, PC_ILL = 64'h4000_0800;
  localparam logic [63:0] DBASE = 64'h0100_0000, CNT = 64'h2000_0000;
  logic [31:0] imem [logic [63:0]];
  logic [255:0] dmem [logic [58:0]];

  // instruction memory: one fetch at a time, 1..3 cycles
  int fdly;
  logic fbusy;
  logic [3:0] fslot;
  logic [63:0] fpc;
  always @(posedge clk) begin
    if_rsp_valid <= 1'b0;
    if (!rst_n) fbusy <= 1'b0;
    else if (fbusy) begin
      if (fdly == 0) begin
        if_rsp_valid <= 1'b1; if_rsp_slot <= fslot;
        if_rsp_instr <= imem.exists(fpc) ? imem[fpc] : 32'h0;
        fbusy <= 1'b0;
      end else fdly <= fdly - 1;
    end else if (if_valid && if_ready) begin
      fbusy <= 1'b1; fslot <= if_slot; fpc <= if_pc; fdly <= $urandom % 3;
    end
  end
  assign if_ready = !fbusy;

  // data memory: in-order queue, random delay
  typedef struct { ls_rsp_t r; int t; } pend_t;
  pend_t pq [$];
  int cyc = 0, n_ld = 0, n_st = 0, n_amo = 0, n_vec = 0;
  always @(negedge clk) ls_ready = ($urandom % 4) != 0;
  always @(posedge clk) begin
    cyc++;
    ls_rsp_valid <= 1'b0;
    if (pq.size() > 0 && pq[0].t <= cyc) begin
      ls_rsp_valid <= 1'b1;
      ls_rsp <= pq[0].r;
      void'(pq.pop_front());
    end
    if (rst_n && ls_valid && ls_ready) begin
      logic [255:0] s, u;
      pend_t p;
      s = dmem.exists(ls_req.vaddr[63:5]) ? dmem[ls_req.vaddr[63:5]] : '0;
      u = s;
      if (ls_req.op == LS_STORE) begin
        for (int i = 0; i < 32; i++) if (ls_req.wmask[i]) u[8*i +: 8] = ls_req.wdata[8*i +: 8];
        n_st++;
      end else if (ls_req.op == LS_AMO) begin
        u[64*ls_req.vaddr[4:3] +: 64] = s[64*ls_req.vaddr[4:3] +: 64] + ls_req.wdata[64*ls_req.vaddr[4:3] +: 64];
        n_amo++;
      end else n_ld++;
      if (ls_req.wmask == '1 || (ls_req.op == LS_LOAD && ls_req.vaddr[10])) n_vec++;
      dmem[ls_req.vaddr[63:5]] = u;
      p.r = '{rdata: s, tag: ls_req.tag};
      p.t = cyc + 1 + int'($urandom % 4);
      if (pq.size() > 0 && pq[$].t > p.t) p.t = pq[$].t;
      pq.push_back(p);
    end
  end

  function automatic logic [63:0] rd64(input logic [63:0] a);
    logic [255:0] s;
    s = dmem.exists(a[63:5]) ? dmem[a[63:5]] : '0;
    return s[64*a[4:3] +: 64];
  endfunction
  function automatic void wr64(input logic [63:0] a, input logic [63:0] v);
    logic [255:0] s;
    s = dmem.exists(a[63:5]) ? dmem[a[63:5]] : '0;
    s[64*a[4:3] +: 64] = v;
    dmem[a[63:5]] = s;
  endfunction

  int n_done = 0, n_ret = 0, max_act = 0;
  always @(posedge clk) if (rst_n) begin
    if (thread_done) n_done++;
    if (retire) n_ret++;
    if (active_slots > max_act) max_act = active_slots;
  end

  localparam int NT = 32;
  initial begin
    logic [31:0] prog [];
    prog = '{
      addi(3, 2, 5), slli(4, 3, 2), mul(5, 4, 3), sub(6, 5, 2), sd(6, 1, 0),        // 0..4
      ld(7, 1, 8), add(7, 7, 2), sd(7, 1, 16),                                      // 5..7
      addi(8, 0, 0), addi(9, 0, 10), addi(8, 8, 3), addi(9, 9, -1), bne(9, 0, -8),  // 8..12
      sw(8, 1, 24), lw(13, 1, 24), sw(13, 1, 28),                                   // 13..15
      addi(10, 1, 1024), vle64(1, 10), vmv_v_x(2, 2), vadd_vv(3, 1, 2),             // 16..19
      vmul_vv(4, 3, 3), vse64(3, 10), vmv_v_i(6, 1), vredsum_vs(5, 4, 6),           // 20..23
      vmv_x_s(11, 5), addi(12, 10, 1024), sd(11, 12, 0),                            // 24..26
      lui(14, 32'h20000), amoadd_d(13, 2, 14), sd(13, 12, 8), ebreak()};            // 27..30
    for (int i = 0; i < prog.size(); i++) imem[PC0 + 64'(4 * i)] = prog[i];
    imem[PC_ILL] = addi(3, 0, 1);
    imem[PC_ILL + 4] = 32'hFFFF_FFFF;
    for (int t = 0; t < NT; t++) begin
      wr64(DBASE + 64'(32 * t) + 8, 64'(1000 + t));
      for (int e = 0; e < 4; e++) wr64(DBASE + 64'(32 * t) + 1024 + 64'(8 * e), 64'(10 * t + e));
    end
    kdesc = '0;
    kdesc.num_int = 8'd16; kdesc.num_vec = 8'd8;
    usable_slots = 5'd16;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      spawn_valid = 1; spawn_pc = PC0; spawn_x1 = DBASE + 64'(32 * t); spawn_x2 = 64'(t);
      #1;
      while (!spawn_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1;
      spawn_valid = 0;
    end
    while (n_done < NT) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      logic [63:0] a, v;
      logic [63:0] sq;
      a = DBASE + 64'(32 * t);
      check(rd64(a) == 64'(4 * (t + 5) * (t + 5) - t), $sformatf("ALU result of uthread %0d", t));
      check(rd64(a + 16) == 64'(1000 + 2 * t), "load, add, store");
      check(rd64(a + 24) == {32'd30, 32'd30}, "loop count and 32-bit load/store");
      sq = 1;
      for (int e = 0; e < 4; e++) begin
        v = 64'(10 * t + e + t);
        check(rd64(a + 1024 + 64'(8 * e)) == v, "vector add and store");
        sq += v * v;
      end
      check(rd64(a + 2048) == sq, $sformatf("vector reduction of uthread %0d", t));
    end
    check(rd64(CNT) == 64'(NT * (NT - 1) / 2), "atomic add of all ids");
    check(n_ret == NT * (prog.size() + 9 * 3), $sformatf("retired %0d", n_ret));
    check(max_act == 16, "all 16 slots used");
    check(!illegal, "no illegal instruction yet");
    // an illegal instruction ends the uthread
    @(negedge clk);
    spawn_valid = 1; spawn_pc = PC_ILL;
    #1;
    while (!spawn_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1;
    spawn_valid = 0;
    while (n_done < NT + 1) @(negedge clk);
    check(illegal && active_slots == 0, "illegal instruction flagged and uthread ended");
    $display("retired=%0d loads=%0d stores=%0d amo=%0d", n_ret, n_ld, n_st, n_amo);
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
