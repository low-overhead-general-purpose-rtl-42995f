// ndp_controller_tb: the NDP controller (M2func call handling, kernel and
// instance tables, launch buffer and instance scheduling) with 32 units.
// M2func calls are sent as the packet filter would deliver them; a model of
// the uthread generators answers each start with one done pulse per unit
// after a random time. Checks registration ids and the stored kernel
// descriptor, launch checks (unknown kernel, other process's kernel, too
// many argument bytes, full buffer of 48 instances), the argument writes
// into the scratchpad, first-come first-served scheduling, poll results
// (pending, running, finished then freed), the synchronous launch whose
// read returns only after the kernel ended, unregister with the
// instruction cache flush, and privileged TLB shootdown.
module ndp_controller_tb;
  import m2ndp_pkg::*;
  localparam int NU = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic func_valid = 0, func_ready, rsp_valid, rsp_ready = 1;
  func_req_t func_req;
  cxl_rsp_t rsp;
  logic arg_we, gen_start, icache_flush, sd_valid, busy;
  logic [1:0] arg_idx;
  logic [63:0] arg_data;
  launch_cmd_t gen_cmd;
  logic [NU-1:0] gen_done;
  logic [15:0] sd_asid;
  logic [51:0] sd_vpn;
  logic [7:0] num_pending;

  ndp_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // generator model: random per-unit completion times
  int left [NU];
  bit running = 0;
  int starts = 0, flushes = 0, sds = 0;
  logic [63:0] args [$];
  launch_cmd_t last_cmd;
  bit hold = 0;   // keep the current kernel running
  always @(posedge clk) begin
    gen_done <= '0;
    if (arg_we) args.push_back(arg_data);
    if (icache_flush) flushes++;
    if (sd_valid) begin sds++; check(sd_asid == 16'd7 && sd_vpn == 52'h123, "shootdown fields"); end
    if (gen_start) begin
      check(!running, "one kernel at a time");
      running = 1; starts++; last_cmd = gen_cmd;
      foreach (left[u]) left[u] = 5 + $urandom % 40;
    end else if (running && !hold) begin
      bit all;
      all = 1;
      foreach (left[u]) begin
        if (left[u] == 1) gen_done[u] <= 1'b1;
        if (left[u] > 0) left[u]--;
        if (left[u] > 0) all = 0;
      end
      if (all) running = 0;
    end
  end

  logic [15:0] tg = 0;
  task automatic call(input int ent, input logic [15:0] asid, input bit priv, input bit wr,
                      input int fn, input logic [63:0] w [8], output logic [63:0] r);
    @(negedge clk);
    func_valid = 1;
    func_req = '0;
    func_req.is_wr = wr; func_req.entry = 10'(ent); func_req.asid = asid; func_req.priv = priv;
    func_req.offset = 64'(fn << 5); func_req.tag = tg;
    for (int i = 0; i < 8; i++) func_req.data[64*i +: 64] = w[i];
    #1;
    while (!func_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1;
    func_valid = 0;
    while (!rsp_valid) begin @(negedge clk); #1; end
    check(rsp.tag == tg && rsp.is_wr == wr, "response tag and kind");
    r = rsp.data[63:0];
    tg++;
    @(posedge clk);
    #1;
  endtask
  task automatic fcall(input int ent, input logic [15:0] asid, input int fn,
                       input logic [63:0] w [8], output logic [63:0] r);
    logic [63:0] d;
    call(ent, asid, 0, 1, fn, w, d);
    call(ent, asid, 0, 0, fn, w, r);
  endtask

  logic [63:0] w [8], r, k0, k1, id;
  int t0;

  initial begin
    foreach (left[u]) left[u] = 0;
    gen_done = '0;
    func_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // registration
    w = '{64'h4000_0000, 64'd256, 64'd9, 64'd0, 64'd4, 64'd3, 64'h100, 64'h200};
    fcall(0, 16'd7, 0, w, k0);
    check(k0 == 0, "first kernel id 0");
    check(dut.ktab[0].body_pc == 64'h4000_0100 && dut.ktab[0].final_pc == 64'h4000_0200 &&
          dut.ktab[0].has_init && dut.ktab[0].has_final && dut.ktab[0].num_int == 9 &&
          dut.ktab[0].asid == 16'd7, "kernel descriptor stored");
    w = '{64'h4000_1000, 64'd0, 64'd6, 64'd0, 64'd4, 64'd0, 64'd0, 64'd0};
    fcall(1, 16'd9, 0, w, k1);
    check(k1 == 1, "second kernel id 1");
    // launch checks
    w = '{64'd0, 64'd5, 64'h1000, 64'h1FFF, 64'd8, 64'd1, 64'd2, 64'd3};
    fcall(0, 16'd7, 2, w, r);
    check(r == ERR, "unknown kernel");
    w = '{64'd0, k1, 64'h1000, 64'h1FFF, 64'd8, 64'd1, 64'd2, 64'd3};
    fcall(0, 16'd7, 2, w, r);
    check(r == ERR, "kernel of another process");
    w = '{64'd0, k0, 64'h1000, 64'h1FFF, 64'd32, 64'd1, 64'd2, 64'd3};
    fcall(0, 16'd7, 2, w, r);
    check(r == ERR, "more than 24 argument bytes");
    // asynchronous launch, arguments, poll
    hold = 1;
    w = '{64'd0, k0, 64'h20_0000, 64'h20_FFFF, 64'd24, 64'hA1, 64'hA2, 64'hA3};
    fcall(0, 16'd7, 2, w, id);
    check(id == 0, "instance 0");
    repeat (10) @(negedge clk);
    check(args.size() == 3 && args[0] == 64'hA1 && args[1] == 64'hA2 && args[2] == 64'hA3,
          "three argument words written");
    check(starts == 1 && last_cmd.pool_base == 64'h20_0000 && last_cmd.pool_bound == 64'h20_FFFF &&
          last_cmd.k.body_pc == 64'h4000_0100, "generator start command");
    // fill the buffer: 47 more instances, then ERR
    for (int i = 1; i < 48; i++) begin
      w = '{64'd0, k0, 64'(i) << 16, (64'(i) << 16) + 64'hFF, 64'd8, 64'(i), 64'd0, 64'd0};
      fcall(0, 16'd7, 2, w, r);
      check(r == 64'(i), $sformatf("instance %0d", i));
    end
    check(num_pending == 8'd47, "47 pending");
    fcall(0, 16'd7, 2, w, r);
    check(r == ERR, "49th launch refused");
    w = '{64'd0, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0};
    fcall(0, 16'd7, 3, w, r);
    check(r == ST_RUNNING, "instance 0 running");
    w[0] = 64'd5;
    fcall(0, 16'd7, 3, w, r);
    check(r == ST_PENDING, "instance 5 pending");
    hold = 0;
    // let everything finish; the arguments must follow launch order
    while (busy || num_pending != 0) @(negedge clk);
    check(starts == 48, "48 kernels ran");
    check(args.size() == 3 + 47, "one argument word for each 8-byte launch");
    begin
      bit ord;
      ord = 1;
      for (int i = 1; i < 48; i++) if (args[2 + i] != 64'(i)) ord = 0;
      check(ord, "instances run first come, first served");
    end
    w[0] = 64'd5;
    fcall(0, 16'd7, 3, w, r);
    check(r == ST_FINISHED, "instance 5 finished");
    fcall(0, 16'd7, 3, w, r);
    check(r == ERR, "instance 5 freed after the finished report");
    for (int i = 0; i < 48; i++) if (i != 5) begin
      w[0] = 64'(i);
      fcall(0, 16'd7, 3, w, r);
    end
    // synchronous launch: the read waits for the end of the kernel
    w = '{64'd1, k1, 64'h30_0000, 64'h30_FFFF, 64'd0, 64'd0, 64'd0, 64'd0};
    call(1, 16'd9, 0, 1, 2, w, r);
    t0 = starts;
    call(1, 16'd9, 0, 0, 2, w, id);
    check(starts == t0 + 1 && !running && !busy, "synchronous read returned after the kernel ended");
    check(id == 0, "synchronous launch returns its instance id");
    w[0] = id;
    fcall(1, 16'd9, 3, w, r);
    check(r == ERR, "a synchronous instance is freed by its return");
    // unregister
    w[0] = k1;
    fcall(0, 16'd7, 1, w, r);
    check(r == ERR, "unregister of another process's kernel");
    fcall(1, 16'd9, 1, w, r);
    check(r == 0 && flushes == 1, "unregister flushes the instruction caches");
    fcall(1, 16'd9, 1, w, r);
    check(r == ERR, "second unregister");
    // shootdown
    w = '{64'd7, 64'h123, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0, 64'd0};
    call(0, 16'd7, 0, 1, 4, w, r);
    call(0, 16'd7, 0, 0, 4, w, r);
    check(r == ERR && sds == 0, "unprivileged shootdown refused");
    call(2, 16'd0, 1, 1, 4, w, r);
    call(2, 16'd0, 1, 0, 4, w, r);
    check(r == 0 && sds == 1, "privileged shootdown");
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
