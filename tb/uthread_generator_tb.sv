// uthread_generator_tb: the uthread generator of NDP unit 3 of 32, with a
// model of four sub-cores that accept a spawn when a usable slot is free
// and end each uthread after a random time. Runs two kernels: one with
// initializer, body and finalizer and a register budget that limits the
// usable slots, and one with a body only. Checks the usable-slot count,
// one initializer and one finalizer uthread per usable slot with unique ids
// in x2, that the phases do not overlap (each waits for the previous one
// to drain), that the body uthreads cover exactly this unit's 32-byte
// granules of the pool (base + 32 x (3 + 32 k)) once each in order, that
// no sub-core holds more uthreads than usable slots, and the done pulse.
module uthread_generator_tb;
  import m2ndp_pkg::*;
  localparam int NU = 32, UID = 3, NSC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done, active;
  launch_cmd_t cmd;
  kernel_desc_t kdesc;
  logic [4:0] usable_slots;
  logic [NSC-1:0] spawn_valid, spawn_ready, thread_done;
  logic [63:0] spawn_pc, spawn_x1, spawn_x2;

  uthread_generator #(.NUM_UNITS(NU), .UNIT_ID(UID)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // sub-core model
  int live [NSC];
  int timers [NSC][$];
  int cap;
  always_comb for (int s = 0; s < NSC; s++) spawn_ready[s] = rst_n && live[s] < cap;

  int n_init, n_body, n_final, phase_err, max_live;
  logic [63:0] next_addr;
  bit ids [int];
  int fin_ids [int];
  int ph;   // 0 init, 1 body, 2 final
  logic [63:0] ipc, bpc, fpc;

  always @(posedge clk) if (rst_n) begin
    thread_done <= '0;
    for (int s = 0; s < NSC; s++) begin
      // end at most one uthread per sub-core per cycle
      foreach (timers[s][i]) timers[s][i]--;
      if (timers[s].size() > 0 && timers[s][0] <= 0) begin
        void'(timers[s].pop_front());
        live[s]--;
        thread_done[s] <= 1'b1;
      end
      if (spawn_valid[s] && spawn_ready[s]) begin
        live[s]++;
        if (live[s] > max_live) max_live = live[s];
        timers[s].push_back(2 + $urandom % 30);
        if (spawn_pc == ipc && ph == 0) begin
          n_init++;
          if (ids.exists(int'(spawn_x2))) phase_err++;
          ids[int'(spawn_x2)] = 1;
        end else if (spawn_pc == bpc) begin
          if (ph == 0) begin ph = 1; end
          n_body++;
          if (spawn_x1 != next_addr) phase_err++;
          next_addr = next_addr + 64'(32 * NU);
        end else if (spawn_pc == fpc) begin
          ph = 2;
          n_final++;
          fin_ids[int'(spawn_x2)] = 1;
        end else phase_err++;
      end
    end
  end

  int body_live_at_final;
  task automatic run(input bit with_if, input int ni, input int nv, input logic [63:0] base,
                     input logic [63:0] bound, input int exp_usable);
    int t0, exp_body;
    foreach (live[s]) begin live[s] = 0; timers[s].delete(); end
    n_init = 0; n_body = 0; n_final = 0; phase_err = 0; max_live = 0; ids.delete(); fin_ids.delete();
    ipc = 64'h4000_0000; bpc = 64'h4000_0100; fpc = 64'h4000_0200;
    ph = with_if ? 0 : 1;
    next_addr = base + 64'(32 * UID);
    cap = 16;
    cmd = '0;
    cmd.k.init_pc = ipc; cmd.k.body_pc = bpc; cmd.k.final_pc = fpc;
    cmd.k.has_init = with_if; cmd.k.has_final = with_if;
    cmd.k.num_int = 8'(ni); cmd.k.num_vec = 8'(nv); cmd.k.asid = 16'd7;
    cmd.pool_base = base; cmd.pool_bound = bound;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    check(usable_slots == 5'(exp_usable), $sformatf("usable slots %0d", usable_slots));
    cap = exp_usable;
    check(active, "active after start");
    while (!done) @(negedge clk);
    exp_body = 0;
    for (logic [63:0] a = base + 64'(32 * UID); a <= bound; a += 64'(32 * NU)) exp_body++;
    check(n_body == exp_body, $sformatf("body uthreads %0d expected %0d", n_body, exp_body));
    check(phase_err == 0, "spawn order, addresses and unique initializer ids");
    check(max_live <= exp_usable, "no sub-core over its usable slots");
    foreach (live[s]) check(live[s] == 0, "all uthreads ended before done");
    if (with_if) begin
      check(n_init == exp_usable * NSC && n_final == exp_usable * NSC, "one init and one final uthread per slot");
      check(ids.exists(UID * NSC * 16) && fin_ids.exists(UID * NSC * 16), "ids start at unit x 64");
    end else check(n_init == 0 && n_final == 0, "no init / final phase");
    @(negedge clk);
    check(!active && !done, "idle after the done pulse");
  endtask

  // the finalizer must not start before the last body uthread ended
  int body_out;
  always @(posedge clk) if (rst_n && ph == 2 && $countones(spawn_valid & spawn_ready) > 0 && spawn_pc == fpc)
    for (int s = 0; s < NSC; s++)
      foreach (timers[s][i]) if (timers[s][i] > 0 && n_final == 0) body_live_at_final++;

  initial begin
    foreach (live[s]) live[s] = 0;
    cap = 16; body_live_at_final = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 256 / 40 = 6 integer, 320 / 32 = 10 vector: 6 slots
    run(1, 40, 32, 64'h0020_0000, 64'h0020_0000 + 64'd65535, 6);
    check(body_live_at_final == 0, "finalizer waits for the body to drain");
    // small register use: all 16 slots; pool not aligned to 32 x 32 bytes
    run(0, 8, 4, 64'h0100_0000, 64'h0100_0000 + 64'd20000, 16);
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
