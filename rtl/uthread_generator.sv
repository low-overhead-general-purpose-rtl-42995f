// uthread_generator: spawns the uthreads of a kernel instance on one NDP unit.
//
// On start it runs up to three phases. Initializer: one uthread in every
// usable slot of every sub-core, with a unit-wide unique id in x2 (x1 = 0).
// Kernel body: one uthread per 32-byte granule of the uthread pool region
// that this unit owns; granules are dealt to the NDP units in turn (granule g
// goes to unit g mod NUM_UNITS), so unit u starts at base + 32*u and steps by
// 32*NUM_UNITS up to the inclusive bound. Each body uthread gets its mapped
// address in x1 and the offset from the pool base in x2. Finalizer: like the
// initializer. A phase starts only when every uthread of the previous phase
// has finished; a new uthread goes into a slot as soon as one is free
// (sub-cores are tried round-robin, one spawn per cycle). `done` pulses once
// when the last phase has ended.
//
// The phases, the x1/x2 contents, the 32-byte granule and the interleaving
// across units follow the paper; x1 = 0 for the initializer/finalizer, the
// round-robin order and the single kernel body per launch are this design's
// choices. The number of usable slots per sub-core is limited by the register
// file: min(SLOTS, INT_REGS / num_int, VEC_REGS / num_vec).
module uthread_generator
  import m2ndp_pkg::*;
#(
  parameter int unsigned NUM_UNITS     = 32,
  parameter int unsigned UNIT_ID       = 0,
  parameter int unsigned NUM_SC        = 4,
  parameter int unsigned SLOTS         = 16,
  parameter int unsigned INT_REGS      = 256,
  parameter int unsigned VEC_REGS      = 320,
  parameter int unsigned UTHREAD_BYTES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  launch_cmd_t       cmd,
  output kernel_desc_t      kdesc,          // kernel being run, to the sub-cores
  output logic [4:0]        usable_slots,
  output logic [NUM_SC-1:0] spawn_valid,
  input  logic [NUM_SC-1:0] spawn_ready,
  output logic [63:0]       spawn_pc,
  output logic [63:0]       spawn_x1,
  output logic [63:0]       spawn_x2,
  input  logic [NUM_SC-1:0] thread_done,
  output logic              done,
  output logic              active
);

  localparam int unsigned SCW = (NUM_SC > 1) ? $clog2(NUM_SC) : 1;

  typedef enum logic [2:0] {G_IDLE, G_INIT, G_BODY, G_FINAL, G_DRAIN, G_DONE} gst_e;
  gst_e        st, nxt_after;
  launch_cmd_t c;
  logic [63:0] addr;
  logic [15:0] outstanding;
  logic [4:0]  left [NUM_SC];
  logic [SCW-1:0] rr;

  // usable slots from the register budget
  function automatic logic [4:0] usable(input kernel_desc_t k);
    int unsigned u, a, b;
    u = SLOTS;
    a = (k.num_int == 0) ? SLOTS : INT_REGS / 32'(k.num_int);
    b = (k.num_vec == 0) ? SLOTS : VEC_REGS / 32'(k.num_vec);
    if (a < u) u = a;
    if (b < u) u = b;
    return 5'(u);
  endfunction

  assign kdesc        = c.k;
  assign usable_slots = usable(c.k);
  assign active       = (st != G_IDLE);

  // choose the sub-core that receives the next uthread
  logic           pick_ok;
  logic [SCW-1:0] pick;
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int j = NUM_SC - 1; j >= 0; j--) begin
      int unsigned s;
      s = (int'(rr) + j) % NUM_SC;
      if (spawn_ready[s] &&
          ((st == G_BODY && addr <= c.pool_bound) ||
           ((st == G_INIT || st == G_FINAL) && left[s] != 0))) begin
        pick_ok = 1'b1;
        pick    = SCW'(s);
      end
    end
  end

  always_comb begin
    spawn_valid = '0;
    if (pick_ok) spawn_valid[pick] = 1'b1;
    spawn_pc = (st == G_INIT) ? c.k.init_pc : (st == G_FINAL) ? c.k.final_pc : c.k.body_pc;
    if (st == G_BODY) begin
      spawn_x1 = addr;
      spawn_x2 = addr - c.pool_base;
    end else begin
      spawn_x1 = '0;
      spawn_x2 = 64'(UNIT_ID * NUM_SC * SLOTS) + 64'(int'(pick) * SLOTS) +
                 64'(usable(c.k) - left[pick]);
    end
  end

  logic [15:0] n_done;
  always_comb begin
    n_done = '0;
    for (int s = 0; s < NUM_SC; s++) n_done += 16'(thread_done[s]);
  end

  logic fire;
  assign fire = pick_ok && spawn_ready[pick];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; nxt_after <= G_IDLE; c <= '0; addr <= '0; outstanding <= '0;
      rr <= '0; done <= 1'b0;
      for (int s = 0; s < NUM_SC; s++) left[s] <= '0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + 16'(fire) - n_done;
      if (fire) begin
        rr <= (int'(pick) == NUM_SC - 1) ? '0 : pick + 1'b1;
        if (st == G_BODY) addr <= addr + 64'(UTHREAD_BYTES * NUM_UNITS);
        else left[pick] <= left[pick] - 1'b1;
      end
      unique case (st)
        G_IDLE: if (start) begin
          c    <= cmd;
          addr <= cmd.pool_base + 64'(UTHREAD_BYTES * UNIT_ID);
          for (int s = 0; s < NUM_SC; s++) left[s] <= usable(cmd.k);
          st   <= cmd.k.has_init ? G_INIT : G_BODY;
        end
        G_INIT, G_FINAL: begin
          logic all_sent;
          all_sent = 1'b1;
          for (int s = 0; s < NUM_SC; s++)
            if (left[s] > 5'(fire && pick == SCW'(s))) all_sent = 1'b0;
          if (all_sent) begin
            nxt_after <= (st == G_INIT) ? G_BODY : G_DONE;
            st <= G_DRAIN;
          end
        end
        G_BODY: if (addr > c.pool_bound ||
                    (fire && addr + 64'(UTHREAD_BYTES * NUM_UNITS) > c.pool_bound)) begin
          nxt_after <= c.k.has_final ? G_FINAL : G_DONE;
          st <= G_DRAIN;
        end
        G_DRAIN: if (outstanding + 16'(fire) - n_done == 0) begin
          if (nxt_after == G_FINAL)
            for (int s = 0; s < NUM_SC; s++) left[s] <= usable(c.k);
          st <= nxt_after;
        end
        G_DONE: begin
          done <= 1'b1;
          st   <= G_IDLE;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

endmodule
