// ndp_controller: executes M2func calls, the NDP management functions a host
// process invokes by writing to (and then reading from) fixed offsets of its
// M2func region over plain CXL.mem.
//
// Function = offset >> 5: 0 register kernel, 1 unregister, 2 launch, 3 poll
// kernel status, 4 TLB shootdown (privileged). A write carries the arguments
// as 64-bit words of the 64-byte line and is acknowledged at once; the
// function's return value is kept per process and function and returned by a
// later read of the same offset. A read of the launch offset for a
// synchronous launch is held back until the kernel instance finishes; for an
// asynchronous launch it returns the instance id at once.
//
// Launch arguments follow the paper's example: word0 synchronicity (1 = sync),
// word1 kernel id, word2/3 uthread pool base and bound, word4 kernel argument
// size in bytes, words 5.. the kernel arguments. Launches wait in a FIFO of up
// to MAX_INST instances; with no free instance entry the launch returns ERR.
// This controller runs one instance at a time: before starting it, it writes
// the kernel arguments into every NDP unit's scratchpad (from its base), then
// starts every unit's uthread generator and waits for all of them to finish.
//
// Choices of this design (the paper gives only the function): the kernel
// table and return values live in on-chip tables instead of the M2func region
// in memory; registration words are 0 codeLoc (initializer entry), 1
// scratchpad size, 2/3/4 INT/FP/vector register counts, 5 flags (bit0 has
// initializer, bit1 has finalizer), 6 body offset and 7 finalizer offset from
// codeLoc; kernel arguments are limited to the three words that fit in the
// launch line; a finished instance is freed once its status has been read.
module ndp_controller
  import m2ndp_pkg::*;
#(
  parameter int unsigned NUM_UNITS   = 32,
  parameter int unsigned NUM_PROCS   = 1024,
  parameter int unsigned NUM_KERNELS = 64,
  parameter int unsigned MAX_INST    = 48
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  func_valid,
  output logic                  func_ready,
  input  func_req_t             func_req,
  output logic                  rsp_valid,
  input  logic                  rsp_ready,
  output cxl_rsp_t              rsp,
  // to the NDP units
  output logic                  arg_we,
  output logic [1:0]            arg_idx,     // 64-bit word index in the scratchpad
  output logic [63:0]           arg_data,
  output logic                  gen_start,
  output launch_cmd_t           gen_cmd,
  input  logic [NUM_UNITS-1:0]  gen_done,    // one pulse per unit per instance
  output logic                  icache_flush,
  output logic                  sd_valid,
  output logic [15:0]           sd_asid,
  output logic [51:0]           sd_vpn,
  // status
  output logic                  busy,
  output logic [7:0]            num_pending
);

  localparam int unsigned KW = $clog2(NUM_KERNELS);
  localparam int unsigned IW = $clog2(MAX_INST);
  localparam int unsigned PW = $clog2(NUM_PROCS);

  typedef enum logic [1:0] {I_FREE, I_PENDING, I_RUNNING, I_FINISHED} ist_e;

  typedef struct packed {
    ist_e          st;
    logic          sync;
    logic [KW-1:0] kid;
    logic [63:0]   base;
    logic [63:0]   bound;
    logic [1:0]    nargs;
    logic [63:0]   a0, a1, a2;
  } inst_t;

  kernel_desc_t  ktab  [NUM_KERNELS];
  logic          kvalid[NUM_KERNELS];
  inst_t         itab  [MAX_INST];
  logic [63:0]   rv    [NUM_PROCS][5];
  logic          rv_sync[NUM_PROCS];

  // pending FIFO of instance ids
  logic [IW-1:0] fifo [MAX_INST];
  logic [IW:0]   f_cnt;
  logic [IW-1:0] f_rd, f_wr;

  // deferred synchronous-launch read
  logic          dfr_valid;
  logic [IW-1:0] dfr_inst;
  logic [15:0]   dfr_tag;

  typedef enum logic [1:0] {R_IDLE, R_ARGS, R_RUN} run_e;
  run_e          rstate;
  logic [IW-1:0] cur;
  logic [1:0]    arg_cnt;
  logic [NUM_UNITS-1:0] done_mask;

  // helpers
  function automatic logic [63:0] w(input logic [LINE_W-1:0] d, input int i);
    return d[64*i +: 64];
  endfunction

  logic [KW-1:0] free_k;  logic free_k_ok;
  logic [IW-1:0] free_i;  logic free_i_ok;
  always_comb begin
    free_k = '0; free_k_ok = 1'b0;
    for (int i = NUM_KERNELS - 1; i >= 0; i--)
      if (!kvalid[i]) begin free_k = KW'(i); free_k_ok = 1'b1; end
    free_i = '0; free_i_ok = 1'b0;
    for (int i = MAX_INST - 1; i >= 0; i--)
      if (itab[i].st == I_FREE) begin free_i = IW'(i); free_i_ok = 1'b1; end
  end

  logic [2:0]    fn;
  logic [PW-1:0] pid;
  assign fn  = func_req.offset[7:5];
  assign pid = func_req.entry[PW-1:0];

  logic in_fire, dfr_fire;
  logic dfr_ready_now;
  assign dfr_ready_now = dfr_valid && itab[dfr_inst].st == I_FINISHED;
  // a deferred read that has become ready takes the response register first
  assign func_ready = !rsp_valid && !dfr_ready_now &&
                      !(dfr_valid && !func_req.is_wr && fn == FN_LAUNCH);
  assign in_fire  = func_valid && func_ready;
  assign dfr_fire = !rsp_valid && dfr_ready_now;

  assign busy        = (rstate != R_IDLE);
  assign num_pending = 8'(f_cnt);

  function automatic logic [LINE_W-1:0] ret(input logic [63:0] v);
    return {{(LINE_W-64){1'b0}}, v};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_KERNELS; i++) begin kvalid[i] <= 1'b0; ktab[i] <= '0; end
      for (int i = 0; i < MAX_INST; i++) begin itab[i] <= '0; fifo[i] <= '0; end
      for (int p = 0; p < NUM_PROCS; p++) begin
        rv_sync[p] <= 1'b0;
        for (int f = 0; f < 5; f++) rv[p][f] <= ERR;
      end
      f_cnt <= '0; f_rd <= '0; f_wr <= '0;
      dfr_valid <= 1'b0; dfr_inst <= '0; dfr_tag <= '0;
      rsp_valid <= 1'b0; rsp <= '0;
      rstate <= R_IDLE; cur <= '0; arg_cnt <= '0; done_mask <= '0;
      arg_we <= 1'b0; arg_idx <= '0; arg_data <= '0;
      gen_start <= 1'b0; gen_cmd <= '0;
      icache_flush <= 1'b0; sd_valid <= 1'b0; sd_asid <= '0; sd_vpn <= '0;
    end else begin
      gen_start    <= 1'b0;
      arg_we       <= 1'b0;
      icache_flush <= 1'b0;
      sd_valid     <= 1'b0;
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;

      // ---------------- deferred synchronous launch read ----------------
      if (dfr_fire) begin
        rsp_valid <= 1'b1;
        rsp <= '{is_wr: 1'b0, data: ret(64'(dfr_inst)), tag: dfr_tag};
        itab[dfr_inst].st <= I_FREE;
        dfr_valid <= 1'b0;
      end

      // ---------------- M2func call ----------------
      if (in_fire) begin
        rsp_valid <= 1'b1;
        rsp <= '{is_wr: func_req.is_wr, data: '0, tag: func_req.tag};
        if (func_req.is_wr) begin
          unique case (fn)
            FN_REGISTER: begin
              if (free_k_ok) begin
                kvalid[free_k] <= 1'b1;
                ktab[free_k] <= '{init_pc:   w(func_req.data, 0),
                                  body_pc:   w(func_req.data, 0) + w(func_req.data, 6),
                                  final_pc:  w(func_req.data, 0) + w(func_req.data, 7),
                                  has_init:  w(func_req.data, 5)[0],
                                  has_final: w(func_req.data, 5)[1],
                                  num_int:   w(func_req.data, 2)[7:0],
                                  num_fp:    w(func_req.data, 3)[7:0],
                                  num_vec:   w(func_req.data, 4)[7:0],
                                  spad_size: w(func_req.data, 1)[31:0],
                                  asid:      func_req.asid};
                rv[pid][0] <= 64'(free_k);
              end else rv[pid][0] <= ERR;
            end
            FN_UNREGISTER: begin
              if (w(func_req.data, 0) < 64'(NUM_KERNELS) &&
                  kvalid[w(func_req.data, 0)[KW-1:0]] &&
                  ktab[w(func_req.data, 0)[KW-1:0]].asid == func_req.asid) begin
                kvalid[w(func_req.data, 0)[KW-1:0]] <= 1'b0;
                icache_flush <= 1'b1;
                rv[pid][1] <= 64'd0;
              end else rv[pid][1] <= ERR;
            end
            FN_LAUNCH: begin
              if (w(func_req.data, 1) < 64'(NUM_KERNELS) &&
                  kvalid[w(func_req.data, 1)[KW-1:0]] &&
                  ktab[w(func_req.data, 1)[KW-1:0]].asid == func_req.asid &&
                  w(func_req.data, 4) <= 64'd24 && free_i_ok) begin
                itab[free_i] <= '{st: I_PENDING, sync: w(func_req.data, 0)[0],
                                  kid: w(func_req.data, 1)[KW-1:0],
                                  base: w(func_req.data, 2), bound: w(func_req.data, 3),
                                  nargs: 2'((w(func_req.data, 4) + 64'd7) >> 3),
                                  a0: w(func_req.data, 5), a1: w(func_req.data, 6),
                                  a2: w(func_req.data, 7)};
                fifo[f_wr] <= free_i;
                f_wr <= (f_wr == IW'(MAX_INST - 1)) ? '0 : f_wr + 1'b1;
                f_cnt <= f_cnt + 1'b1;
                rv[pid][2] <= 64'(free_i);
                rv_sync[pid] <= w(func_req.data, 0)[0];
              end else begin
                rv[pid][2] <= ERR;
                rv_sync[pid] <= 1'b0;
              end
            end
            FN_POLL:      rv[pid][3] <= w(func_req.data, 0);
            FN_SHOOTDOWN: begin
              if (func_req.priv) begin
                sd_valid <= 1'b1;
                sd_asid  <= w(func_req.data, 0)[15:0];
                sd_vpn   <= w(func_req.data, 1)[51:0];
                rv[pid][4] <= 64'd0;
              end else rv[pid][4] <= ERR;
            end
            default: ;
          endcase
        end else begin
          unique case (fn)
            FN_LAUNCH: begin
              if (rv_sync[pid] && rv[pid][2] != ERR &&
                  itab[rv[pid][2][IW-1:0]].st != I_FINISHED) begin
                rsp_valid <= 1'b0;       // answered when the kernel ends
                dfr_valid <= 1'b1;
                dfr_inst  <= rv[pid][2][IW-1:0];
                dfr_tag   <= func_req.tag;
              end else begin
                rsp.data <= ret(rv[pid][2]);
                if (rv_sync[pid] && rv[pid][2] != ERR)
                  itab[rv[pid][2][IW-1:0]].st <= I_FREE;
              end
            end
            FN_POLL: begin
              if (rv[pid][3] >= 64'(MAX_INST)) rsp.data <= ret(ERR);
              else begin
                unique case (itab[rv[pid][3][IW-1:0]].st)
                  I_FINISHED: begin
                    rsp.data <= ret(ST_FINISHED);
                    itab[rv[pid][3][IW-1:0]].st <= I_FREE;
                  end
                  I_RUNNING: rsp.data <= ret(ST_RUNNING);
                  I_PENDING: rsp.data <= ret(ST_PENDING);
                  default:   rsp.data <= ret(ERR);
                endcase
              end
            end
            default: rsp.data <= (fn <= 3'd4) ? ret(rv[pid][fn]) : ret(ERR);
          endcase
        end
      end

      // ---------------- instance scheduling ----------------
      unique case (rstate)
        R_IDLE: if (f_cnt != 0) begin
          cur     <= fifo[f_rd];
          f_rd    <= (f_rd == IW'(MAX_INST - 1)) ? '0 : f_rd + 1'b1;
          f_cnt   <= f_cnt - 1'b1 + (IW+1)'(in_fire && func_req.is_wr && fn == FN_LAUNCH &&
                                          rv_ok_launch());
          itab[fifo[f_rd]].st <= I_RUNNING;
          arg_cnt <= '0;
          rstate  <= R_ARGS;
        end
        R_ARGS: begin
          if (arg_cnt < itab[cur].nargs) begin
            arg_we   <= 1'b1;
            arg_idx  <= arg_cnt;
            arg_data <= (arg_cnt == 2'd0) ? itab[cur].a0 :
                        (arg_cnt == 2'd1) ? itab[cur].a1 : itab[cur].a2;
            arg_cnt  <= arg_cnt + 1'b1;
          end else begin
            gen_start <= 1'b1;
            gen_cmd   <= '{k: ktab[itab[cur].kid], pool_base: itab[cur].base,
                           pool_bound: itab[cur].bound};
            done_mask <= '0;
            rstate    <= R_RUN;
          end
        end
        R_RUN: begin
          if ((done_mask | gen_done) == {NUM_UNITS{1'b1}}) begin
            itab[cur].st <= I_FINISHED;
            rstate <= R_IDLE;
          end
          done_mask <= done_mask | gen_done;
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // a launch accepted this cycle (used to keep the FIFO count right when a
  // push and a pop happen together)
  function automatic logic rv_ok_launch();
    return w(func_req.data, 1) < 64'(NUM_KERNELS) &&
           kvalid[w(func_req.data, 1)[KW-1:0]] &&
           ktab[w(func_req.data, 1)[KW-1:0]].asid == func_req.asid &&
           w(func_req.data, 4) <= 64'd24 && free_i_ok;
  endfunction

  // the response register is never overwritten while full
  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid && !rsp_ready |=> $stable(rsp));

endmodule
