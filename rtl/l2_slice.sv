// l2_slice: one slice of the memory-side L2 cache, placed in front of one
// memory controller, where global-memory atomics are executed.
//
// SIZE_BYTES (128 KB) per channel, WAYS (16) ways, 128-byte lines split into
// four 32-byte sectors with their own valid and dirty bits, true LRU
// replacement, write-back and write-allocate, as configured in the paper.
// Because every NDP unit's L1 is write-through and every access of the chip
// to this channel passes through this slice, no coherence is needed.
// Operations: read a sector, write bytes of a sector, AMOADD of one 64-bit
// lane (returns the old sector). A missing sector is fetched from the memory
// controller (skipped for a write of the whole sector); a line to be evicted
// first writes its dirty sectors back. The slice is blocking, one request at
// a time; a hit answers HIT_LAT (7) cycles after the request was taken.
// Blocking operation and the position of the latency are this design's
// choices.
module l2_slice
  import m2ndp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 131072,
  parameter int unsigned WAYS       = 16,
  parameter int unsigned LINE_BYTES = 128,
  parameter int unsigned HIT_LAT    = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  mem_req_t      req,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output mem_rsp_t      rsp,
  // memory controller
  output logic          mc_valid,
  input  logic          mc_ready,
  output logic          mc_we,
  output logic [63:0]   mc_addr,
  output logic [255:0]  mc_wdata,
  input  logic          mc_rsp_valid,
  output logic          mc_rsp_ready,
  input  logic [255:0]  mc_rdata,
  output logic [31:0]   hits,
  output logic [31:0]   misses,
  output logic [31:0]   atomics
);

  localparam int unsigned NSEC  = LINE_BYTES / FLIT_BYTES;        // 4
  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned SETW  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WW    = $clog2(WAYS);
  localparam int unsigned OFFW  = $clog2(LINE_BYTES);
  localparam int unsigned SECW  = $clog2(NSEC);

  logic [FLIT_W-1:0] data  [SETS * WAYS * NSEC];
  logic [63:0]       ltag  [SETS][WAYS];         // line address
  logic [NSEC-1:0]   sval  [SETS][WAYS];
  logic [NSEC-1:0]   sdirty[SETS][WAYS];
  logic [WW-1:0]     age   [SETS][WAYS];

  typedef enum logic [3:0] {L_IDLE, L_LAT, L_WB, L_WBW, L_FETCH, L_FWAIT, L_OP, L_RESP} lst_e;
  lst_e          st;
  mem_req_t      r;
  logic            dirty_left;
  logic [SECW-1:0] next_dirty;
  logic [SETW-1:0] set;
  logic [WW-1:0] way;
  logic [SECW-1:0] sec, wbs;
  logic [7:0]    cnt;
  logic          was_hit;

  function automatic int unsigned didx(input logic [SETW-1:0] s, input logic [WW-1:0] w,
                                       input logic [SECW-1:0] c);
    return (int'(s) * WAYS + int'(w)) * NSEC + int'(c);
  endfunction

  // lookup of the incoming request
  logic [SETW-1:0] in_set;
  logic [63:0]     in_line;
  logic            in_hit;
  logic [WW-1:0]   in_way, vic_way;
  always_comb begin
    in_line = req.addr >> OFFW;
    in_set  = (SETS > 1) ? SETW'(in_line) : '0;
    in_hit  = 1'b0;
    in_way  = '0;
    vic_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (sval[in_set][w] != 0 && ltag[in_set][w] == in_line) begin in_hit = 1'b1; in_way = WW'(w); end
    // victim: an empty way if any, otherwise the least recently used one
    for (int w = WAYS - 1; w >= 0; w--)
      if (age[in_set][w] == WW'(WAYS - 1)) vic_way = WW'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (sval[in_set][w] == 0) vic_way = WW'(w);
  end

  assign req_ready    = (st == L_IDLE);
  assign rsp_valid    = (st == L_RESP);
  assign mc_valid     = (st == L_WB && dirty_left && wbs == next_dirty) || (st == L_FETCH);
  assign mc_we        = (st == L_WB);
  assign mc_addr      = (st == L_WB) ? (ltag[set][way] << OFFW) + 64'(int'(wbs) * FLIT_BYTES)
                                     : {r.addr[63:5], 5'b0};
  assign mc_wdata     = data[didx(set, way, wbs)];
  assign mc_rsp_ready = (st == L_WBW) || (st == L_FWAIT);

  logic [FLIT_W-1:0] cur, upd;
  assign cur = data[didx(set, way, sec)];
  always_comb begin
    upd = cur;
    if (r.op == MEM_WR) begin
      for (int i = 0; i < FLIT_BYTES; i++) if (r.wmask[i]) upd[8*i +: 8] = r.wdata[8*i +: 8];
    end else if (r.op == MEM_AMOADD) begin
      upd[64*r.addr[4:3] +: 64] = cur[64*r.addr[4:3] +: 64] + r.wdata[64*r.addr[4:3] +: 64];
    end
  end

  // next dirty sector to write back, from wbs upward
  always_comb begin
    dirty_left = 1'b0;
    next_dirty = '0;
    for (int c = NSEC - 1; c >= 0; c--)
      if (sdirty[set][way][c] && sval[set][way][c]) begin dirty_left = 1'b1; next_dirty = SECW'(c); end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; r <= '0; set <= '0; way <= '0; sec <= '0; wbs <= '0; cnt <= '0;
      was_hit <= 1'b0; rsp <= '0; hits <= '0; misses <= '0; atomics <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          ltag[s][w] <= '0; sval[s][w] <= '0; sdirty[s][w] <= '0; age[s][w] <= WW'(w);
        end
    end else begin
      unique case (st)
        L_IDLE: if (req_valid) begin
          r   <= req;
          set <= in_set;
          sec <= req.addr[5 +: SECW];
          way <= in_hit ? in_way : vic_way;
          was_hit <= in_hit && sval[in_set][in_way][req.addr[5 +: SECW]];
          cnt <= 8'(HIT_LAT - 2);
          if (req.op == MEM_AMOADD) atomics <= atomics + 1'b1;
          if (in_hit && sval[in_set][in_way][req.addr[5 +: SECW]]) hits <= hits + 1'b1;
          else misses <= misses + 1'b1;
          // LRU update
          for (int w = 0; w < WAYS; w++)
            if (WW'(w) == (in_hit ? in_way : vic_way)) age[in_set][w] <= '0;
            else if (age[in_set][w] < age[in_set][in_hit ? in_way : vic_way])
              age[in_set][w] <= age[in_set][w] + 1'b1;
          st <= L_LAT;
        end
        L_LAT: if (cnt == 0) begin
          if (was_hit) st <= L_OP;
          else if (ltag[set][way] == (r.addr >> OFFW) && sval[set][way] != 0)
            st <= (r.op == MEM_WR && r.wmask == '1) ? L_OP : L_FETCH;
          else begin
            wbs <= '0;
            st  <= L_WB;
          end
        end else cnt <= cnt - 1'b1;
        // write back the dirty sectors of the victim, then reallocate it
        L_WB: begin
          if (!dirty_left) begin
            ltag[set][way]   <= r.addr >> OFFW;
            sval[set][way]   <= '0;
            sdirty[set][way] <= '0;
            st <= (r.op == MEM_WR && r.wmask == '1) ? L_OP : L_FETCH;
          end else begin
            wbs <= next_dirty;
            if (mc_ready && wbs == next_dirty) st <= L_WBW;
          end
        end
        L_WBW: if (mc_rsp_valid) begin
          sdirty[set][way][wbs] <= 1'b0;
          st <= L_WB;
        end
        L_FETCH: if (mc_ready) st <= L_FWAIT;
        L_FWAIT: if (mc_rsp_valid) begin
          data[didx(set, way, sec)] <= mc_rdata;
          sval[set][way][sec] <= 1'b1;
          st <= L_OP;
        end
        L_OP: begin
          rsp.rdata <= cur;
          rsp.id    <= r.id;
          if (r.op != MEM_RD) begin
            data[didx(set, way, sec)] <= upd;
            sdirty[set][way][sec] <= 1'b1;
          end
          sval[set][way][sec] <= 1'b1;
          st <= L_RESP;
        end
        L_RESP: if (rsp_ready) st <= L_IDLE;
        default: st <= L_IDLE;
      endcase
    end
  end

endmodule
