// scratchpad: the on-chip scratchpad memory of an NDP unit, shared by every
// uthread running on the unit (not only by one thread group), with atomic add.
//
// Organised as SIZE_BYTES/32 rows of one 32-byte sector. One access per
// cycle; the response (read data, or the old sector for an atomic) comes one
// cycle later. A write uses the byte mask; AMOADD adds the 64-bit lane of
// wdata selected by addr[4:3] to the stored lane and returns the old sector.
// The arg port, used by the NDP controller to place kernel arguments at the
// start of the scratchpad before a launch, has priority and holds req_ready
// low in that cycle. The 128 KB size is the paper's unified scratchpad/L1D
// capacity, here used entirely as scratchpad (the L1 data cache mode is not
// built); the row organisation and one-cycle latency are this design's.
module scratchpad
  import m2ndp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 131072
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_op_e           req_op,
  input  logic [31:0]       req_addr,     // byte offset in the scratchpad
  input  logic [FLIT_W-1:0] req_wdata,
  input  logic [31:0]       req_wmask,
  input  logic [5:0]        req_tag,
  output logic              rsp_valid,
  output logic [FLIT_W-1:0] rsp_rdata,
  output logic [5:0]        rsp_tag,
  input  logic              arg_we,
  input  logic [1:0]        arg_idx,
  input  logic [63:0]       arg_data
);

  localparam int unsigned ROWS = SIZE_BYTES / FLIT_BYTES;
  localparam int unsigned RW   = $clog2(ROWS);

  logic [FLIT_W-1:0] mem [ROWS];

  assign req_ready = !arg_we;

  logic [RW-1:0]     row;
  logic [FLIT_W-1:0] old, upd;
  assign row = req_addr[5 +: RW];
  assign old = mem[row];
  always_comb begin
    upd = old;
    if (req_op == MEM_WR) begin
      for (int i = 0; i < FLIT_BYTES; i++) if (req_wmask[i]) upd[8*i +: 8] = req_wdata[8*i +: 8];
    end else if (req_op == MEM_AMOADD) begin
      upd[64*req_addr[4:3] +: 64] = old[64*req_addr[4:3] +: 64] + req_wdata[64*req_addr[4:3] +: 64];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0; rsp_rdata <= '0; rsp_tag <= '0;
    end else begin
      rsp_valid <= req_valid && req_ready;
      if (req_valid && req_ready) begin
        rsp_rdata <= old;
        rsp_tag   <= req_tag;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (arg_we) mem[0][64*arg_idx +: 64] <= arg_data;
    else if (req_valid && req_op != MEM_RD) mem[row] <= upd;
  end

endmodule
