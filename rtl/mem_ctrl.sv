// mem_ctrl: memory controller of one LPDDR5 channel, between a memory-side
// L2 slice and the DRAM devices.
//
// It serves one 32-byte sector access at a time with an open-page policy and
// per-bank row-buffer state. Latency before the column access is issued:
//   row hit: tCL; bank closed: tRCD + tCL; other row open: tRP + tRCD + tCL
// (tRCD = 15, tCL = 20, tRP = 15 controller clocks, the paper's LPDDR5
// timing). Then the access goes to the DRAM port; a write is acknowledged at
// once, a read when the DRAM returns the data. Every request gets a response.
// Address split (this design's choice): bank = addr[16:13], row = addr[63:17].
// Refresh, tRC/tFAW, bank parallelism and request reordering are not
// modelled: the paper names the controller and its timing, not its insides.
module mem_ctrl #(
  parameter int unsigned BANKS = 16,
  parameter int unsigned T_RCD = 15,
  parameter int unsigned T_CL  = 20,
  parameter int unsigned T_RP  = 15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [63:0]   req_addr,
  input  logic [255:0]  req_wdata,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output logic [255:0]  rsp_rdata,
  // DRAM device port
  output logic          d_valid,
  output logic          d_we,
  output logic [63:0]   d_addr,
  output logic [255:0]  d_wdata,
  input  logic          d_rvalid,
  input  logic [255:0]  d_rdata,
  output logic [31:0]   row_hits,
  output logic [31:0]   row_misses
);

  localparam int unsigned BW = $clog2(BANKS);

  typedef enum logic [2:0] {M_IDLE, M_WAIT, M_ISSUE, M_RDATA, M_RESP} mst_e;
  mst_e         st;
  logic         open [BANKS];
  logic [46:0]  orow [BANKS];
  logic         we;
  logic [63:0]  addr;
  logic [255:0] wdata;
  logic [7:0]   cnt;

  logic [BW-1:0] bank;
  logic [46:0]   row;
  assign bank = req_addr[13 +: BW];
  assign row  = req_addr[63:17];

  assign req_ready = (st == M_IDLE);
  assign rsp_valid = (st == M_RESP);
  assign d_valid   = (st == M_ISSUE);
  assign d_we      = we;
  assign d_addr    = addr;
  assign d_wdata   = wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; we <= 1'b0; addr <= '0; wdata <= '0; cnt <= '0; rsp_rdata <= '0;
      row_hits <= '0; row_misses <= '0;
      for (int b = 0; b < BANKS; b++) begin open[b] <= 1'b0; orow[b] <= '0; end
    end else begin
      unique case (st)
        M_IDLE: if (req_valid) begin
          we <= req_we; addr <= req_addr; wdata <= req_wdata;
          if (open[bank] && orow[bank] == row) begin
            cnt <= 8'(T_CL - 1);
            row_hits <= row_hits + 1'b1;
          end else begin
            cnt <= open[bank] ? 8'(T_RP + T_RCD + T_CL - 1) : 8'(T_RCD + T_CL - 1);
            row_misses <= row_misses + 1'b1;
          end
          open[bank] <= 1'b1;
          orow[bank] <= row;
          st <= M_WAIT;
        end
        M_WAIT:  if (cnt == 0) st <= M_ISSUE; else cnt <= cnt - 1'b1;
        M_ISSUE: st <= we ? M_RESP : M_RDATA;
        M_RDATA: if (d_rvalid) begin rsp_rdata <= d_rdata; st <= M_RESP; end
        M_RESP:  if (rsp_ready) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end

endmodule
