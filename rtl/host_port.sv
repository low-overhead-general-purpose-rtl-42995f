// host_port: joins the host's normal CXL.mem accesses to the on-chip memory
// system. A 64-byte CXL.mem read or write is split into its two 32-byte
// sectors, sent (one after the other) to the memory channels, and answered
// to the host once both sectors are done. One host access is in flight at a
// time, which is this design's simplification; the paper only requires that
// normal reads and writes keep working next to M2func calls.
module host_port
  import m2ndp_pkg::*;
#(
  parameter logic [5:0] SRC_PORT = 6'd32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  cxl_req_t  in_req,
  output logic      m_valid,
  input  logic      m_ready,
  output mem_req_t  m_req,
  input  logic      m_rsp_valid,
  input  mem_rsp_t  m_rsp,
  output logic      out_valid,
  input  logic      out_ready,
  output cxl_rsp_t  out_rsp
);

  typedef enum logic [1:0] {H_IDLE, H_SEND, H_WAIT, H_RESP} hst_e;
  hst_e      st;
  cxl_req_t  r;
  logic      half;       // next sector to send
  logic [1:0] got;

  assign in_ready  = (st == H_IDLE);
  assign m_valid   = (st == H_SEND);
  assign out_valid = (st == H_RESP);
  always_comb begin
    m_req       = '0;
    m_req.op    = r.is_wr ? MEM_WR : MEM_RD;
    m_req.addr  = {r.addr[63:6], half, 5'b0};
    m_req.wdata = r.data[256 * half +: 256];
    m_req.wmask = '1;
    m_req.id    = {SRC_PORT, 9'd0, half};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_IDLE; r <= '0; half <= 1'b0; got <= '0; out_rsp <= '0;
    end else begin
      if (m_rsp_valid) begin
        out_rsp.data[256 * m_rsp.id[0] +: 256] <= m_rsp.rdata;
        got <= got + 1'b1;
      end
      unique case (st)
        H_IDLE: if (in_valid) begin
          r <= in_req; half <= 1'b0; got <= '0; st <= H_SEND;
          out_rsp <= '{is_wr: in_req.is_wr, data: '0, tag: in_req.tag};
        end
        H_SEND: if (m_ready) begin
          if (half) st <= H_WAIT;
          half <= 1'b1;
        end
        H_WAIT: if (got + 2'(m_rsp_valid) == 2'd2) st <= H_RESP;
        H_RESP: if (out_ready) st <= H_IDLE;
        default: st <= H_IDLE;
      endcase
    end
  end

endmodule
