// dram_model: behavioural model of the DRAM devices behind the memory
// controllers (not synthesizable). One sparse store shared by all channels,
// addressed by 32-byte sector; an unwritten sector reads as zero. A read is
// answered the cycle after the controller issues it (the controller itself
// accounts for the row and column timing). Testbenches load and inspect
// memory through the poke/peek functions.
module dram_model #(
  parameter int unsigned NUM_CH = 4
) (
  input  logic              clk,
  input  logic [NUM_CH-1:0] d_valid,
  input  logic [NUM_CH-1:0] d_we,
  input  logic [63:0]       d_addr  [NUM_CH],
  input  logic [255:0]      d_wdata [NUM_CH],
  output logic [NUM_CH-1:0] d_rvalid,
  output logic [255:0]      d_rdata [NUM_CH]
);
  logic [255:0] mem [logic [58:0]];
  int unsigned  reads, writes;

  function automatic logic [255:0] rd_sec(input logic [63:0] a);
    return mem.exists(a[63:5]) ? mem[a[63:5]] : '0;
  endfunction
  function automatic void poke64(input logic [63:0] a, input logic [63:0] v);
    logic [255:0] s;
    s = rd_sec(a);
    s[64 * a[4:3] +: 64] = v;
    mem[a[63:5]] = s;
  endfunction
  function automatic void poke32(input logic [63:0] a, input logic [31:0] v);
    logic [255:0] s;
    s = rd_sec(a);
    s[32 * a[4:2] +: 32] = v;
    mem[a[63:5]] = s;
  endfunction
  function automatic logic [63:0] peek64(input logic [63:0] a);
    logic [255:0] s;
    s = rd_sec(a);
    return s[64 * a[4:3] +: 64];
  endfunction

  initial begin reads = 0; writes = 0; end
  always_ff @(posedge clk) begin
    for (int c = 0; c < NUM_CH; c++) begin
      d_rvalid[c] <= d_valid[c] && !d_we[c];
      if (d_valid[c] && d_we[c]) begin mem[d_addr[c][63:5]] = d_wdata[c]; writes++; end
      if (d_valid[c] && !d_we[c]) begin d_rdata[c] <= rd_sec(d_addr[c]); reads++; end
    end
  end
endmodule
