// crossbar: an N_IN x N_OUT crossbar with valid/ready ports and one flit
// (W bits) per port per cycle.
//
// Each input names its output in `in_dst`. Every output has its own
// round-robin arbiter over the inputs that target it, so any set of
// input/output pairs without conflicts moves in the same cycle; a losing
// input keeps its flit (ready low) until it wins. Paths are combinational
// (no pipeline register), which is this design's choice. The M2NDP memory
// system uses one crossbar for requests (NDP units and host port to memory
// channels) and one for responses.
module crossbar #(
  parameter int unsigned N_IN  = 33,
  parameter int unsigned N_OUT = 32,
  parameter int unsigned W     = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_IN-1:0]           in_valid,
  output logic [N_IN-1:0]           in_ready,
  input  logic [W-1:0]              in_data [N_IN],
  input  logic [$clog2(N_OUT)-1:0]  in_dst  [N_IN],
  output logic [N_OUT-1:0]          out_valid,
  input  logic [N_OUT-1:0]          out_ready,
  output logic [W-1:0]              out_data [N_OUT]
);

  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [IW-1:0] rr    [N_OUT];
  logic [IW-1:0] grant [N_OUT];
  logic          gok   [N_OUT];

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      gok[o]   = 1'b0;
      grant[o] = '0;
      for (int j = N_IN - 1; j >= 0; j--) begin
        int unsigned i;
        i = (int'(rr[o]) + j) % N_IN;
        if (in_valid[i] && int'(in_dst[i]) == o) begin
          gok[o]   = 1'b1;
          grant[o] = IW'(i);
        end
      end
      out_valid[o] = gok[o];
      out_data[o]  = in_data[grant[o]];
    end
  end

  // kept apart from the grant logic: out_ready may depend on out_data
  always_comb begin
    in_ready = '0;
    for (int o = 0; o < N_OUT; o++)
      if (gok[o] && out_ready[o]) in_ready[grant[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < N_OUT; o++)
        if (gok[o] && out_ready[o])
          rr[o] <= (int'(grant[o]) == N_IN - 1) ? '0 : grant[o] + 1'b1;
    end
  end

endmodule
