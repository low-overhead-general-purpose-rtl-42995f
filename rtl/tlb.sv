// tlb: the on-chip data TLB of an NDP unit.
//
// ENTRIES entries in WAYS-way sets (256 and 8 in the paper), tagged with the
// virtual page number and the ASID of the process the kernel belongs to. The
// lookup is combinational. A refill writes the way given by a per-set
// round-robin pointer (replacement is not given by the paper). A shootdown
// removes the entry of one (ASID, VPN), as the privileged ndpShootdownTlbEntry
// function requires; `flush_all` empties the TLB.
module tlb #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned WAYS    = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [51:0] lk_vpn,
  input  logic [15:0] lk_asid,
  output logic        lk_hit,
  output logic [47:0] lk_ppn,
  input  logic        fill_valid,
  input  logic [51:0] fill_vpn,
  input  logic [15:0] fill_asid,
  input  logic [47:0] fill_ppn,
  input  logic        sd_valid,
  input  logic [51:0] sd_vpn,
  input  logic [15:0] sd_asid,
  input  logic        flush_all
);

  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SW   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic        v;
    logic [51:0] vpn;
    logic [15:0] asid;
    logic [47:0] ppn;
  } te_t;

  te_t           tbl [SETS][WAYS];
  logic [WW-1:0] vict [SETS];

  function automatic logic [SW-1:0] set_of(input logic [51:0] v);
    return (SETS > 1) ? v[SW-1:0] : '0;
  endfunction

  always_comb begin
    lk_hit = 1'b0;
    lk_ppn = '0;
    for (int w = 0; w < WAYS; w++) begin
      te_t e;
      e = tbl[set_of(lk_vpn)][w];
      if (e.v && e.vpn == lk_vpn && e.asid == lk_asid) begin
        lk_hit = 1'b1;
        lk_ppn = e.ppn;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vict[s] <= '0;
        for (int w = 0; w < WAYS; w++) tbl[s][w] <= '0;
      end
    end else begin
      if (fill_valid) begin
        tbl[set_of(fill_vpn)][vict[set_of(fill_vpn)]] <=
          '{v: 1'b1, vpn: fill_vpn, asid: fill_asid, ppn: fill_ppn};
        vict[set_of(fill_vpn)] <= vict[set_of(fill_vpn)] + 1'b1;
      end
      if (sd_valid)
        for (int w = 0; w < WAYS; w++)
          if (tbl[set_of(sd_vpn)][w].vpn == sd_vpn && tbl[set_of(sd_vpn)][w].asid == sd_asid)
            tbl[set_of(sd_vpn)][w].v <= 1'b0;
      if (flush_all)
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++) tbl[s][w].v <= 1'b0;
    end
  end

endmodule
