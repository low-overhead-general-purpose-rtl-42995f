// l2_slice_tb: one memory-side L2 slice (128 KB, 16 ways, 128-byte lines,
// 32-byte sectors) in front of a memory controller and the DRAM model.
// Memory starts with known random contents. Random reads, byte-masked
// writes and 64-bit atomic adds go to lines that crowd a few sets, so that
// LRU replacement and dirty write-back happen. Every response is compared
// with a reference memory; the hit latency must be the paper's 7 cycles;
// at the end the cache is flushed by conflicting reads and the DRAM contents
// must equal the reference.
module l2_slice_tb;
  import m2ndp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  mem_req_t req;
  mem_rsp_t rsp;
  logic mc_valid, mc_ready, mc_we, mc_rsp_valid, mc_rsp_ready;
  logic [63:0] mc_addr;
  logic [255:0] mc_wdata, mc_rdata;
  logic [31:0] hits, misses, atomics, rh, rm;
  logic [0:0] d_valid, d_we, d_rvalid;
  logic [63:0] d_addr [1];
  logic [255:0] d_wdata [1], d_rdata [1];

  l2_slice dut (.*);
  mem_ctrl u_mc (.clk, .rst_n, .req_valid(mc_valid), .req_ready(mc_ready), .req_we(mc_we),
    .req_addr(mc_addr), .req_wdata(mc_wdata), .rsp_valid(mc_rsp_valid),
    .rsp_ready(mc_rsp_ready), .rsp_rdata(mc_rdata), .d_valid(d_valid[0]), .d_we(d_we[0]),
    .d_addr(d_addr[0]), .d_wdata(d_wdata[0]), .d_rvalid(d_rvalid[0]), .d_rdata(d_rdata[0]),
    .row_hits(rh), .row_misses(rm));
  dram_model #(.NUM_CH(1)) dram (.clk, .d_valid, .d_we, .d_addr, .d_wdata, .d_rvalid, .d_rdata);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  logic [255:0] refm [logic [58:0]];
  function automatic logic [255:0] ref_rd(input logic [63:0] a);
    return refm.exists(a[63:5]) ? refm[a[63:5]] : '0;
  endfunction

  task automatic access(input mem_op_e op, input logic [63:0] a, input logic [255:0] wd,
                        input logic [31:0] wm, input logic [15:0] id,
                        output logic [255:0] q, output int lat);
    int t0;
    @(negedge clk);
    req_valid = 1;
    req = '{op: op, addr: a, wdata: wd, wmask: wm, id: id};
    while (!req_ready) @(negedge clk);
    t0 = cyc + 1;
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    lat = cyc - t0;
    q = rsp.rdata;
    check(rsp.id == id, "response id");
    if ($urandom % 4 == 0) begin
      rsp_ready = 0;
      @(negedge clk);
      check(rsp_valid && rsp.rdata == q, "response held");
      rsp_ready = 1;
    end
  endtask

  // lines: 24 lines in set 0 and 24 in set 1 (more than the 16 ways)
  function automatic logic [63:0] line_addr(input int i);
    return 64'h0100_0000 + (64'(i % 24) << 13) + (64'(i / 24) << 7);
  endfunction

  logic [255:0] q, e, u;
  int lat, nhit_lat = 0;

  initial begin
    for (int i = 0; i < 48; i++)
      for (int s = 0; s < 4; s++) begin
        logic [63:0] a;
        a = line_addr(i) + 64'(32 * s);
        for (int w = 0; w < 4; w++) dram.poke64(a + 64'(8 * w), {$urandom, $urandom});
        refm[a[63:5]] = dram.rd_sec(a);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a miss, then a hit on the same sector: 7 cycles
    access(MEM_RD, line_addr(0), '0, '0, 16'h1234, q, lat);
    check(q == ref_rd(line_addr(0)), "miss data");
    check(lat > 7 + 20, "a miss goes to DRAM");
    access(MEM_RD, line_addr(0) + 8, '0, '0, 16'h0042, q, lat);
    check(lat == 7, $sformatf("hit latency %0d", lat));
    for (int it = 0; it < 3000; it++) begin
      mem_op_e op;
      logic [63:0] a;
      logic [31:0] wm;
      logic [255:0] wd;
      int h0;
      op = mem_op_e'($urandom % 3);
      a = line_addr($urandom % 48) + 64'(32 * ($urandom % 4)) + 64'(8 * ($urandom % 4));
      wm = ($urandom % 3 == 0) ? '1 : $urandom;
      wd = {8{$urandom}};
      h0 = hits;
      access(op, a, wd, wm, 16'($urandom), q, lat);
      e = ref_rd(a);
      // a write's response carries no data (a full-sector write is not fetched)
      if (op != MEM_WR) check(q == e, $sformatf("data of op %0d at %h", op, a));
      if (hits != h0) begin
        check(lat == 7, $sformatf("hit latency %0d", lat));
        nhit_lat++;
      end
      u = e;
      if (op == MEM_WR)
        for (int i = 0; i < 32; i++) begin if (wm[i]) u[8*i +: 8] = wd[8*i +: 8]; end
      else if (op == MEM_AMOADD) u[64*a[4:3] +: 64] = e[64*a[4:3] +: 64] + wd[64*a[4:3] +: 64];
      refm[a[63:5]] = u;
    end
    // evict everything: read 16 other lines in each of the two sets
    for (int i = 0; i < 16; i++)
      for (int s = 0; s < 2; s++)
        access(MEM_RD, 64'h0800_0000 + (64'(i) << 13) + (64'(s) << 7), '0, '0, 0, q, lat);
    for (int i = 0; i < 48; i++)
      for (int s = 0; s < 4; s++) begin
        logic [63:0] a;
        a = line_addr(i) + 64'(32 * s);
        check(dram.rd_sec(a) == ref_rd(a), $sformatf("write-back of %h", a));
      end
    check(nhit_lat > 100 && misses > 100 && atomics > 100, "hits, misses and atomics happened");
    $display("hits=%0d misses=%0d atomics=%0d", hits, misses, atomics);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
