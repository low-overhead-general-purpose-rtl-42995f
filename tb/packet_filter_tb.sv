// packet_filter_tb: the M2func packet filter with its 1024-entry region
// table. Sixteen regions (some overlapping, one privileged, one later
// removed) are written through the configuration port; then a random stream
// of CXL.mem requests, inside and outside the regions, flows through while
// both outputs apply random back-pressure. Checks that each request comes
// out once, in order, on the right side (normal memory access or M2func
// call), and that a call carries the matching entry's index, ASID,
// privilege flag and the offset from the region base; the lowest matching
// index wins. The filter adds one register stage.
module packet_filter_tb;
  import m2ndp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0, cfg_valid = 0, cfg_priv = 0;
  logic [9:0] cfg_idx = 0;
  logic [63:0] cfg_base = 0, cfg_bound = 0;
  logic [15:0] cfg_asid = 0;
  logic in_valid = 0, in_ready, mem_valid, mem_ready = 0, func_valid, func_ready = 0;
  cxl_req_t in_req, mem_req;
  func_req_t func_req;

  packet_filter dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  localparam int NR = 16;
  logic [63:0] rb [NR], re [NR];
  logic [15:0] ra [NR];
  bit rp [NR], rv [NR];
  int ridx [NR];

  cxl_req_t q [$];
  int n_func = 0, n_mem = 0, sent = 0, lat1 = 0;

  initial begin
    in_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++) begin
      ridx[r] = r * 61 + 3;                       // spread over the table
      rb[r] = 64'h0100_0000 + 64'(r) * 64'h4000;  // 16 KB apart
      re[r] = rb[r] + 64'h3FFF + ((r % 4 == 0) ? 64'h4000 : 0);  // some overlap the next
      ra[r] = 16'(100 + r);
      rp[r] = (r == 5);
      rv[r] = 1;
      cfg_we = 1; cfg_idx = 10'(ridx[r]); cfg_valid = 1; cfg_priv = rp[r];
      cfg_base = rb[r]; cfg_bound = re[r]; cfg_asid = ra[r];
      @(negedge clk);
    end
    // remove region 9
    cfg_idx = 10'(ridx[9]); cfg_valid = 0; rv[9] = 0;
    @(negedge clk);
    cfg_we = 0;
    for (int it = 0; it < 12000; it++) begin
      // consume outputs
      mem_ready  = $urandom % 3 != 0;
      func_ready = $urandom % 3 != 0;
      if (!in_valid || in_ready) begin
        in_valid = 0;
        if (sent < 4000 && $urandom % 4 != 0) begin
          in_valid = 1;
          in_req.is_wr = $urandom;
          in_req.addr  = 64'h00FF_0000 + 64'($urandom % 32'h5_0000);
          in_req.data  = {16{$urandom}};
          in_req.tag   = 16'(sent);
        end
      end
      #1;
      if (mem_valid && mem_ready) begin
        cxl_req_t e;
        e = q.pop_front();
        check(mem_req == e, "normal access passes unchanged and in order");
        for (int r = 0; r < NR; r++)
          if (rv[r]) check(!(e.addr >= rb[r] && e.addr <= re[r]), "normal access is outside all regions");
        n_mem++;
      end
      if (func_valid && func_ready) begin
        cxl_req_t e;
        int m;
        e = q.pop_front();
        m = -1;
        for (int r = NR - 1; r >= 0; r--) if (rv[r] && e.addr >= rb[r] && e.addr <= re[r]) m = r;
        check(m >= 0, "call is inside a region");
        if (m >= 0)
          check(func_req.entry == 10'(ridx[m]) && func_req.asid == ra[m] && func_req.priv == rp[m]
                && func_req.offset == e.addr - rb[m] && func_req.data == e.data
                && func_req.tag == e.tag && func_req.is_wr == e.is_wr,
                $sformatf("call fields at %h", e.addr));
        n_func++;
      end
      check(!(mem_valid && func_valid), "one output at a time");
      if (in_valid && in_ready) begin q.push_back(in_req); sent++; end
      @(negedge clk);
    end
    check(q.size() == 0 && n_mem + n_func == sent, "every request came out once");
    check(n_mem > 500 && n_func > 500, "both paths used");
    $display("normal=%0d calls=%0d", n_mem, n_func);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
