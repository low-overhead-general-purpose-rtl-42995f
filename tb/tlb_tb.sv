// tlb_tb: the 256-entry 8-way set-associative data TLB. Random fills,
// lookups, shootdowns by (ASID, VPN) and full flushes are compared with a
// reference model that keeps, per set, eight entries replaced in
// round-robin order. Lookups are combinational (same cycle), so each lookup
// is checked before the next clock edge.
module tlb_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [51:0] lk_vpn = 0, fill_vpn = 0, sd_vpn = 0;
  logic [15:0] lk_asid = 0, fill_asid = 0, sd_asid = 0;
  logic lk_hit, fill_valid = 0, sd_valid = 0, flush_all = 0;
  logic [47:0] lk_ppn, fill_ppn = 0;

  tlb dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // reference: 32 sets x 8 ways
  bit          mv   [32][8];
  logic [51:0] mvpn [32][8];
  logic [15:0] masid[32][8];
  logic [47:0] mppn [32][8];
  int          mptr [32];

  function automatic logic [51:0] rvpn();
    // a small VPN space so that lookups hit and sets overflow
    return 52'($urandom % 400);
  endfunction

  int n_hit = 0, n_miss = 0, n_sd = 0;

  initial begin
    foreach (mv[s, w]) mv[s][w] = 0;
    foreach (mptr[s]) mptr[s] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      // update the model for the edge that just passed
      if (flush_all) foreach (mv[s, w]) mv[s][w] = 0;
      else begin
        if (fill_valid) begin
          int s;
          s = int'(fill_vpn[4:0]);
          mv[s][mptr[s]] = 1; mvpn[s][mptr[s]] = fill_vpn; masid[s][mptr[s]] = fill_asid;
          mppn[s][mptr[s]] = fill_ppn;
          mptr[s] = (mptr[s] + 1) % 8;
        end
        if (sd_valid)
          for (int w = 0; w < 8; w++)
            if (mvpn[sd_vpn[4:0]][w] == sd_vpn && masid[sd_vpn[4:0]][w] == sd_asid)
              mv[sd_vpn[4:0]][w] = 0;
      end
      // lookup now
      lk_vpn = rvpn(); lk_asid = 16'($urandom % 2);
      #1;
      begin
        bit h;
        logic [47:0] p;
        h = 0; p = '0;
        for (int w = 0; w < 8; w++)
          if (mv[lk_vpn[4:0]][w] && mvpn[lk_vpn[4:0]][w] == lk_vpn && masid[lk_vpn[4:0]][w] == lk_asid) begin
            h = 1; p = mppn[lk_vpn[4:0]][w];
          end
        check(lk_hit == h, $sformatf("hit of vpn %0d asid %0d", lk_vpn, lk_asid));
        if (h) begin check(lk_ppn == p, "ppn"); n_hit++; end else n_miss++;
        // a miss is filled, as the walker would do
        fill_valid = !h && ($urandom % 2 == 0);
        fill_vpn = lk_vpn; fill_asid = lk_asid; fill_ppn = 48'({$urandom, $urandom});
      end
      sd_valid = ($urandom % 20) == 0;
      sd_vpn = rvpn(); sd_asid = 16'($urandom % 2);
      if (sd_valid) n_sd++;
      flush_all = ($urandom % 3000) == 0;
    end
    check(n_hit > 1000 && n_miss > 1000 && n_sd > 100, "hits, misses and shootdowns happened");
    $display("hits=%0d misses=%0d shootdowns=%0d", n_hit, n_miss, n_sd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
