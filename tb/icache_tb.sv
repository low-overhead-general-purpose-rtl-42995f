// icache_tb: the 2 KB direct-mapped instruction cache shared by the four
// sub-cores of a unit. Four ports fetch random words from 4 KB of code
// (twice the cache, so lines are replaced) while a memory model answers
// line fills after a random delay. Checks every returned word and tag, the
// one-cycle hit latency, the miss counter, the fill request's address and
// id, and that a flush makes the next fetch of a cached line miss.
module icache_tb;
  import m2ndp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush = 0;
  logic [3:0] f_valid, f_ready, r_valid;
  logic [63:0] f_pc [4];
  logic [3:0] f_tag [4], r_tag;
  logic [31:0] r_instr, misses;
  logic m_valid, m_ready, m_rsp_valid;
  mem_req_t m_req;
  mem_rsp_t m_rsp;

  icache #(.SRC_PORT(6'd5)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  localparam logic [63:0] CODE = 64'h4000_0000;
  function automatic logic [31:0] word(input logic [63:0] a);
    return a[31:0] * 32'd2654435761 ^ 32'h1357_9BDF;
  endfunction

  // memory: one fill at a time, random delay
  int dly;
  logic busy;
  logic [63:0] fa;
  logic [15:0] fid;
  always @(negedge clk) begin
    if (!rst_n) begin busy = 0; m_rsp_valid = 0; m_ready = 0; end
    else begin
      m_rsp_valid = 0;
      if (busy) begin
        if (dly == 0) begin
          m_rsp_valid = 1;
          for (int i = 0; i < 8; i++) m_rsp.rdata[32*i +: 32] = word(fa + 64'(4 * i));
          m_rsp.id = fid;
          busy = 0;
        end else dly--;
      end
      m_ready = !busy && ($urandom % 2 == 0);
    end
  end
  always @(posedge clk) if (rst_n && m_valid && m_ready && !busy) begin
    busy <= 1; fa <= m_req.addr; fid <= m_req.id; dly <= $urandom % 6;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // per-port fetch state
  bit          waiting [4];
  logic [63:0] wpc [4];
  logic [3:0]  wtag [4];
  int          tacc [4];
  int          nret = 0, nhit1 = 0;

  initial begin
    f_valid = '0;
    foreach (f_pc[p]) begin f_pc[p] = 0; f_tag[p] = 0; waiting[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      // responses of the edge that just passed
      for (int p = 0; p < 4; p++)
        if (r_valid[p]) begin
          check(waiting[p], "response only to a waiting port");
          check(r_tag == wtag[p] && r_instr == word(wpc[p]), $sformatf("word at %h", wpc[p]));
          if (cyc - tacc[p] == 0) nhit1++;   // answered in the cycle after the fetch was taken
          waiting[p] = 0; f_valid[p] = 0; nret++;
        end
      if (m_valid) begin
        check(m_req.addr[4:0] == 0 && m_req.op == MEM_RD, "fill request is a sector read");
        check(m_req.id[15:10] == 6'd5 && m_req.id[9:8] == SRC_IFU, "fill request id");
      end
      for (int p = 0; p < 4; p++)
        if (!waiting[p] && !f_valid[p] && $urandom % 2 == 0) begin
          f_valid[p] = 1;
          f_pc[p] = CODE + 64'(4 * ($urandom % 1024));
          f_tag[p] = 4'($urandom);
        end
      #1;
      for (int p = 0; p < 4; p++)
        if (f_valid[p] && f_ready[p]) begin
          waiting[p] = 1; wpc[p] = f_pc[p]; wtag[p] = f_tag[p]; tacc[p] = cyc + 1;
        end
      @(posedge clk);
      #1;
      for (int p = 0; p < 4; p++) if (waiting[p]) f_valid[p] = 0;
    end
    check(nret > 5000 && nhit1 > 1000 && misses > 100, "hits at one cycle and misses");
    // flush: fetch one line twice, flush, fetch again
    begin
      int m0;
      f_valid = '0;
      repeat (20) @(negedge clk);
      for (int k = 0; k < 3; k++) begin
        if (k == 2) begin flush = 1; @(posedge clk); #1; flush = 0; end
        m0 = misses;
        f_valid[0] = 1; f_pc[0] = CODE + 64'h40; f_tag[0] = 4'd9;
        #1;
        while (!f_ready[0]) begin @(negedge clk); #1; end
        @(posedge clk);
        #1;
        f_valid[0] = 0;
        while (!r_valid[0]) @(negedge clk);
        check(r_instr == word(CODE + 64'h40), "word after flush test");
        if (k == 1) check(misses == m0, $sformatf("second fetch hits %0d %0d", misses, m0));
        if (k == 2) check(misses == m0 + 1, $sformatf("fetch after a flush misses %0d %0d", misses, m0));
      end
    end
    $display("returns=%0d one-cycle hits=%0d misses=%0d", nret, nhit1, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
