// mem_ctrl_tb: one LPDDR5 channel controller driven with sector reads and
// writes to chosen banks and rows, against the behavioural DRAM model.
// Checks the data read back and the latency from taking a request to
// putting the column access on the DRAM port: tCL for a row hit,
// tRCD + tCL for a closed bank, tRP + tRCD + tCL for a row conflict, with
// the paper's tRCD = 15, tCL = 20, tRP = 15. Also checks the row hit and
// miss counters.
module mem_ctrl_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_we = 0, rsp_valid, rsp_ready = 1;
  logic [63:0] req_addr = 0;
  logic [255:0] req_wdata = 0, rsp_rdata;
  logic [0:0] d_valid, d_we, d_rvalid;
  logic [63:0] d_addr [1];
  logic [255:0] d_wdata [1], d_rdata [1];
  logic [31:0] row_hits, row_misses;

  mem_ctrl dut (.clk, .rst_n, .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
    .rsp_valid, .rsp_ready, .rsp_rdata, .d_valid(d_valid[0]), .d_we(d_we[0]),
    .d_addr(d_addr[0]), .d_wdata(d_wdata[0]), .d_rvalid(d_rvalid[0]), .d_rdata(d_rdata[0]),
    .row_hits, .row_misses);
  dram_model #(.NUM_CH(1)) dram (.clk, .d_valid, .d_we, .d_addr, .d_wdata, .d_rvalid, .d_rdata);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  // one access; returns the cycles from acceptance to the column access
  task automatic access(input bit we, input logic [63:0] a, input logic [255:0] wd,
                        output logic [255:0] rdat, output int lat);
    int t0;
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    t0 = cyc + 1;   // the request is taken at the coming edge
    @(negedge clk);
    req_valid = 0;
    while (!d_valid[0]) @(negedge clk);
    lat = cyc - t0;
    while (!rsp_valid) @(negedge clk);
    rdat = rsp_rdata;
    // hold the response for a few cycles to check it stays
    rsp_ready = 0;
    repeat (2) @(negedge clk);
    check(rsp_valid && rsp_rdata == rdat, "response held while not ready");
    rsp_ready = 1;
    @(negedge clk);
  endtask

  function automatic logic [63:0] adr(input int bank, input int row, input int col);
    return (64'(row) << 17) | (64'(bank) << 13) | (64'(col) << 5);
  endfunction

  logic [255:0] q, v;
  int lat;
  logic [255:0] shadow [logic [63:0]];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    v = {8{32'hA5A5_0001}};
    access(1, adr(3, 10, 0), v, q, lat);
    shadow[adr(3, 10, 0)] = v;
    check(lat == 15 + 20, $sformatf("closed bank latency %0d", lat));
    access(0, adr(3, 10, 0), '0, q, lat);
    check(lat == 20, $sformatf("row hit latency %0d", lat));
    check(q == v, "read after write");
    access(0, adr(3, 11, 2), '0, q, lat);
    check(lat == 15 + 15 + 20, $sformatf("row conflict latency %0d", lat));
    access(0, adr(4, 11, 2), '0, q, lat);
    check(lat == 15 + 20, "other bank closed");
    check(row_hits == 1 && row_misses == 3, "row hit / miss counters");
    // random traffic with a shadow memory and the expected latency model
    begin
      int open_row [16];
      bit is_open [16];
      int h = 1, m = 3;
      foreach (is_open[b]) is_open[b] = 0;
      is_open[3] = 1; open_row[3] = 11; is_open[4] = 1; open_row[4] = 11;
      for (int i = 0; i < 300; i++) begin
        int b, r, c, e;
        bit we;
        logic [63:0] a;
        b = $urandom % 4; r = $urandom % 3 + 10; c = $urandom % 4;
        we = $urandom % 2;
        a = adr(b, r, c);
        v = {8{$urandom}};
        e = (is_open[b] && open_row[b] == r) ? 20 : is_open[b] ? 50 : 35;
        if (e == 20) h++; else m++;
        is_open[b] = 1; open_row[b] = r;
        access(we, a, v, q, lat);
        check(lat == e, $sformatf("latency %0d expected %0d", lat, e));
        if (we) shadow[a] = v;
        else check(q == (shadow.exists(a) ? shadow[a] : '0), "random read data");
      end
      check(row_hits == 32'(h) && row_misses == 32'(m), "counters after random traffic");
    end
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
