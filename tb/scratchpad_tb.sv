// scratchpad_tb: random reads, byte-masked writes, 64-bit atomic adds and
// argument writes against a reference model of the 128 KB scratchpad.
// Checks the response data (the row as it was before the access), the tag,
// the one-cycle response latency and that an argument write holds off
// requests for its cycle.
module scratchpad_tb;
  import m2ndp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, arg_we = 0;
  mem_op_e req_op = MEM_RD;
  logic [31:0] req_addr = 0, req_wmask = 0;
  logic [FLIT_W-1:0] req_wdata = 0, rsp_rdata;
  logic [5:0] req_tag = 0, rsp_tag;
  logic [1:0] arg_idx = 0;
  logic [63:0] arg_data = 0;

  scratchpad dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic [FLIT_W-1:0] ref_m [logic [11:0]];
  function automatic logic [FLIT_W-1:0] rd(input logic [11:0] r);
    return ref_m.exists(r) ? ref_m[r] : '0;
  endfunction

  logic              exp_v;
  logic [FLIT_W-1:0] exp_d;
  logic [5:0]        exp_t;
  int n_amo = 0, n_wr = 0, n_arg = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    exp_v = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // check the response to the previous cycle's request
      check(rsp_valid == exp_v, "response valid one cycle after the request");
      if (exp_v) begin
        check(rsp_rdata == exp_d, $sformatf("response data, iteration %0d", it));
        check(rsp_tag == exp_t, "response tag");
      end
      // new stimulus
      arg_we    = ($urandom % 10) == 0;
      arg_idx   = 2'($urandom);
      arg_data  = {$urandom, $urandom};
      req_valid = $urandom % 4 != 0;
      req_op    = mem_op_e'($urandom % 3);
      req_addr  = {15'd0, 12'($urandom % 64), 5'($urandom)};
      req_addr[2:0] = 3'd0;
      req_wdata = {8{$urandom}};
      req_wmask = $urandom;
      req_tag   = 6'($urandom);
      #1;
      check(req_ready == !arg_we, "ready low during an argument write");
      exp_v = req_valid && req_ready;
      if (arg_we) begin
        logic [FLIT_W-1:0] r0;
        r0 = rd(0);
        r0[64*arg_idx +: 64] = arg_data;
        ref_m[0] = r0;
        n_arg++;
      end else if (req_valid) begin
        logic [11:0] row;
        logic [FLIT_W-1:0] o, u;
        row = req_addr[16:5];
        o = rd(row);
        u = o;
        exp_d = o; exp_t = req_tag;
        if (req_op == MEM_WR) begin
          for (int i = 0; i < 32; i++) if (req_wmask[i]) u[8*i +: 8] = req_wdata[8*i +: 8];
          n_wr++;
        end else if (req_op == MEM_AMOADD) begin
          u[64*req_addr[4:3] +: 64] = o[64*req_addr[4:3] +: 64] + req_wdata[64*req_addr[4:3] +: 64];
          n_amo++;
        end
        ref_m[row] = u;
      end
    end
    check(n_amo > 100 && n_wr > 100 && n_arg > 50, "all operation kinds exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
