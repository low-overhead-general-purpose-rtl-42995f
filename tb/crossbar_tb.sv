// crossbar_tb: the 33 x 32 request crossbar (32 NDP units plus the host
// port to 32 memory channels). Every input sends a stream of tagged packets
// to random outputs while the outputs accept at random. Checks that each
// packet arrives once, at its destination, in its input's order, that a
// packet is only taken when its output accepts, and that round-robin
// arbitration lets no input wait more than N_IN grants of its output.
module crossbar_tb;
  localparam int NI = 33, NO = 32, W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NI-1:0] in_valid, in_ready;
  logic [W-1:0]  in_data [NI];
  logic [4:0]    in_dst  [NI];
  logic [NO-1:0] out_valid, out_ready;
  logic [W-1:0]  out_data [NO];

  crossbar dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  localparam int PER_IN = 300;
  int sent [NI], got [NI], wait_c [NI], max_wait;
  int delivered;
  bit took [NI];
  bit hot;   // phase 2: every input targets output 0

  function automatic logic [W-1:0] pkt(input int i, input int n, input int d);
    return {8'(i), 16'(n), 8'(d), 32'hC0DE_0000 | 32'(n)};
  endfunction

  task automatic drive();
    for (int i = 0; i < NI; i++) begin
      if (sent[i] < PER_IN) begin
        int d;
        d = hot ? 0 : ($urandom % NO);
        if (!in_valid[i] || took[i]) begin
          in_valid[i] = 1'b1;
          in_dst[i]   = 5'(d);
          in_data[i]  = pkt(i, sent[i], d);
        end
      end else in_valid[i] = 1'b0;
      took[i] = 1'b0;
    end
  endtask

  initial begin
    in_valid = '0; out_ready = '0; max_wait = 0; delivered = 0; hot = 0;
    foreach (in_data[i]) begin took[i] = 0; in_data[i] = '0; in_dst[i] = '0; sent[i] = 0; got[i] = 0; wait_c[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 2; ph++) begin
      hot = (ph == 1);
      foreach (sent[i]) begin sent[i] = 0; got[i] = 0; end
      in_valid = '0;
      drive();
      for (int cyc = 0; cyc < 40000 && delivered < NI * PER_IN * (ph + 1); cyc++) begin
        out_ready = hot ? '1 : NO'({$urandom, $urandom});
        #1;
        // observe this cycle's transfers
        for (int o = 0; o < NO; o++)
          if (out_valid[o] && out_ready[o]) begin
            int i, n;
            i = int'(out_data[o][63:56]); n = int'(out_data[o][55:40]);
            check(i < NI && int'(out_data[o][39:32]) == o, "packet at its destination");
            check(n == got[i], $sformatf("order of input %0d", i));
            got[i] = n + 1;
            delivered++;
          end
        for (int i = 0; i < NI; i++) begin
          if (in_valid[i] && in_ready[i]) begin
            check(out_valid[in_dst[i]] && out_ready[in_dst[i]] && out_data[in_dst[i]] == in_data[i],
                  "input taken only by its output");
            sent[i]++;
            took[i] = 1'b1;
            wait_c[i] = 0;
          end else if (in_valid[i]) begin
            wait_c[i]++;
            if (hot && wait_c[i] > max_wait) max_wait = wait_c[i];
          end
        end
        @(negedge clk);
        drive();
      end
      foreach (got[i]) check(got[i] == PER_IN, $sformatf("all packets of input %0d in phase %0d", i, ph));
    end
    check(max_wait <= NI, $sformatf("round-robin wait %0d", max_wait));
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
