// tb_sorting_unit -- random lists, some longer than the capacity: checks that
// every run comes out in ascending key order, that equal keys keep arrival
// order, that records keep their data, that out_last marks the list end, and
// that a list of n <= N records takes n cycles in and n cycles out.
module tb_sorting_unit;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1, out_last, busy;
  logic [15:0] in_key, out_key;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sorting_unit #(.N(N), .KEY_W(16), .T(logic [31:0])) dut (.*);

  task automatic run_list(input int len, input int keymax);
    logic [15:0] k [$];
    logic [31:0] d [$];
    int sent = 0, got = 0, run_start = 0, cyc = 0;
    for (int i = 0; i < len; i++) begin k.push_back(16'($urandom_range(0, keymax))); d.push_back(32'(i)); end
    while (got < len) begin
      @(negedge clk);
      in_valid = (sent < len); in_key = (sent < len) ? k[sent] : '0; in_data = (sent < len) ? d[sent] : '0;
      in_last = (sent == len - 1);
      out_ready = ($urandom_range(0, 4) != 0);
      #1;
      if (out_valid && out_ready) begin
        // record must be the minimum of its run (stable): compare with the reference order
        logic [15:0] ek; logic [31:0] ed; int best;
        int rend;
        rend = ((got / N) + 1) * N; if (rend > len) rend = len;
        best = run_start;
        for (int j = run_start; j < rend; j++) if (k[j] < k[best]) best = j;
        ek = k[best]; ed = d[best];
        checks++;
        if (out_key !== ek || out_data !== ed || out_last !== (got == len - 1)) begin
          failures++; $display("FAIL len %0d rec %0d: key %0d data %0d last %0d exp %0d %0d", len, got, out_key, out_data, out_last, ek, ed);
        end
        k[best] = 16'hFFFF; k.delete(best); d.delete(best); k.insert(best, 16'hFFFF); d.insert(best, 32'hFFFF_FFFF);
        // mark consumed: move it out of the search by giving it an impossible position
        k[best] = '1; d[best] = '1;
        got++;
        if (got % N == 0) run_start = got;
      end
      if (in_valid && in_ready) sent++;
      cyc++;
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_list(1, 10); run_list(5, 3); run_list(8, 100); run_list(13, 5); run_list(20, 1000); run_list(7, 0);
    // timing: 6 records, output always ready: 6 cycles in, 6 cycles out
    begin
      int t0, t1;
      @(negedge clk);
      t0 = $time / 10;
      for (int i = 0; i < 6; i++) begin
        in_valid = 1; in_key = 16'(10 - i); in_data = 32'(i); in_last = (i == 5); out_ready = 1;
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      while (!(out_valid && out_last)) @(negedge clk);
      t1 = $time / 10;
      checks++; if (t1 - t0 != 11) begin failures++; $display("FAIL latency %0d cycles, expected 11", t1 - t0); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
