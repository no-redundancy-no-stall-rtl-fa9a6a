// tb_depth_truncation -- random pairs against random per-tile render bits and
// predicted depths; checks which pairs pass, with and without skip, the
// no-prediction rule for depth 0, back-pressure and the drop counters.
module tb_depth_truncation;
  import ls_pkg::*;
  logic clk = 0, rst_n = 0, skip = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  pair_t in_pair, out_pair;
  tile_id_t lkp_tile;
  logic lkp_render;
  depth_t lkp_dmax;
  logic [31:0] n_cut_depth, n_cut_interp;
  int checks = 0, failures = 0, exp_cd = 0, exp_ci = 0;
  logic   rb [16];
  depth_t dm [16];
  always #5 clk = ~clk;
  assign lkp_render = rb[lkp_tile[3:0]];
  assign lkp_dmax   = dm[lkp_tile[3:0]];
  depth_truncation dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 16; t++) begin rb[t] = (t % 3 != 0); dm[t] = (t == 5) ? 16'd0 : 16'($urandom_range(100, 2000)); end
    for (int i = 0; i < 400; i++) begin
      logic exp_pass;
      @(negedge clk);
      skip = (i >= 300);
      out_ready = ($urandom_range(0, 3) != 0);
      in_pair = '0;
      in_pair.tile = tile_id_t'($urandom_range(0, 15));
      in_pair.g.depth = 16'($urandom_range(50, 2100));
      in_pair.g.op = 8'(i);
      in_valid = 1;
      #1;
      exp_pass = rb[in_pair.tile[3:0]] && (skip || dm[in_pair.tile[3:0]] == 0 || in_pair.g.depth <= dm[in_pair.tile[3:0]]);
      checks++;
      if (out_valid !== exp_pass || (exp_pass && in_ready !== out_ready) || (!exp_pass && !in_ready)) begin
        failures++; $display("FAIL pair %0d tile %0d depth %0d: out_valid %0d exp %0d", i, in_pair.tile, in_pair.g.depth, out_valid, exp_pass);
      end
      if (exp_pass) begin checks++; if (out_pair !== in_pair) begin failures++; $display("FAIL data"); end end
      if (!exp_pass) begin if (!rb[in_pair.tile[3:0]]) exp_ci++; else exp_cd++; end
    end
    @(negedge clk); in_valid = 0; @(negedge clk);
    checks++; if (n_cut_depth != 32'(exp_cd) || n_cut_interp != 32'(exp_ci)) begin
      failures++; $display("FAIL counters %0d/%0d exp %0d/%0d", n_cut_depth, n_cut_interp, exp_cd, exp_ci); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
