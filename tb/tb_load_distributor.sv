// tb_load_distributor -- inter-block load distribution on a 5x3 tile grid
// (not a power of two, so Morton codes outside the grid must be skipped) with
// four blocks. Each trial draws random per-tile loads and render bits; the
// bench supplies the counter-buffer read and models the shared comparator
// (value > Thr.1). A reference model walks the Morton order with the same
// deferral rule; every assignment (tile, block, load), Thr.1 and the done
// pulse are compared. Trials include a single heavy tile and all-zero loads.
module tb_load_distributor;
  import ls_pkg::*;
  localparam int TX = 5, TY = 3, NT = TX * TY, NB = 4, AW = 4;
  logic clk = 0, rst_n = 0, start = 0, rd_render, cmp_gt, asg_valid, busy, done;
  logic [31:0] total_load, n_tiles, thr1, cmp_value;
  logic [AW-1:0] rd_addr;
  logic [15:0] rd_load, asg_load;
  tile_id_t asg_tile;
  logic [7:0] asg_block;
  int checks = 0, failures = 0, defers = 0;
  always #5 clk = ~clk;
  load_distributor #(.TILES_X(TX), .TILES_Y(TY), .NUM_BLK(NB), .AW(AW)) dut (.*);

  int load [16];
  bit ren [16];
  assign rd_load   = (rd_addr < NT) ? 16'(load[rd_addr]) : 16'd0;
  assign rd_render = (rd_addr < NT) ? ren[rd_addr] : 1'b0;
  assign cmp_gt    = cmp_value > thr1;

  typedef struct { int tile; int blk; int ld; } asg_t;
  asg_t expq [$];
  int exp_thr;

  task automatic build_model();
    int tot, nren, w, n, acc, blk, t;
    tot = 0; nren = 0;
    for (int i = 0; i < NT; i++) if (ren[i]) begin tot += load[i]; nren++; end
    w = tot / NB; n = nren / NB; if (n == 0) n = 1;
    exp_thr = w + w / n;
    acc = 0; blk = 0;
    for (int c = 0; c < 64; c++) begin
      int x, y; asg_t a;
      x = (c & 1) | ((c >> 1) & 2) | ((c >> 2) & 4); y = ((c >> 1) & 1) | ((c >> 2) & 2) | ((c >> 3) & 4);
      if (x >= TX || y >= TY) continue;
      t = y * TX + x;
      if (!ren[t]) continue;
      if (acc + load[t] > exp_thr && blk != NB - 1 && acc != 0) begin blk++; acc = load[t]; defers++; end
      else acc += load[t];
      a.tile = t; a.blk = blk; a.ld = load[t];
      expq.push_back(a);
    end
    total_load = 32'(tot); n_tiles = 32'(nren);
  endtask

  always @(posedge clk) if (rst_n && asg_valid) begin
    asg_t a;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected assignment tile %0d", asg_tile); end
    else begin
      a = expq.pop_front();
      if (int'(asg_tile) != a.tile || int'(asg_block) != a.blk || int'(asg_load) != a.ld) begin
        failures++; $display("FAIL asg tile %0d blk %0d load %0d exp %0d %0d %0d", asg_tile, asg_block, asg_load, a.tile, a.blk, a.ld);
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      for (int i = 0; i < 16; i++) begin
        load[i] = $urandom_range(0, 200);
        ren[i] = ($urandom_range(0, 5) != 0);
        if (trial == 1) load[i] = (i == 7) ? 5000 : 3;          // one hot tile
        if (trial == 2) load[i] = 0;                              // empty frame
      end
      build_model();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (expq.size() != 0 || thr1 != 32'(exp_thr)) begin
        failures++; $display("FAIL trial %0d: %0d assignments missing, thr1 %0d exp %0d", trial, expq.size(), thr1, exp_thr);
      end
      expq.delete();
      @(negedge clk);
      checks++; if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    checks++; if (defers == 0) begin failures++; $display("FAIL no deferral exercised"); end
    $display("defers=%0d", defers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
