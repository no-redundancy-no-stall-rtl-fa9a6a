// tb_vtu -- Viewpoint Transformation Unit on a 4x3-tile image with an identity
// pose (so every pixel centre reprojects onto itself exactly). Random pixels, some
// masked as interpolated and some off the image, stream in under random
// target back-pressure. The bench models the counter buffer, the depth buffer
// and the shared comparator, then checks: every forwarded pixel, the per-tile
// valid-pixel counts and maximum truncated depths, hit/miss counters, and the
// classification scan (one tile per cycle, render = count <= Thr.2).
module tb_vtu;
  import ls_pkg::*;
  localparam int TX = 4, TY = 3, NT = TX * TY, AW = 4;
  logic clk = 0, rst_n = 0;
  cam_t cam;
  logic ref_valid = 0, ref_ready, tgt_valid, tgt_ready = 1, busy, cnt_inc, dmax_upd;
  ref_pix_t ref_pix;
  tgt_pix_t tgt_pix;
  logic [AW-1:0] upd_addr, cls_addr;
  depth_t upd_dmax;
  logic cls_start = 0, cmp_gt, cls_valid, cls_render, cls_done;
  logic [15:0] cls_count;
  logic [31:0] cmp_value, n_hit, n_miss;
  tile_id_t cls_tile;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vtu #(.TILES_X(TX), .TILES_Y(TY), .AW(AW)) dut (.*);

  int cnt [NT];
  int dmx [NT];
  int exp_cnt [NT];
  int exp_dmx [NT];
  int exp_hit = 0, exp_miss = 0, thr;
  ref_pix_t sent [$];
  assign cls_count = 16'(cnt[cls_addr]);
  assign cmp_gt    = cmp_value > 32'(thr);

  always @(posedge clk) if (rst_n) begin
    if (cnt_inc) cnt[upd_addr] <= cnt[upd_addr] + 1;
    if (dmax_upd && upd_dmax > dmx[upd_addr]) dmx[upd_addr] <= upd_dmax;
  end
  // every forwarded pixel is checked against the next expected hit (in order)
  always @(posedge clk) if (rst_n && tgt_valid && tgt_ready) begin
    ref_pix_t p;
    checks++;
    if (sent.size() == 0) begin failures++; $display("FAIL unexpected pixel (%0d,%0d)", tgt_pix.x, tgt_pix.y); end
    else begin
      p = sent.pop_front();
      if (tgt_pix.x != p.x || tgt_pix.y != p.y || tgt_pix.depth != p.depth ||
          tgt_pix.dmax != p.dmax || tgt_pix.col != p.col) begin
        failures++; $display("FAIL pixel (%0d,%0d) got (%0d,%0d)", p.x, p.y, tgt_pix.x, tgt_pix.y);
      end
    end
  end

  initial begin
    cam = '0;
    cam.kinv_ref[0] = 32'sh10000; cam.kinv_ref[4] = 32'sh10000; cam.kinv_ref[8] = 32'sh10000;
    cam.rt[0] = 32'sh10000; cam.rt[5] = 32'sh10000; cam.rt[10] = 32'sh10000;
    cam.k_tgt[0] = 32'sh10000; cam.k_tgt[4] = 32'sh10000; cam.k_tgt[8] = 32'sh10000;
    for (int t = 0; t < NT; t++) begin cnt[t] = 0; dmx[t] = 0; exp_cnt[t] = 0; exp_dmx[t] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      tgt_ready = ($urandom_range(0, 3) != 0);
      // tile 0 gets many pixels, tile 11 none, others a random share
      ref_pix.x = 12'($urandom_range(0, 70)); ref_pix.y = 12'($urandom_range(0, 40));
      if (i % 3 == 0) begin ref_pix.x = 12'($urandom_range(0, 15)); ref_pix.y = 12'($urandom_range(0, 15)); end
      if (ref_pix.x >= 48 && ref_pix.y >= 32) ref_pix.y = 12'($urandom_range(0, 31));
      ref_pix.depth = 16'($urandom_range(256, 4000)); ref_pix.dmax = 16'(ref_pix.depth + $urandom_range(0, 300));
      ref_pix.col = 24'($urandom); ref_pix.masked = ($urandom_range(0, 7) == 0);
      ref_valid = 1;
      #1; if (ref_ready) begin
        if (!ref_pix.masked && ref_pix.x < TX * 16 && ref_pix.y < TY * 16) begin
          sent.push_back(ref_pix); exp_hit++;
          exp_cnt[(ref_pix.y / 16) * TX + ref_pix.x / 16]++;
          if (ref_pix.dmax > exp_dmx[(ref_pix.y / 16) * TX + ref_pix.x / 16])
            exp_dmx[(ref_pix.y / 16) * TX + ref_pix.x / 16] = ref_pix.dmax;
        end else exp_miss++;
      end
    end
    @(negedge clk); ref_valid = 0; tgt_ready = 1;
    repeat (8) @(negedge clk);
    checks++; if (sent.size() != 0) begin failures++; $display("FAIL %0d pixels lost", sent.size()); end
    for (int t = 0; t < NT; t++) begin
      checks++;
      if (cnt[t] != exp_cnt[t] || dmx[t] != exp_dmx[t]) begin
        failures++; $display("FAIL tile %0d count %0d/%0d dmax %0d/%0d", t, cnt[t], exp_cnt[t], dmx[t], exp_dmx[t]);
      end
    end
    checks++;
    if (n_hit != 32'(exp_hit) || n_miss != 32'(exp_miss)) begin
      failures++; $display("FAIL hit/miss %0d/%0d exp %0d/%0d", n_hit, n_miss, exp_hit, exp_miss);
    end
    // classification with a threshold between the extremes
    thr = exp_cnt[5];
    @(negedge clk); cls_start = 1; @(negedge clk); cls_start = 0;
    for (int t = 0; t < NT; t++) begin
      checks++;
      if (!cls_valid || cls_tile != tile_id_t'(t) || cls_render != (exp_cnt[t] <= thr)) begin
        failures++; $display("FAIL classify tile %0d valid %0d tile %0d render %0d", t, cls_valid, cls_tile, cls_render);
      end
      @(negedge clk);
    end
    checks++; if (!cls_done || cls_valid) begin failures++; $display("FAIL cls_done"); end
    checks++; if (exp_cnt[0] <= thr || exp_cnt[11] != 0) begin failures++; $display("FAIL stimulus spread"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
