// ls_gaussian_top -- streaming 3DGS accelerator with tile-warping sparse
// rendering, depth-predicted early stopping and load-balanced rasterization.
//
// Every (N_WIN+1)-th frame is a key frame, rendered in full; the N_WIN frames
// between are sparse: the previous frame is reprojected to the new viewpoint
// and only the tiles it does not cover well are rendered again. A frame runs
// through these phases, started by frame_start and ended by frame_done:
//   CLR1    clear the counter buffer and the tile-depth buffer
//   REPROJ  (sparse frames) the VTU reprojects the reference frame
//           (ref_* stream, last pixel flagged by ref_last); landing pixels are
//           written out (tgt_*) and counted per tile
//   CLASS   the VTU scans the tiles: count > Thr.2 -> interpolate, otherwise
//           re-render (on key frames every tile is re-rendered); interpolated
//           tiles are then requested on irq_* while the next phases run, and
//           the interpolation unit fills the tiles returned on ip_* (io_*)
//   CLR2    clear the counter buffer, which now counts load
//   PRE     Gaussians (g_* stream, g_last) go through the CCU (culling, TAIT)
//           and depth truncation; kept pairs go out on pr_* to be binned per
//           tile in memory, and each increments its tile's load
//   DIST    the load distributor assigns tiles to the NUM_VRU blocks
//   INTRA   the sorting unit orders each block's tiles light to heavy
//   RENDER  tile by tile, the pair list of a tile is fetched (fr_*, fd_*),
//           depth-sorted by the same sorting unit and queued, framed by a
//           header and an end marker, to its block's volume rendering unit;
//           the emptiest queue is served next; pixels come out on px_*
// The reuse of the counter buffer, of the comparator and of the sorting unit
// for load distribution follows the paper. The strict phase order is this
// design's: the paper overlaps reprojection with preprocessing and
// distribution with sorting, and streams stages across frames.
// Memory-side streams (ref, tgt, irq, ip, pr, fr, fd) connect to off-chip DRAM,
// which is outside this design; all use valid/ready.
module ls_gaussian_top
  import ls_pkg::*;
#(
  parameter int TILES_X    = 120,
  parameter int TILES_Y    = 68,
  parameter int CB_ENTRIES = 8192,    // counter buffer words: 16 KB at 16 bit
  parameter int NUM_VRU    = 4,
  parameter int LANES      = 16,
  parameter int SORT_N     = 256,
  parameter int QDEPTH     = 8,
  parameter int N_WIN      = 5,       // sparse frames between key frames
  parameter int THR2       = 213      // 5/6 of 256 pixels
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cam_t        cam,
  input  logic        frame_start,
  output logic        frame_done,
  output logic        busy,
  output logic        key_frame,
  // reference frame in, target frame out
  input  logic        ref_valid,
  output logic        ref_ready,
  input  ref_pix_t    ref_pix,
  input  logic        ref_last,
  output logic        tgt_valid,
  input  logic        tgt_ready,
  output tgt_pix_t    tgt_pix,
  // interpolation
  output logic        irq_valid,
  input  logic        irq_ready,
  output tile_id_t    irq_tile,
  input  logic        ip_valid,
  output logic        ip_ready,
  input  tile_id_t    ip_tile,
  input  logic        ip_pvalid,
  input  rgb_t        ip_col,
  output logic        io_valid,
  output tile_id_t    io_tile,
  output logic [3:0]  io_row,
  output rgb_t        io_col [TILE],
  output logic [TILE-1:0] io_interp,
  // Gaussians in, pairs out
  input  logic        g_valid,
  output logic        g_ready,
  input  gauss_proj_t g_in,
  input  logic        g_last,
  output logic        pr_valid,
  input  logic        pr_ready,
  output pair_t       pr_pair,
  // per-tile pair fetch
  output logic        fr_valid,
  input  logic        fr_ready,
  output tile_id_t    fr_tile,
  input  logic        fd_valid,
  output logic        fd_ready,
  input  gauss2d_t    fd_g,
  // rendered pixels, one group of LANES per block and cycle
  output logic        px_valid [NUM_VRU],
  output tile_id_t    px_tile  [NUM_VRU],
  output logic [7:0]  px_base  [NUM_VRU],
  output rgb_t        px_col   [NUM_VRU][LANES],
  output depth_t      px_depth [NUM_VRU][LANES],
  output depth_t      px_dmax  [NUM_VRU][LANES],
  output ls_stats_t   stats
);
  localparam int NT = TILES_X * TILES_Y;
  localparam int AW = $clog2(CB_ENTRIES);
  localparam int BW = (NUM_VRU > 1) ? $clog2(NUM_VRU) : 1;

  initial assert (NT <= CB_ENTRIES) else $error("tile grid larger than the counter buffer");

  typedef enum logic [3:0] {P_IDLE, P_CLR1, P_REPROJ, P_CLASS, P_CLR2, P_PRE, P_DIST,
                            P_INTRA, P_RENDER, P_FINISH} phase_e;
  phase_e phase;
  logic [7:0] frame_cnt;
  logic       key;
  assign key_frame = key;
  assign busy      = (phase != P_IDLE);

  // ------------------------------------------------------------ buffers
  logic          cb_clear, db_clear, cb_busy, cb_op_v, cls_started;
  logic [AW-1:0] cb_op_addr, cb_rd_addr;
  logic [15:0]   cb_rd_data;
  logic          db_busy, db_op_v;
  logic [AW-1:0] db_op_addr, db_rd_addr;
  logic [15:0]   db_rd_data, db_op_data;
  logic [CB_ENTRIES-1:0] render_bits;

  counter_buffer #(.ENTRIES(CB_ENTRIES), .W(16)) u_cnt (
    .clk, .rst_n, .clear(cb_clear), .busy(cb_busy), .op_valid(cb_op_v), .op(2'd0),
    .op_addr(cb_op_addr), .op_data(16'd0), .rd_addr(cb_rd_addr), .rd_data(cb_rd_data));
  counter_buffer #(.ENTRIES(CB_ENTRIES), .W(16)) u_dep (
    .clk, .rst_n, .clear(db_clear), .busy(db_busy), .op_valid(db_op_v), .op(2'd1),
    .op_addr(db_op_addr), .op_data(db_op_data), .rd_addr(db_rd_addr), .rd_data(db_rd_data));

  // ------------------------------------------------------------ shared comparator
  logic        cmp_ctrl, cmp_gt;
  logic [31:0] cmp_val, vtu_cmp_val, ld_cmp_val, thr1;
  assign cmp_ctrl = (phase == P_CLASS);
  assign cmp_val  = cmp_ctrl ? vtu_cmp_val : ld_cmp_val;
  threshold_cmp #(.W(32)) u_cmp (.ctrl(cmp_ctrl), .thr1(thr1),
    .thr2(key ? 32'hFFFF_FFFF : 32'(THR2)), .value(cmp_val), .gt(cmp_gt));

  // ------------------------------------------------------------ VTU
  logic          vtu_busy, vtu_inc, vtu_dupd, cls_start, cls_valid, cls_render, cls_done;
  logic [AW-1:0] vtu_upd_addr, vtu_cls_addr;
  depth_t        vtu_upd_dmax;
  tile_id_t      cls_tile;
  logic [31:0]   vtu_hit, vtu_miss;
  logic          ref_in_valid, ref_in_ready;
  logic          ref_done;
  assign ref_in_valid = ref_valid && phase == P_REPROJ && !ref_done;
  assign ref_ready    = ref_in_ready && phase == P_REPROJ && !ref_done;

  vtu #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .AW(AW)) u_vtu (
    .clk, .rst_n, .cam, .ref_valid(ref_in_valid), .ref_ready(ref_in_ready), .ref_pix,
    .tgt_valid, .tgt_ready, .tgt_pix, .busy(vtu_busy), .cnt_inc(vtu_inc), .dmax_upd(vtu_dupd),
    .upd_addr(vtu_upd_addr), .upd_dmax(vtu_upd_dmax), .cls_start, .cls_addr(vtu_cls_addr),
    .cls_count(cb_rd_data), .cmp_value(vtu_cmp_val), .cmp_gt, .cls_valid, .cls_tile,
    .cls_render, .cls_done, .n_hit(vtu_hit), .n_miss(vtu_miss));

  // ------------------------------------------------------------ CCU + depth truncation
  logic        ccu_in_valid, ccu_in_ready, ccu_out_valid, ccu_out_ready, ccu_busy;
  pair_t       ccu_pair;
  logic [31:0] n_culled, n_s2;
  logic        g_done;
  assign ccu_in_valid = g_valid && phase == P_PRE && !g_done;
  assign g_ready      = ccu_in_ready && phase == P_PRE && !g_done;
  ccu #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_ccu (
    .clk, .rst_n, .in_valid(ccu_in_valid), .in_ready(ccu_in_ready), .in_g(g_in),
    .out_valid(ccu_out_valid), .out_ready(ccu_out_ready), .out_pair(ccu_pair),
    .busy(ccu_busy), .n_culled, .n_dropped(n_s2));

  tile_id_t    dt_lkp;
  logic [31:0] n_cut_depth, n_cut_interp;
  depth_truncation u_dt (
    .clk, .rst_n, .skip(key), .in_valid(ccu_out_valid), .in_ready(ccu_out_ready),
    .in_pair(ccu_pair), .lkp_tile(dt_lkp), .lkp_render(render_bits[AW'(dt_lkp)]),
    .lkp_dmax(db_rd_data), .out_valid(pr_valid), .out_ready(pr_ready), .out_pair(pr_pair),
    .n_cut_depth, .n_cut_interp);

  // ------------------------------------------------------------ load distributor
  logic          ld_start, ld_busy, ld_done, asg_valid;
  logic [AW-1:0] ld_rd_addr;
  tile_id_t      asg_tile;
  logic [7:0]    asg_block;
  logic [15:0]   asg_load;
  logic [31:0]   total_load, n_render;
  load_distributor #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .NUM_BLK(NUM_VRU), .AW(AW)) u_ld (
    .clk, .rst_n, .start(ld_start), .total_load, .n_tiles(n_render), .rd_addr(ld_rd_addr),
    .rd_load(cb_rd_data), .rd_render(render_bits[ld_rd_addr]), .thr1, .cmp_value(ld_cmp_val),
    .cmp_gt, .asg_valid, .asg_tile, .asg_block, .asg_load, .busy(ld_busy), .done(ld_done));

  // buffer port multiplexing
  assign cb_rd_addr = (phase == P_CLASS) ? vtu_cls_addr : ld_rd_addr;
  assign cb_op_v    = (phase == P_REPROJ) ? vtu_inc : (phase == P_PRE && pr_valid && pr_ready);
  assign cb_op_addr = (phase == P_REPROJ) ? vtu_upd_addr : AW'(pr_pair.tile);
  assign db_op_v    = (phase == P_REPROJ) && vtu_dupd;
  assign db_op_addr = vtu_upd_addr;
  assign db_op_data = vtu_upd_dmax;
  assign db_rd_addr = AW'(dt_lkp);

  // ------------------------------------------------------------ schedule
  tile_id_t    sched_tile [CB_ENTRIES];
  logic [15:0] sched_load [CB_ENTRIES];
  logic [AW:0] blk_cnt   [NUM_VRU];
  logic [AW:0] blk_start [NUM_VRU];
  logic [AW:0] n_sched;
  always_comb begin
    blk_start[0] = '0;
    for (int b = 1; b < NUM_VRU; b++) blk_start[b] = blk_start[b-1] + blk_cnt[b-1];
  end

  // ------------------------------------------------------------ sorting unit
  logic        so_in_valid, so_in_ready, so_in_last, so_out_valid, so_out_ready, so_out_last, so_busy;
  logic [31:0] so_in_key, so_out_key;
  gauss2d_t    so_in_data, so_out_data;
  sorting_unit #(.N(SORT_N), .KEY_W(32), .T(gauss2d_t)) u_sort (
    .clk, .rst_n, .in_valid(so_in_valid), .in_ready(so_in_ready), .in_key(so_in_key),
    .in_data(so_in_data), .in_last(so_in_last), .out_valid(so_out_valid), .out_ready(so_out_ready),
    .out_key(so_out_key), .out_data(so_out_data), .out_last(so_out_last), .busy(so_busy));

  // ------------------------------------------------------------ rasterization blocks
  logic     q_in_valid [NUM_VRU];
  logic     q_in_ready [NUM_VRU];
  vru_cmd_t q_in_data;
  logic     q_out_valid [NUM_VRU];
  logic     q_out_ready [NUM_VRU];
  vru_cmd_t q_out_data [NUM_VRU];
  logic [$clog2(QDEPTH+1)-1:0] q_cnt [NUM_VRU];
  logic     vru_busy [NUM_VRU];
  logic [31:0] v_work [NUM_VRU];
  logic [31:0] v_skip [NUM_VRU];

  for (genvar b = 0; b < NUM_VRU; b++) begin : g_blk
    sync_fifo #(.T(vru_cmd_t), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .in_valid(q_in_valid[b]), .in_ready(q_in_ready[b]), .in_data(q_in_data),
      .out_valid(q_out_valid[b]), .out_ready(q_out_ready[b]), .out_data(q_out_data[b]),
      .count(q_cnt[b]));
    vru #(.TILES_X(TILES_X), .LANES(LANES)) u_vru (
      .clk, .rst_n, .in_valid(q_out_valid[b]), .in_ready(q_out_ready[b]), .in_cmd(q_out_data[b]),
      .out_valid(px_valid[b]), .out_tile(px_tile[b]), .out_base(px_base[b]),
      .out_col(px_col[b]), .out_depth(px_depth[b]), .out_dmax(px_dmax[b]),
      .busy(vru_busy[b]), .tile_done(), .n_gauss_work(v_work[b]), .n_gauss_skip(v_skip[b]));
  end

  // ------------------------------------------------------------ interpolation
  interp_unit u_interp (
    .clk, .rst_n, .in_valid(ip_valid), .in_ready(ip_ready), .in_tile(ip_tile),
    .in_pvalid(ip_pvalid), .in_col(ip_col), .out_valid(io_valid), .out_tile(io_tile),
    .out_row(io_row), .out_col(io_col), .out_interp(io_interp), .busy());

  // interpolation request scanner, runs beside PRE .. RENDER
  logic          irq_run;
  logic [AW-1:0] irq_t;
  assign irq_valid = irq_run && !render_bits[irq_t];
  assign irq_tile  = tile_id_t'(irq_t);

  // ------------------------------------------------------------ controller
  typedef enum logic [2:0] {R_PICK, R_HDR, R_REQ, R_STREAM, R_END} rstate_e;
  rstate_e      rs;
  logic [BW-1:0] cur_b, pick_b;
  logic          pick_any;
  tile_id_t      cur_t;
  logic [15:0]   cur_l, fed, outc;
  logic [AW:0]   pos [NUM_VRU];
  logic [BW:0]   ib;                     // INTRA: block being ordered
  logic [AW:0]   irp, iwp;               // INTRA: read / write pointers

  // emptiest queue among blocks with tiles left
  always_comb begin
    logic [$clog2(QDEPTH+1)-1:0] best;
    pick_any = 1'b0; pick_b = '0; best = '1;
    for (int b = 0; b < NUM_VRU; b++)
      if (pos[b] < blk_cnt[b] && (!pick_any || q_cnt[b] < best)) begin
        pick_any = 1'b1; pick_b = BW'(b); best = q_cnt[b];
      end
  end

  logic [AW:0] intra_end;
  assign intra_end = blk_start[BW'(ib)] + blk_cnt[BW'(ib)];

  // sorting unit input / output steering
  always_comb begin
    so_in_valid = 1'b0; so_in_key = '0; so_in_data = '0; so_in_last = 1'b0;
    so_out_ready = 1'b0; fd_ready = 1'b0;
    q_in_data = '0;
    for (int b = 0; b < NUM_VRU; b++) q_in_valid[b] = 1'b0;
    if (phase == P_INTRA && ib < (BW+1)'(NUM_VRU)) begin
      so_in_valid  = (irp < intra_end);
      so_in_key    = 32'(sched_load[AW'(irp)]);
      so_in_data   = gauss2d_t'(sched_tile[AW'(irp)]);
      so_in_last   = (irp == intra_end - 1'b1);
      so_out_ready = 1'b1;
    end else if (phase == P_RENDER) begin
      case (rs)
        R_HDR: begin
          q_in_valid[cur_b] = 1'b1; q_in_data = '{kind: Q_HDR, tile: cur_t, g: '0};
        end
        R_END: begin
          q_in_valid[cur_b] = 1'b1; q_in_data = '{kind: Q_END, tile: cur_t, g: '0};
        end
        R_STREAM: begin
          so_in_valid  = fd_valid && (fed < cur_l);
          fd_ready     = so_in_ready && (fed < cur_l);
          so_in_key    = 32'(fd_g.depth);
          so_in_data   = fd_g;
          so_in_last   = (fed == cur_l - 1'b1);
          q_in_valid[cur_b] = so_out_valid;
          q_in_data    = '{kind: Q_GAUSS, tile: cur_t, g: so_out_data};
          so_out_ready = q_in_ready[cur_b];
        end
        default: ;
      endcase
    end
  end
  assign fr_valid = (phase == P_RENDER) && (rs == R_REQ);
  assign fr_tile  = cur_t;

  logic all_idle;
  always_comb begin
    all_idle = 1'b1;
    for (int b = 0; b < NUM_VRU; b++)
      if (vru_busy[b] || q_out_valid[b]) all_idle = 1'b0;
  end

  // statistics
  logic [31:0] st_key, st_sparse, st_render, st_interp, st_defer, st_long, st_stall, st_bubble;
  always_comb begin
    stats = '0;
    stats.key_frames = st_key;     stats.sparse_frames = st_sparse;
    stats.render_tiles = st_render; stats.interp_tiles = st_interp;
    stats.vtu_hit = vtu_hit;       stats.vtu_miss = vtu_miss;
    stats.culled = n_culled;       stats.s2_drop = n_s2;
    stats.cut_depth = n_cut_depth; stats.cut_interp = n_cut_interp;
    stats.pairs = total_load;      stats.defer = st_defer;
    stats.long_lists = st_long;    stats.stall = st_stall;  stats.bubble = st_bubble;
    for (int b = 0; b < NUM_VRU; b++) begin
      stats.gauss_work = stats.gauss_work + v_work[b];
      stats.gauss_skip = stats.gauss_skip + v_skip[b];
    end
  end

  logic [7:0] prev_blk;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE; frame_cnt <= '0; key <= 1'b1; frame_done <= 1'b0;
      cb_clear <= 1'b0; db_clear <= 1'b0; cls_start <= 1'b0; ld_start <= 1'b0; cls_started <= 1'b0;
      ref_done <= 1'b0; g_done <= 1'b0; render_bits <= '0;
      total_load <= '0; n_render <= '0; n_sched <= '0; prev_blk <= '0;
      irq_run <= 1'b0; irq_t <= '0;
      rs <= R_PICK; cur_b <= '0; cur_t <= '0; cur_l <= '0; fed <= '0; outc <= '0;
      ib <= '0; irp <= '0; iwp <= '0;
      st_key <= '0; st_sparse <= '0; st_render <= '0; st_interp <= '0; st_defer <= '0;
      st_long <= '0; st_stall <= '0; st_bubble <= '0;
      for (int b = 0; b < NUM_VRU; b++) begin blk_cnt[b] <= '0; pos[b] <= '0; end
    end else begin
      frame_done <= 1'b0; cb_clear <= 1'b0; db_clear <= 1'b0; cls_start <= 1'b0; ld_start <= 1'b0;

      // interpolation request scanner
      if (irq_run) begin
        if (!irq_valid || irq_ready) begin
          if (irq_t == AW'(NT-1)) irq_run <= 1'b0;
          irq_t <= irq_t + 1'b1;
        end
      end

      case (phase)
        P_IDLE: if (frame_start) begin
          key <= (frame_cnt == 0);
          if (frame_cnt == 0) st_key <= st_key + 1; else st_sparse <= st_sparse + 1;
          cb_clear <= 1'b1; db_clear <= 1'b1; cls_started <= 1'b0;
          ref_done <= 1'b0; g_done <= 1'b0;
          total_load <= '0; n_render <= '0; n_sched <= '0;
          for (int b = 0; b < NUM_VRU; b++) begin blk_cnt[b] <= '0; pos[b] <= '0; end
          phase <= P_CLR1;
        end
        P_CLR1: if (!cb_clear && !db_clear && !cb_busy && !db_busy) phase <= key ? P_CLASS : P_REPROJ;
        P_REPROJ: begin
          if (ref_valid && ref_ready && ref_last) ref_done <= 1'b1;
          if (ref_done && !vtu_busy) begin phase <= P_CLASS; end
        end
        P_CLASS: begin
          if (!cls_started) begin cls_start <= 1'b1; cls_started <= 1'b1; end
          if (cls_valid) begin
            render_bits[AW'(cls_tile)] <= cls_render;
            if (cls_render) begin n_render <= n_render + 1; st_render <= st_render + 1; end
            else st_interp <= st_interp + 1;
          end
          if (cls_done) begin
            irq_run <= !key; irq_t <= '0;
            cb_clear <= 1'b1; phase <= P_CLR2;
          end
        end
        P_CLR2: if (!cb_clear && !cb_busy) phase <= P_PRE;
        P_PRE: begin
          if (g_valid && g_ready && g_last) g_done <= 1'b1;
          if (pr_valid && pr_ready) total_load <= total_load + 1;
          if (g_done && !ccu_busy && !ccu_out_valid) begin ld_start <= 1'b1; phase <= P_DIST; end
        end
        P_DIST: begin
          if (asg_valid) begin
            sched_tile[AW'(n_sched)] <= asg_tile;
            sched_load[AW'(n_sched)] <= asg_load;
            n_sched <= n_sched + 1'b1;
            blk_cnt[BW'(asg_block)] <= blk_cnt[BW'(asg_block)] + 1'b1;
            if (asg_block != prev_blk && n_sched != 0) st_defer <= st_defer + 1;
            prev_blk <= asg_block;
          end
          if (ld_done) begin
            phase <= P_INTRA; ib <= '0; irp <= '0; iwp <= '0; prev_blk <= '0;
          end
        end
        P_INTRA: begin
          if (ib == (BW+1)'(NUM_VRU)) begin
            phase <= P_RENDER; rs <= R_PICK;
          end else begin
            if (so_in_valid && so_in_ready) irp <= irp + 1'b1;
            if (so_out_valid) begin
              sched_tile[AW'(iwp)] <= tile_id_t'(so_out_data);
              sched_load[AW'(iwp)] <= 16'(so_out_key);
              iwp <= iwp + 1'b1;
            end
            if (iwp == intra_end && !so_busy) begin
              ib <= ib + 1'b1;
            end
          end
        end
        P_RENDER: begin
          case (rs)
            R_PICK: begin
              if (pick_any) begin
                cur_b <= pick_b;
                cur_t <= sched_tile[AW'(blk_start[pick_b] + pos[pick_b])];
                cur_l <= sched_load[AW'(blk_start[pick_b] + pos[pick_b])];
                rs    <= R_HDR;
              end else if (all_idle) phase <= P_FINISH;
            end
            R_HDR: if (q_in_ready[cur_b]) begin
              fed <= '0; outc <= '0;
              if (cur_l > 16'(SORT_N)) st_long <= st_long + 1;
              rs <= (cur_l == 0) ? R_END : R_REQ;
            end
            R_REQ: if (fr_ready) rs <= R_STREAM;
            R_STREAM: begin
              if (so_in_valid && so_in_ready) fed <= fed + 1'b1;
              if (so_out_valid && !q_in_ready[cur_b]) st_stall <= st_stall + 1;
              if (so_out_valid && q_in_ready[cur_b]) begin
                outc <= outc + 1'b1;
                if (outc == cur_l - 1'b1) rs <= R_END;
              end
            end
            R_END: if (q_in_ready[cur_b]) begin
              pos[cur_b] <= pos[cur_b] + 1'b1;
              rs <= R_PICK;
            end
            default: rs <= R_PICK;
          endcase
          for (int b = 0; b < NUM_VRU; b++)
            if (!vru_busy[b] && !q_out_valid[b] && pos[b] < blk_cnt[b]) st_bubble <= st_bubble + 1;
        end
        P_FINISH: if (!irq_run) begin
          frame_done <= 1'b1;
          frame_cnt  <= (frame_cnt == 8'(N_WIN)) ? 8'd0 : frame_cnt + 1'b1;
          phase      <= P_IDLE;
        end
        default: phase <= P_IDLE;
      endcase
    end
  end
endmodule
