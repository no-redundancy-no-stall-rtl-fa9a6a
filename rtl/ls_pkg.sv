// ls_pkg -- shared types and constants of the streaming 3DGS accelerator.
//
// Number formats (all choices of this design; the paper gives none):
//   screen coordinates  signed Q12.4 (16 bit), pixel (x,y) has its centre at x+0.5
//   2D covariance       signed, 8 fractional bits (pixel^2), 32 bit
//   conic (inverse cov) signed, 16 fractional bits (1/pixel^2), 32 bit
//   depth               unsigned Q8.8 (16 bit)
//   opacity             8 bit code o, opacity = o/256; the alpha threshold 1/255 of
//                       the paper maps to code 1, so ln(o_i/tau) is ln(o)
//   colour              8 bit per channel
// Tiles are 16x16 pixels (paper, Sec. II-A). The default tile grid, 120x68, is a
// 1920x1080 frame: 8160 tiles, which fills the paper's 16 KB counter buffer of
// 8192 16-bit entries.
package ls_pkg;
  localparam int TILE       = 16;           // tile edge in pixels (paper)
  localparam int TILE_PIX   = TILE * TILE;  // 256 pixels per tile
  localparam int COORD_FRAC = 4;
  localparam int COV_FRAC   = 8;
  localparam int CONIC_FRAC = 16;
  localparam int DEPTH_W    = 16;
  localparam int TILE_ID_W  = 16;           // enough for 65536 tiles

  typedef logic [DEPTH_W-1:0] depth_t;
  typedef logic [TILE_ID_W-1:0] tile_id_t;

  typedef struct packed {
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
  } rgb_t;

  // A Gaussian after projection to the screen, as it enters the CCU.
  typedef struct packed {
    logic signed [15:0] mx;   // mean x, Q12.4
    logic signed [15:0] my;   // mean y, Q12.4
    logic signed [31:0] ca;   // covariance xx, 8 frac bits
    logic signed [31:0] cb;   // covariance xy
    logic signed [31:0] cc;   // covariance yy
    logic [7:0]         op;   // opacity code
    rgb_t               col;
    depth_t             depth;
  } gauss_proj_t;

  // The record the rasterizer needs: mean, conic, opacity, colour, depth.
  typedef struct packed {
    logic signed [15:0] mx;
    logic signed [15:0] my;
    logic signed [31:0] qa;   // conic xx, 16 frac bits
    logic signed [31:0] qb;   // conic xy
    logic signed [31:0] qc;   // conic yy
    logic [7:0]         op;
    rgb_t               col;
    depth_t             depth;
  } gauss2d_t;

  // One Gaussian-tile pair.
  typedef struct packed {
    tile_id_t tile;
    gauss2d_t g;
  } pair_t;

  // A reference-frame pixel entering the VTU.
  typedef struct packed {
    logic [11:0] x;
    logic [11:0] y;
    depth_t      depth;   // opacity-weighted scene depth
    depth_t      dmax;    // truncated (early-stopping) depth
    rgb_t        col;
    logic        masked;  // pixel was interpolated: not a reprojection source
  } ref_pix_t;

  // A pixel written into the target frame by the VTU.
  typedef struct packed {
    logic [11:0] x;
    logic [11:0] y;
    depth_t      depth;
    depth_t      dmax;
    rgb_t        col;
  } tgt_pix_t;

  // Camera matrices, signed Q16.16.
  typedef struct packed {
    logic signed [8:0][31:0]  kinv_ref;  // 3x3, row major: pixel -> camera ray (ref)
    logic signed [11:0][31:0] rt;        // 3x4, row major: ref camera -> target camera
    logic signed [8:0][31:0]  k_tgt;     // 3x3, row major: target camera -> pixel
  } cam_t;

  // Entry of a rasterization block's input queue.
  typedef enum logic [1:0] {Q_HDR = 2'd0, Q_GAUSS = 2'd1, Q_END = 2'd2} qkind_e;
  typedef struct packed {
    qkind_e   kind;
    tile_id_t tile;
    gauss2d_t g;
  } vru_cmd_t;

  // Event counters of the whole accelerator, cumulative since reset.
  typedef struct packed {
    logic [31:0] key_frames;     // fully rendered frames
    logic [31:0] sparse_frames;  // frames built by reprojection + partial rendering
    logic [31:0] render_tiles;   // tiles sent to the rasterization blocks
    logic [31:0] interp_tiles;   // tiles sent to the interpolation unit
    logic [31:0] vtu_hit;        // reference pixels that landed on the target image
    logic [31:0] vtu_miss;       // reference pixels masked, behind the camera or off screen
    logic [31:0] culled;         // Gaussians culled by the CCU
    logic [31:0] s2_drop;        // tight-box tiles removed by TAIT Stage II
    logic [31:0] cut_depth;      // pairs removed by depth truncation
    logic [31:0] cut_interp;     // pairs removed because their tile is interpolated
    logic [31:0] pairs;          // pairs kept (total effective load)
    logic [31:0] defer;          // tiles deferred to the next block by the LDU
    logic [31:0] long_lists;     // tiles whose pair list exceeded the sorter capacity
    logic [31:0] stall;          // cycles the sorter output waited on a full block queue
    logic [31:0] bubble;         // block-cycles a rasterization block idled with tiles pending
    logic [31:0] gauss_work;     // Gaussians applied by the rasterization blocks
    logic [31:0] gauss_skip;     // Gaussians skipped because the whole tile had stopped
  } ls_stats_t;

  // Fixed-point log2 of e, Q.8
  localparam int LOG2E_Q8 = 369;
  // 2^(-i/16) for i = 0..15 in Q.8 (round(256 * 2^(-i/16))).
  function automatic logic [8:0] exp2_frac_lut(input logic [3:0] i);
    case (i)
      4'd0: return 9'd256;  4'd1: return 9'd245;  4'd2: return 9'd235;  4'd3: return 9'd225;
      4'd4: return 9'd215;  4'd5: return 9'd206;  4'd6: return 9'd197;  4'd7: return 9'd189;
      4'd8: return 9'd181;  4'd9: return 9'd173;  4'd10: return 9'd166; 4'd11: return 9'd159;
      4'd12: return 9'd152; 4'd13: return 9'd146; 4'd14: return 9'd140; default: return 9'd134;
    endcase
  endfunction

  // Morton (Z-order) decode of a code into (x, y): even bits -> x, odd bits -> y.
  function automatic logic [15:0] morton_x(input logic [31:0] m);
    logic [15:0] r;
    for (int i = 0; i < 16; i++) r[i] = m[2*i];
    return r;
  endfunction
  function automatic logic [15:0] morton_y(input logic [31:0] m);
    logic [15:0] r;
    for (int i = 0; i < 16; i++) r[i] = m[2*i+1];
    return r;
  endfunction
endpackage
