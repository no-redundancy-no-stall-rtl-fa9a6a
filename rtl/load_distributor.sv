// load_distributor -- inter-block workload distribution of the LDU.
// After depth truncation the counter buffer holds each tile's effective load
// (surviving Gaussian-tile pairs). On start the unit computes
//   W   = total / NUM_BLK          ideal load per rasterization block
//   N   = max(1, n_tiles / NUM_BLK) tiles per block
//   thr = W + W / N                 = (1 + 1/N) W   (Thr.1)
// then visits the tile grid in Morton (Z) order, skipping tiles outside the
// grid and tiles that are interpolated, and assigns tiles to blocks in turn.
// When the block's running load plus the tile's load exceeds Thr.1 (tested on
// the shared comparator, Thr.1 selected), the tile is deferred to the next
// block, which starts with it; the last block takes whatever remains.
// One Morton code per cycle; each assignment is output as (tile, block, load)
// with asg_valid (no back-pressure). done pulses at the end.
// The formula, the deferral rule and the Morton order are the paper's (Sec.
// V-B); the integer rounding and "a block never starts empty-handed" rule (a
// tile is never deferred from an empty block) are this design's.
module load_distributor
  import ls_pkg::*;
#(
  parameter int TILES_X = 120,
  parameter int TILES_Y = 68,
  parameter int NUM_BLK = 4,
  parameter int AW      = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   total_load,
  input  logic [31:0]   n_tiles,
  output logic [AW-1:0] rd_addr,        // counter buffer and render bit lookup
  input  logic [15:0]   rd_load,
  input  logic          rd_render,
  output logic [31:0]   thr1,
  output logic [31:0]   cmp_value,
  input  logic          cmp_gt,
  output logic          asg_valid,
  output tile_id_t      asg_tile,
  output logic [7:0]    asg_block,
  output logic [15:0]   asg_load,
  output logic          busy,
  output logic          done
);
  localparam int MAXD = (TILES_X > TILES_Y) ? TILES_X : TILES_Y;
  localparam int MB   = (MAXD > 1) ? $clog2(MAXD) : 1;
  localparam int MW   = 2 * MB;

  typedef enum logic [1:0] {S_IDLE, S_CALC, S_SCAN} state_e;
  state_e state;
  logic [MW-1:0] code;
  logic [15:0]   mx, my;
  logic          in_grid;
  logic [31:0]   acc, w_avg, n_per;
  logic [7:0]    blk;

  assign mx      = morton_x(32'(code));
  assign my      = morton_y(32'(code));
  assign in_grid = (mx < 16'(TILES_X)) && (my < 16'(TILES_Y));
  assign rd_addr = AW'(32'(my) * TILES_X + 32'(mx));
  assign cmp_value = acc + 32'(rd_load);
  assign busy    = (state != S_IDLE);

  logic take, defer;
  assign take  = (state == S_SCAN) && in_grid && rd_render;
  assign defer = cmp_gt && (blk != 8'(NUM_BLK-1)) && (acc != 0);
  assign asg_valid = take;
  assign asg_tile  = tile_id_t'(rd_addr);
  assign asg_block = defer ? blk + 1'b1 : blk;
  assign asg_load  = rd_load;

  always_comb begin
    w_avg = total_load / NUM_BLK;
    n_per = n_tiles / NUM_BLK;
    if (n_per == 0) n_per = 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; code <= '0; acc <= '0; blk <= '0; thr1 <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) state <= S_CALC;
        S_CALC: begin
          thr1  <= w_avg + w_avg / n_per;
          code  <= '0; acc <= '0; blk <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (take) begin
            if (defer) begin
              blk <= blk + 1'b1;
              acc <= 32'(rd_load);
            end else acc <= acc + 32'(rd_load);
          end
          if (code == '1) begin
            state <= S_IDLE; done <= 1'b1;
          end
          code <= code + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
