// counter_buffer -- per-tile counter memory (the paper's 16 KB counter buffer).
// ENTRIES words of W bits, one per tile. The VTU uses it to count reprojected
// pixels per tile; after classification the load distributor reuses it to
// count the Gaussian-tile pairs that survive depth truncation. A second
// instance of the same module holds the per-tile maximum truncated depth.
// Operations (one per cycle, applied at the clock edge):
//   OP_INC  saturating +1;  OP_MAX  word = max(word, data);  OP_WR  word = data
// clear: a pulse starts a sweep that zeroes one word per cycle (ENTRIES
// cycles); busy is high during the sweep and operations are ignored.
// The read port is asynchronous (rd_data follows rd_addr in the same cycle),
// which lets an increment read, add and write in one cycle. An SRAM macro with
// a registered read would need a bypass for back-to-back updates of one word;
// the paper does not describe the macro, so the array is kept generic.
// Default size: 8192 x 16 bit = 16 KB (paper, Sec. VI-A).
module counter_buffer
  import ls_pkg::*;
#(
  parameter int ENTRIES = 8192,
  parameter int W       = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  output logic                       busy,
  input  logic                       op_valid,
  input  logic [1:0]                 op,        // 0: INC, 1: MAX, 2: WR
  input  logic [$clog2(ENTRIES)-1:0] op_addr,
  input  logic [W-1:0]               op_data,
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output logic [W-1:0]               rd_data
);
  localparam int AW = $clog2(ENTRIES);
  localparam logic [1:0] OP_INC = 2'd0, OP_MAX = 2'd1, OP_WR = 2'd2;
  logic [W-1:0]  mem [ENTRIES];
  logic [AW-1:0] clr_addr;
  logic [W-1:0]  cur, nxt;
  logic          we;
  logic [AW-1:0] waddr;

  assign rd_data = mem[rd_addr];
  assign cur     = mem[op_addr];

  always_comb begin
    we = 1'b0; waddr = op_addr; nxt = cur;
    if (busy) begin
      we = 1'b1; waddr = clr_addr; nxt = '0;
    end else if (op_valid) begin
      we = 1'b1;
      case (op)
        OP_INC:  nxt = (cur == '1) ? cur : cur + 1'b1;
        OP_MAX:  nxt = (op_data > cur) ? op_data : cur;
        default: nxt = op_data;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; clr_addr <= '0;
    end else if (clear && !busy) begin
      busy <= 1'b1; clr_addr <= '0;
    end else if (busy) begin
      if (clr_addr == AW'(ENTRIES-1)) busy <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end
  end
  always_ff @(posedge clk) if (we) mem[waddr] <= nxt;
endmodule
