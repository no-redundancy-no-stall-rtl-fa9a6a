// tb_counter_buffer -- checks clear (and its ENTRIES-cycle duration),
// saturating increment, max-update and write against a model array.
module tb_counter_buffer;
  localparam int E = 32, W = 8;
  logic clk = 0, rst_n = 0, clear = 0, busy, op_valid = 0;
  logic [1:0] op = 0;
  logic [4:0] op_addr = 0, rd_addr = 0;
  logic [W-1:0] op_data = 0, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model [E];
  always #5 clk = ~clk;
  counter_buffer #(.ENTRIES(E), .W(W)) dut (.*);
  task automatic do_op(input logic [1:0] o, input int a, input int d);
    @(negedge clk); op_valid = 1; op = o; op_addr = 5'(a); op_data = W'(d);
    @(negedge clk); op_valid = 0;
    case (o)
      0: if (model[a] != '1) model[a] = model[a] + 1;
      1: if (W'(d) > model[a]) model[a] = W'(d);
      default: model[a] = W'(d);
    endcase
  endtask
  task automatic compare_all();
    for (int a = 0; a < E; a++) begin
      rd_addr = 5'(a); #1; checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL addr %0d got %0d exp %0d", a, rd_data, model[a]); end
    end
  endtask
  initial begin
    int cyc;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    cyc = 0; while (busy) begin @(negedge clk); cyc++; end
    checks++; if (cyc != E) begin failures++; $display("FAIL clear took %0d cycles", cyc); end
    for (int a = 0; a < E; a++) model[a] = 0;
    compare_all();
    for (int i = 0; i < 300; i++) do_op(2'($urandom_range(0, 2)), $urandom_range(0, E-1), $urandom_range(0, 255));
    for (int i = 0; i < 300; i++) do_op(2'd0, 3, 0);          // saturation
    compare_all();
    checks++; if (model[3] != 8'hFF) begin failures++; $display("FAIL saturation model"); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (busy) @(negedge clk);
    for (int a = 0; a < E; a++) model[a] = 0;
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
