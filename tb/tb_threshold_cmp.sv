// tb_threshold_cmp -- checks the shared comparator: threshold selection by
// ctrl and the strict "greater than" test, on edge and random values.
module tb_threshold_cmp;
  logic        ctrl, gt;
  logic [31:0] thr1, thr2, value;
  int checks = 0, failures = 0;
  threshold_cmp #(.W(32)) dut (.ctrl, .thr1, .thr2, .value, .gt);
  task automatic check(input logic c, input logic [31:0] t1, t2, v);
    logic exp_gt;
    ctrl = c; thr1 = t1; thr2 = t2; value = v; #1;
    exp_gt = c ? (v > t2) : (v > t1);
    checks++;
    if (gt !== exp_gt) begin failures++; $display("FAIL ctrl=%0d t1=%0d t2=%0d v=%0d gt=%0d", c, t1, t2, v, gt); end
  endtask
  initial begin
    check(1, 0, 213, 213); check(1, 0, 213, 214); check(0, 100, 0, 100); check(0, 100, 0, 101);
    check(1, 500, 213, 300); check(0, 500, 213, 300);
    for (int i = 0; i < 200; i++) check($urandom_range(0,1), $urandom_range(0,300), $urandom_range(0,300), $urandom_range(0,300));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
