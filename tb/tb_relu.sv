// tb_relu: checks y = max(0, x) on the extremes and on random 26-bit words.
module tb_relu;
  localparam int DW = 26;
  logic signed [DW-1:0] x, y;
  int checks = 0, failures = 0;

  relu #(.DW(DW)) dut (.x(x), .y(y));

  task automatic check(input logic signed [DW-1:0] v);
    logic signed [DW-1:0] exp_y;
    x = v;
    #1;
    exp_y = (v > 0) ? v : '0;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL relu(%0d) = %0d, expected %0d", v, y, exp_y);
    end
  endtask

  initial begin
    check('0);
    check(26'sd1);
    check(-26'sd1);
    check({1'b0, {(DW-1){1'b1}}});
    check({1'b1, {(DW-1){1'b0}}});
    for (int i = 0; i < 500; i++) check(DW'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
