// tb_c2r_concat: writes 48 complex LS estimates in random order and checks
// that the 96-element real vector reads back as [Re(0..47), Im(0..47)] with a
// one-clock read latency.
module tb_c2r_concat;
  localparam int DW = 26, N = 48;
  logic clk = 0, we = 0;
  logic [5:0] widx = '0;
  logic signed [DW-1:0] wre = '0, wim = '0, rdata;
  logic [6:0] raddr = '0;
  logic signed [DW-1:0] re_m [N], im_m [N];
  int order [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  c2r_concat #(.DW(DW), .N(N)) dut (.*);

  initial begin
    foreach (order[i]) order[i] = i;
    order.shuffle();
    foreach (order[k]) begin
      automatic int p = order[k];
      re_m[p] = DW'($urandom);
      im_m[p] = DW'($urandom);
      @(negedge clk); we = 1; widx = 6'(p); wre = re_m[p]; wim = im_m[p];
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 3; r++)
      for (int e = 0; e < 2*N; e++) begin
        automatic int a = (r == 0) ? e : $urandom_range(2*N-1);
        raddr = 7'(a);
        @(negedge clk);
        checks++;
        if (rdata !== ((a < N) ? re_m[a] : im_m[a-N])) begin
          failures++;
          $display("FAIL element %0d: %0d", a, rdata);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
