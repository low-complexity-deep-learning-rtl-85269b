// tb_ls_estimator: checks both LS datapaths against the reference arithmetic.
// BPSK: random received samples with reference +1/-1 (and the most negative
// input, which must saturate). Divider: random received and reference pilots,
// including a zero reference. Also checks the one-clock latency and that the
// pilot index is carried through.
module tb_ls_estimator;
  import tb_model_pkg::*;
  localparam int DW = 26, FRAC = 18, IW = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [IW-1:0] in_idx = '0;
  logic signed [DW-1:0] y_re = '0, y_im = '0, x_re = '0, x_im = '0;
  logic v_b, v_d;
  logic [IW-1:0] i_b, i_d;
  logic signed [DW-1:0] hr_b, hi_b, hr_d, hi_d;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ls_estimator #(.DW(DW), .FRAC(FRAC), .IDXW(IW), .BPSK(1'b1)) dut_bpsk (
    .clk, .rst_n, .in_valid, .in_idx, .y_re, .y_im, .x_re, .x_im,
    .out_valid(v_b), .out_idx(i_b), .h_re(hr_b), .h_im(hi_b));
  ls_estimator #(.DW(DW), .FRAC(FRAC), .IDXW(IW), .BPSK(1'b0)) dut_div (
    .clk, .rst_n, .in_valid, .in_idx, .y_re, .y_im, .x_re, .x_im,
    .out_valid(v_d), .out_idx(i_d), .h_re(hr_d), .h_im(hi_d));

  task automatic expect_eq(input string what, input longint got, input longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (y=%0d,%0d x=%0d,%0d)", what, got, exp_v, y_re, y_im, x_re, x_im);
    end
  endtask

  task automatic apply(input longint yr, input longint yi, input longint xr, input longint xi);
    longint er_b, ei_b, nr, ni, dn;
    @(negedge clk);
    in_valid = 1; in_idx = IW'($urandom);
    y_re = DW'(yr); y_im = DW'(yi); x_re = DW'(xr); x_im = DW'(xi);
    // BPSK reference: sign of the reference real part
    er_b = (xr < 0) ? sat(-yr, DW) : yr;
    ei_b = (xr < 0) ? sat(-yi, DW) : yi;
    nr = xr*yr + xi*yi;
    ni = xr*yi - xi*yr;
    dn = xr*xr + xi*xi;
    @(negedge clk);
    in_valid = 0;
    // results registered at the edge between: visible now
    expect_eq("bpsk valid", v_b, 1);
    expect_eq("div valid", v_d, 1);
    expect_eq("bpsk idx", i_b, in_idx);
    expect_eq("bpsk re", hr_b, er_b);
    expect_eq("bpsk im", hi_b, ei_b);
    expect_eq("div re", hr_d, cdiv(nr, dn, DW, FRAC));
    expect_eq("div im", hi_d, cdiv(ni, dn, DW, FRAC));
    @(negedge clk);
    expect_eq("valid drops", v_b | v_d, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // BPSK pilots, reference +1 and -1 in (26,8)
    for (int k = 0; k < 100; k++)
      apply(sx($urandom, DW), sx($urandom, DW), (k % 2) ? (1 <<< FRAC) : -(1 <<< FRAC), 0);
    // most negative input with a -1 reference saturates
    apply(-(64'sd1 <<< (DW-1)), 5, -(1 <<< FRAC), 0);
    // general complex reference, unit-ish magnitude
    for (int k = 0; k < 100; k++)
      apply(sx($urandom, 20), sx($urandom, 20), sx($urandom, 20), sx($urandom, 20));
    // large quotient saturates, zero reference gives zero
    apply(1 <<< 22, -(1 <<< 22), 3, 0);
    apply(1000, 1000, 0, 0);
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
