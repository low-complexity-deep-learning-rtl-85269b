// tb_lsidnn_top: end-to-end test of the core at its default size (LSiDNN-48,
// 48 pilots in, 1008 complex estimates out, (26,8), one PE per layer), with
// the stimulus and checks of lsidnn_bench.
module tb_lsidnn_top;
  import lsidnn_pkg::*;
  logic clk = 0;
  logic rst_n;
  logic [51:0] s_axis_tdata, m_axis_tdata, prm_data;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic prm_we, busy, frame_err, finished;
  logic [2:0] prm_sel_b;
  logic [15:0] prm_row, prm_col;
  state_e state;

  always #5 clk = ~clk;

  lsidnn_top dut (
    .clk, .rst_n, .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .prm_we, .prm_sel(prm_sel_e'(prm_sel_b)), .prm_row, .prm_col, .prm_data,
    .busy, .frame_err, .state);

  lsidnn_bench bench (
    .clk, .rst_n, .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .prm_we, .prm_sel(prm_sel_b), .prm_row, .prm_col, .prm_data, .busy, .frame_err, .finished);

  always @(posedge clk) if (finished) $finish;
endmodule
