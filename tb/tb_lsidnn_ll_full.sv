// tb_lsidnn_ll_full: end-to-end test of the low-latency variant at the full
// LSiDNN-48 size: 48 PEs in the hidden layer and 2016 PEs in the output layer,
// each layer evaluated in N_IN clocks (96 + 48 + 13 = 157 clocks from the last
// pilot to the first estimate). Stimulus and checks come from lsidnn_bench.
module tb_lsidnn_ll_full;
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

  lsidnn_top #(.PE_L1(48), .PE_L2(2016)) dut (
    .clk, .rst_n, .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .prm_we, .prm_sel(prm_sel_e'(prm_sel_b)), .prm_row, .prm_col, .prm_data,
    .busy, .frame_err, .state);

  lsidnn_bench #(.PE_L1(48), .PE_L2(2016)) bench (
    .clk, .rst_n, .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .prm_we, .prm_sel(prm_sel_b), .prm_row, .prm_col, .prm_data, .busy, .frame_err, .finished);

  always @(posedge clk) if (finished) $finish;
endmodule
