// tb_lsidnn_ll: end-to-end test of the low-latency variant: every neuron of a
// layer has its own PE (PE_L1 = N_HID, PE_L2 = 2*N_F*N_S), and the LS stage
// uses the general complex divider. Frame sizes are reduced (8 pilots, 5
// hidden neurons, 18 estimates) to keep the fully parallel output layer small;
// stimulus and checks come from lsidnn_bench.
module tb_lsidnn_ll;
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

  lsidnn_top #(.N_FP(4), .N_SP(2), .N_F(6), .N_S(3), .N_HID(5),
               .PE_L1(5), .PE_L2(36), .LS_BPSK(1'b0)) dut (
    .clk, .rst_n, .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .prm_we, .prm_sel(prm_sel_e'(prm_sel_b)), .prm_row, .prm_col, .prm_data,
    .busy, .frame_err, .state);

  lsidnn_bench #(.N_FP(4), .N_SP(2), .N_F(6), .N_S(3), .N_HID(5),
                 .PE_L1(5), .PE_L2(36), .BPSK(1'b0)) bench (
    .clk, .rst_n, .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .prm_we, .prm_sel(prm_sel_b), .prm_row, .prm_col, .prm_data, .busy, .frame_err, .finished);

  always @(posedge clk) if (finished) $finish;
endmodule
