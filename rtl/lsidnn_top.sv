// lsidnn_top: LSiDNN channel-estimation core for pilot-based OFDM.
//
// The core turns the received pilots of one OFDM frame into a channel
// estimate for every resource element of that frame. It is a cascade of
//   LS estimation (ls_estimator, with the reference pilots in ref_pilot_mem)
//   -> complex-to-real flattening (c2r_concat)
//   -> hidden fully connected layer with ReLU (fc_layer, N_IN = 2*N_FP*N_SP)
//   -> hidden-layer buffer (act_buffer)
//   -> output fully connected layer without activation (fc_layer)
//   -> output buffer (act_buffer)
//   -> real-to-complex recombination and streaming (r2c_stream),
// sequenced frame by frame by lsidnn_ctrl. The network both denoises the LS
// estimates and interpolates them to all N_F x N_S positions in one step.
// Default sizes are the published LSiDNN-48 configuration: 48 pilots in, 48
// hidden neurons, 2016 real outputs, (26,8) fixed point, and one PE per layer
// (compute-efficient variant). PE_L1 = N_HID and PE_L2 = 2*N_F*N_S give the
// low-latency variant with all neurons of a layer in parallel.
//
// Interfaces:
//  * s_axis_*: received pilots, one complex sample {im, re} per beat, N_FP*N_SP
//    beats per frame in pilot order (pilot symbol major, sub-carrier minor);
//    tlast is expected on the last beat, a mismatch sets frame_err for the frame.
//  * m_axis_*: estimates, one complex value {im, re} per beat, N_F*N_S beats
//    (OFDM symbol major, sub-carrier minor), tlast on the last.
//  * prm_*: host write port for the network weights and biases and the
//    reference pilots (see lsidnn_pkg::prm_sel_e); a different trained model
//    is configured by rewriting these memories. Write only while busy is low.
// Timing (compute-efficient default): after the last pilot, the hidden layer
// takes 48*96 + 4 clocks and the output layer 2016*48 + 4 clocks; the output
// stream then runs at one beat per clock.
// The parameter port, the stream formats and the ordering are this
// implementation's choices; the published IP attaches to the processor
// through AXI-Stream and DMA.
module lsidnn_top
  import lsidnn_pkg::*;
#(
  parameter int unsigned DW      = lsidnn_pkg::DW_DEF,
  parameter int unsigned FRAC    = lsidnn_pkg::FRAC_DEF,
  parameter int unsigned N_FP    = lsidnn_pkg::N_FP_DEF,
  parameter int unsigned N_SP    = lsidnn_pkg::N_SP_DEF,
  parameter int unsigned N_F     = lsidnn_pkg::N_F_DEF,
  parameter int unsigned N_S     = lsidnn_pkg::N_S_DEF,
  parameter int unsigned N_HID   = lsidnn_pkg::N_HID_DEF,
  parameter int unsigned PE_L1   = 1,
  parameter int unsigned PE_L2   = 1,
  parameter bit          LS_BPSK = 1'b1,
  localparam int unsigned N_P    = N_FP * N_SP,
  localparam int unsigned N_IN   = 2 * N_P,
  localparam int unsigned N_C    = N_F * N_S,
  localparam int unsigned N_OUT  = 2 * N_C
) (
  input  logic            clk,
  input  logic            rst_n,
  // received pilots
  input  logic [2*DW-1:0] s_axis_tdata,
  input  logic            s_axis_tvalid,
  output logic            s_axis_tready,
  input  logic            s_axis_tlast,
  // channel estimates
  output logic [2*DW-1:0] m_axis_tdata,
  output logic            m_axis_tvalid,
  input  logic            m_axis_tready,
  output logic            m_axis_tlast,
  // parameter load
  input  logic            prm_we,
  input  prm_sel_e        prm_sel,
  input  logic [15:0]     prm_row,
  input  logic [15:0]     prm_col,
  input  logic [2*DW-1:0] prm_data,
  // status
  output logic            busy,
  output logic            frame_err,
  output state_e          state
);
  localparam int unsigned PW  = (N_P   > 1) ? $clog2(N_P)   : 1;
  localparam int unsigned I1W = $clog2(N_IN);
  localparam int unsigned HW  = (N_HID > 1) ? $clog2(N_HID) : 1;
  localparam int unsigned OW  = $clog2(N_OUT);
  localparam int unsigned G1  = (N_HID + PE_L1 - 1) / PE_L1;
  localparam int unsigned G2  = (N_OUT + PE_L2 - 1) / PE_L2;
  localparam int unsigned G1W = (G1 > 1) ? $clog2(G1) : 1;
  localparam int unsigned G2W = (G2 > 1) ? $clog2(G2) : 1;

  // ---- sequencing -----------------------------------------------------------
  logic          in_fire, ls_done, l1_start, l1_done, l2_start, l2_done, out_start, out_done;
  logic [PW-1:0] in_idx;

  assign in_fire = s_axis_tvalid && s_axis_tready;

  lsidnn_ctrl #(.N_P(N_P)) u_ctrl (
    .clk, .rst_n, .in_fire, .ls_done, .l1_done, .l2_done, .out_done,
    .in_ready (s_axis_tready), .in_idx, .l1_start, .l2_start, .out_start, .state
  );

  assign busy = (state != ST_S0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) frame_err <= 1'b0;
    else if (in_fire) begin
      if (state == ST_S0) frame_err <= (s_axis_tlast != (in_idx == PW'(N_P - 1)));
      else if (s_axis_tlast != (in_idx == PW'(N_P - 1))) frame_err <= 1'b1;
    end

  // ---- LS estimation ----------------------------------------------------------
  logic [2*DW-1:0]      ref_pilot;
  logic                 ls_valid;
  logic [PW-1:0]        ls_idx;
  logic signed [DW-1:0] ls_re, ls_im;

  ref_pilot_mem #(.DW(DW), .N(N_P)) u_ref (
    .clk,
    .we    (prm_we && prm_sel == PRM_REF),
    .waddr (PW'(prm_row)),
    .wdata (prm_data),
    .raddr (in_idx),
    .rdata (ref_pilot)
  );

  ls_estimator #(.DW(DW), .FRAC(FRAC), .IDXW(PW), .BPSK(LS_BPSK)) u_ls (
    .clk, .rst_n,
    .in_valid  (in_fire),
    .in_idx    (in_idx),
    .y_re      (s_axis_tdata[DW-1:0]),
    .y_im      (s_axis_tdata[2*DW-1:DW]),
    .x_re      (ref_pilot[DW-1:0]),
    .x_im      (ref_pilot[2*DW-1:DW]),
    .out_valid (ls_valid),
    .out_idx   (ls_idx),
    .h_re      (ls_re),
    .h_im      (ls_im)
  );

  assign ls_done = ls_valid && (ls_idx == PW'(N_P - 1));

  // ---- complex -> real ------------------------------------------------------------
  logic [I1W-1:0]       l1_in_addr;
  logic signed [DW-1:0] l1_in_data;

  c2r_concat #(.DW(DW), .N(N_P)) u_c2r (
    .clk,
    .we    (ls_valid),
    .widx  (ls_idx),
    .wre   (ls_re),
    .wim   (ls_im),
    .raddr (l1_in_addr),
    .rdata (l1_in_data)
  );

  // ---- hidden layer ------------------------------------------------------------------
  logic                     l1_busy, l1_we;
  logic [G1W-1:0]           l1_grp;
  logic [PE_L1-1:0]         l1_mask;
  logic [PE_L1-1:0][DW-1:0] l1_out;

  fc_layer #(.DW(DW), .FRAC(FRAC), .N_IN(N_IN), .N_OUT(N_HID), .N_PE(PE_L1), .RELU(1'b1)) u_l1 (
    .clk, .rst_n,
    .start    (l1_start),
    .busy     (l1_busy),
    .done     (l1_done),
    .w_we     (prm_we && prm_sel == PRM_W1),
    .w_neuron (HW'(prm_row)),
    .w_input  (I1W'(prm_col)),
    .w_data   (prm_data[DW-1:0]),
    .b_we     (prm_we && prm_sel == PRM_B1),
    .b_neuron (HW'(prm_row)),
    .b_data   (prm_data[DW-1:0]),
    .in_addr  (l1_in_addr),
    .in_data  (l1_in_data),
    .out_we   (l1_we),
    .out_group(l1_grp),
    .out_mask (l1_mask),
    .out_data (l1_out)
  );

  logic [HW-1:0]        l2_in_addr;
  logic signed [DW-1:0] l2_in_data, hid_unused;

  act_buffer #(.DW(DW), .DEPTH(N_HID), .LANES(PE_L1)) u_hid (
    .clk,
    .we        (l1_we),
    .wr_row    (l1_grp),
    .wr_mask   (l1_mask),
    .wr_data   (l1_out),
    .rd_addr_a (l2_in_addr),
    .rd_data_a (l2_in_data),
    .rd_addr_b ('0),
    .rd_data_b (hid_unused)
  );

  // ---- output layer ------------------------------------------------------------------
  logic                     l2_busy, l2_we;
  logic [G2W-1:0]           l2_grp;
  logic [PE_L2-1:0]         l2_mask;
  logic [PE_L2-1:0][DW-1:0] l2_out;

  fc_layer #(.DW(DW), .FRAC(FRAC), .N_IN(N_HID), .N_OUT(N_OUT), .N_PE(PE_L2), .RELU(1'b0)) u_l2 (
    .clk, .rst_n,
    .start    (l2_start),
    .busy     (l2_busy),
    .done     (l2_done),
    .w_we     (prm_we && prm_sel == PRM_W2),
    .w_neuron (OW'(prm_row)),
    .w_input  (HW'(prm_col)),
    .w_data   (prm_data[DW-1:0]),
    .b_we     (prm_we && prm_sel == PRM_B2),
    .b_neuron (OW'(prm_row)),
    .b_data   (prm_data[DW-1:0]),
    .in_addr  (l2_in_addr),
    .in_data  (l2_in_data),
    .out_we   (l2_we),
    .out_group(l2_grp),
    .out_mask (l2_mask),
    .out_data (l2_out)
  );

  logic [OW-1:0]        o_addr_a, o_addr_b;
  logic signed [DW-1:0] o_data_a, o_data_b;

  act_buffer #(.DW(DW), .DEPTH(N_OUT), .LANES(PE_L2)) u_out (
    .clk,
    .we        (l2_we),
    .wr_row    (l2_grp),
    .wr_mask   (l2_mask),
    .wr_data   (l2_out),
    .rd_addr_a (o_addr_a),
    .rd_data_a (o_data_a),
    .rd_addr_b (o_addr_b),
    .rd_data_b (o_data_b)
  );

  // ---- real -> complex and output stream --------------------------------------------------
  r2c_stream #(.DW(DW), .N_C(N_C)) u_r2c (
    .clk, .rst_n,
    .start     (out_start),
    .done      (out_done),
    .rd_addr_a (o_addr_a),
    .rd_data_a (o_data_a),
    .rd_addr_b (o_addr_b),
    .rd_data_b (o_data_b),
    .m_tdata   (m_axis_tdata),
    .m_tvalid  (m_axis_tvalid),
    .m_tready  (m_axis_tready),
    .m_tlast   (m_axis_tlast)
  );

  // Parameters are only rewritten between frames.
  a_prm: assert property (@(posedge clk) disable iff (!rst_n) prm_we |-> !(l1_busy || l2_busy));
endmodule
