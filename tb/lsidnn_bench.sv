// lsidnn_bench: stimulus and checker for a whole LSiDNN core.
//
// Generates a random network (weights, biases) and a fixed +/-1 (or, for the
// divider datapath, random complex) reference pilot pattern, loads
// them through the parameter port, sends frames of received pilots and checks
// every output estimate against a bit-accurate model of LS estimation,
// real/imaginary flattening, the ReLU hidden layer and the linear output layer.
// Frames:
//  1. plain frame, model A, tready always high; checks the latency from the
//     last accepted pilot to the first estimate (G1*N_IN + G2*N_HID + 13
//     clocks) and that the stream then runs at one beat per clock;
//  2. model A, gaps in the input stream, random output back-pressure and a
//     misplaced tlast, which must raise frame_err;
//  3. after reloading the memories with model B (memory-based
//     reconfiguration), which has large weights on some output neurons so
//     that they saturate.
// Every mechanism is counted; one that never happened counts as a failure.
module lsidnn_bench #(
  parameter int DW = 26, FRAC = 18,
  parameter int N_FP = 24, N_SP = 2, N_F = 72, N_S = 14, N_HID = 48,
  parameter int PE_L1 = 1, PE_L2 = 1,
  parameter bit BPSK = 1'b1
) (
  input  logic            clk,
  output logic            rst_n,
  output logic [2*DW-1:0] s_axis_tdata,
  output logic            s_axis_tvalid,
  input  logic            s_axis_tready,
  output logic            s_axis_tlast,
  input  logic [2*DW-1:0] m_axis_tdata,
  input  logic            m_axis_tvalid,
  output logic            m_axis_tready,
  input  logic            m_axis_tlast,
  output logic            prm_we,
  output logic [2:0]      prm_sel,
  output logic [15:0]     prm_row,
  output logic [15:0]     prm_col,
  output logic [2*DW-1:0] prm_data,
  input  logic            busy,
  input  logic            frame_err,
  output logic            finished    // TB_RESULT printed; the wrapper ends the run
);
  import tb_model_pkg::*;
  localparam int N_P = N_FP * N_SP, N_IN = 2 * N_P, N_C = N_F * N_S, N_OUT = 2 * N_C;
  localparam int G1 = (N_HID + PE_L1 - 1) / PE_L1, G2 = (N_OUT + PE_L2 - 1) / PE_L2;
  localparam int EXP_LAT = G1 * N_IN + G2 * N_HID + 13;

  longint w1 [N_HID][N_IN], b1 [N_HID], w2 [N_OUT][N_HID], b2 [N_OUT];
  longint ref_re [N_P], ref_im [N_P];
  longint y_re [N_P], y_im [N_P];
  longint exp_re [N_C], exp_im [N_C];

  int checks = 0, failures = 0;
  int n_ls_neg = 0, n_relu = 0, n_sat = 0, n_in_gap = 0, n_out_stall = 0,
      n_frame_err = 0, n_reconfig = 0, n_frames = 0;
  int cycle = 0;
  always @(negedge clk) cycle++;   // read at posedge only

  // ---------------- model ----------------
  task automatic make_model(input bit big);
    for (int n = 0; n < N_HID; n++) begin
      b1[n] = sx($urandom, 17);
      for (int i = 0; i < N_IN; i++) w1[n][i] = sx($urandom, 17);
    end
    for (int n = 0; n < N_OUT; n++) begin
      // in model B every 7th output neuron gets full-scale weights and bias
      // of one sign, so any positive hidden activity drives it into saturation
      automatic longint full = (n % 2) ? (64'sd1 <<< (DW-1)) - 1 : -((64'sd1 <<< (DW-1)) - 1);
      automatic bit hot = big && (n % 7 == 3);
      b2[n] = hot ? full : sx($urandom, 17);
      for (int i = 0; i < N_HID; i++)
        w2[n][i] = hot ? full : sx($urandom, 17);
    end
    for (int p = 0; p < N_P; p++) begin
      if (BPSK) begin
        ref_re[p] = (((p * 7 + int'(big)) % 5) < 3) ? (64'sd1 <<< FRAC) : -(64'sd1 <<< FRAC);
        ref_im[p] = 0;
      end else begin
        ref_re[p] = sx($urandom, FRAC);       // within +/-0.5
        ref_im[p] = sx($urandom, FRAC);
        if (ref_re[p] == 0 && ref_im[p] == 0) ref_re[p] = 64'sd1 <<< (FRAC-1);
      end
    end
  endtask

  task automatic reference();
    longint x [N_IN];
    longint h [N_HID];
    longint xs[], ws[];
    for (int p = 0; p < N_P; p++) begin
      if (BPSK) begin
        x[p]       = (ref_re[p] < 0) ? sat(-y_re[p], DW) : y_re[p];
        x[N_P + p] = (ref_re[p] < 0) ? sat(-y_im[p], DW) : y_im[p];
        if (ref_re[p] < 0) n_ls_neg++;
      end else begin
        longint dn = ref_re[p]*ref_re[p] + ref_im[p]*ref_im[p];
        x[p]       = cdiv(ref_re[p]*y_re[p] + ref_im[p]*y_im[p], dn, DW, FRAC);
        x[N_P + p] = cdiv(ref_re[p]*y_im[p] - ref_im[p]*y_re[p], dn, DW, FRAC);
        if (ref_re[p] < 0) n_ls_neg++;
      end
    end
    xs = new[N_IN]; ws = new[N_IN];
    foreach (xs[i]) xs[i] = x[i];
    for (int n = 0; n < N_HID; n++) begin
      foreach (ws[i]) ws[i] = w1[n][i];
      h[n] = neuron(xs, ws, b1[n], DW, FRAC, 1'b1);
      if (neuron(xs, ws, b1[n], DW, FRAC, 1'b0) < 0) n_relu++;
    end
    xs = new[N_HID]; ws = new[N_HID];
    foreach (xs[i]) xs[i] = h[i];
    for (int n = 0; n < N_OUT; n++) begin
      longint v;
      foreach (ws[i]) ws[i] = w2[n][i];
      v = neuron(xs, ws, b2[n], DW, FRAC, 1'b0);
      if (v == (64'sd1 <<< (DW-1)) - 1 || v == -(64'sd1 <<< (DW-1))) n_sat++;
      if (n < N_C) exp_re[n] = v;
      else         exp_im[n - N_C] = v;
    end
  endtask

  // ---------------- parameter port ----------------
  task automatic prm(input int sel, input int row, input int col, input logic [2*DW-1:0] d);
    @(negedge clk);
    prm_we = 1; prm_sel = 3'(sel); prm_row = 16'(row); prm_col = 16'(col); prm_data = d;
  endtask

  task automatic load_model();
    for (int n = 0; n < N_HID; n++) begin
      prm(1, n, 0, (2*DW)'(b1[n]));
      for (int i = 0; i < N_IN; i++) prm(0, n, i, (2*DW)'(w1[n][i]));
    end
    for (int n = 0; n < N_OUT; n++) begin
      prm(3, n, 0, (2*DW)'(b2[n]));
      for (int i = 0; i < N_HID; i++) prm(2, n, i, (2*DW)'(w2[n][i]));
    end
    for (int p = 0; p < N_P; p++) prm(4, p, 0, {DW'(ref_im[p]), DW'(ref_re[p])});
    @(negedge clk); prm_we = 0;
  endtask

  // ---------------- output monitor ----------------
  int beat = 0, first_beat_cycle = -1, last_beat_cycle = -1;
  bit rand_ready = 0;

  always @(negedge clk) m_axis_tready = rand_ready ? ($urandom % 4 != 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
    if (m_axis_tvalid && first_beat_cycle < 0) first_beat_cycle = cycle;
    if (m_axis_tvalid && m_axis_tready) begin
      checks++;
      if (beat >= N_C ||
          m_axis_tdata !== {DW'(exp_im[beat]), DW'(exp_re[beat])} ||
          m_axis_tlast !== (beat == N_C - 1)) begin
        failures++;
        if (failures < 10)
          $display("FAIL beat %0d: got re %0d im %0d last %b, expected re %0d im %0d",
                   beat, sx(m_axis_tdata[DW-1:0], DW), sx(m_axis_tdata[2*DW-1:DW], DW),
                   m_axis_tlast, exp_re[beat], exp_im[beat]);
      end
      beat++;
      last_beat_cycle = cycle;
    end
  end

  // ---------------- frames ----------------
  task automatic frame(input bit gaps, input bit bad_tlast, input bit timed);
    int last_in_cycle = 0;
    for (int p = 0; p < N_P; p++) begin
      y_re[p] = sx($urandom, FRAC + 1);
      y_im[p] = sx($urandom, FRAC + 1);
    end
    reference();
    beat = 0;
    first_beat_cycle = -1;
    rand_ready = gaps;
    for (int p = 0; p < N_P; p++) begin
      @(negedge clk);
      if (gaps) while ($urandom % 3 == 0) begin
        s_axis_tvalid = 0;
        n_in_gap++;
        @(negedge clk);
      end
      s_axis_tvalid = 1;
      s_axis_tdata  = {DW'(y_im[p]), DW'(y_re[p])};
      s_axis_tlast  = bad_tlast ? (p == N_P / 2) : (p == N_P - 1);
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      last_in_cycle = cycle;
    end
    @(negedge clk); s_axis_tvalid = 0; s_axis_tlast = 0;
    while (busy) @(negedge clk);
    n_frames++;
    checks += 2;
    if (beat != N_C) begin
      failures++;
      $display("FAIL frame %0d: %0d beats", n_frames, beat);
    end
    if (frame_err !== bad_tlast) begin
      failures++;
      $display("FAIL frame %0d: frame_err %b", n_frames, frame_err);
    end
    if (frame_err) n_frame_err++;
    if (timed) begin
      checks += 2;
      if (first_beat_cycle - last_in_cycle != EXP_LAT) begin
        failures++;
        $display("FAIL latency %0d expected %0d", first_beat_cycle - last_in_cycle, EXP_LAT);
      end
      if (last_beat_cycle - first_beat_cycle != N_C - 1) begin
        failures++;
        $display("FAIL output stream took %0d clocks", last_beat_cycle - first_beat_cycle + 1);
      end
      $display("frame %0d: latency %0d clocks from last pilot to first estimate", n_frames,
               first_beat_cycle - last_in_cycle);
    end
  endtask

  task automatic need(input int count, input string what);
    checks++;
    $display("%-34s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    finished = 0;
    rst_n = 0; s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = '0;
    prm_we = 0; prm_sel = '0; prm_row = '0; prm_col = '0; prm_data = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    make_model(1'b0);
    load_model();
    frame(1'b0, 1'b0, 1'b1);
    frame(1'b1, 1'b1, 1'b0);
    make_model(1'b1);
    load_model();
    n_reconfig++;
    frame(1'b0, 1'b0, 1'b1);
    need(n_ls_neg,    "LS pilots with negative reference");
    need(n_relu,      "ReLU clamps");
    need(n_sat,       "saturated outputs");
    need(n_in_gap,    "input stream gaps");
    need(n_out_stall, "output back-pressure stalls");
    need(n_frame_err, "frames flagged by frame_err");
    need(n_reconfig,  "model reloads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    finished = 1;
  end

  initial begin
    repeat (20 * (N_HID * N_IN + N_OUT * N_HID + 4 * N_OUT + 1000)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    finished = 1;
  end
endmodule
