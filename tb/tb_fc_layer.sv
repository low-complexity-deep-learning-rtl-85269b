// tb_fc_layer: two layers with random weights and inputs, checked neuron by
// neuron against the reference arithmetic:
//   A: 7 inputs, 10 neurons, 3 PEs (4 groups, last one partial), ReLU
//   B: 96 inputs, 48 neurons, 1 PE (the hidden layer of the default core), no ReLU
// Each is run twice with different inputs. The done pulse must come exactly
// GROUPS*N_IN + 4 clocks after start, and ReLU clamping must occur in A.
module tb_fc_layer;
  import tb_model_pkg::*;
  localparam int DW = 26, FRAC = 18;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, relu_clamps = 0;

  always #5 clk = ~clk;

  // ---------------- layer A ----------------
  localparam int AI = 7, AO = 10, AP = 3, AG = 4;
  logic a_start = 0, a_busy, a_done, a_wwe = 0, a_bwe = 0, a_owe;
  logic [3:0] a_wn = '0, a_bn = '0;
  logic [2:0] a_wi = '0, a_iaddr;
  logic signed [DW-1:0] a_wd = '0, a_bd = '0, a_idata;
  logic [1:0] a_og;
  logic [AP-1:0] a_om;
  logic [AP-1:0][DW-1:0] a_od;
  longint a_x [AI];
  longint a_res [AG*AP];

  fc_layer #(.DW(DW), .FRAC(FRAC), .N_IN(AI), .N_OUT(AO), .N_PE(AP), .RELU(1'b1)) dut_a (
    .clk, .rst_n, .start(a_start), .busy(a_busy), .done(a_done),
    .w_we(a_wwe), .w_neuron(a_wn), .w_input(a_wi), .w_data(a_wd),
    .b_we(a_bwe), .b_neuron(a_bn), .b_data(a_bd),
    .in_addr(a_iaddr), .in_data(a_idata),
    .out_we(a_owe), .out_group(a_og), .out_mask(a_om), .out_data(a_od));

  always_ff @(posedge clk) a_idata <= DW'(a_x[a_iaddr]);
  always_ff @(posedge clk)
    if (a_owe) for (int l = 0; l < AP; l++) if (a_om[l]) a_res[a_og*AP + l] <= sx(a_od[l], DW);

  // ---------------- layer B ----------------
  localparam int BI = 96, BO = 48, BP = 1;
  logic b_start = 0, b_busy, b_done, b_wwe = 0, b_bwe = 0, b_owe;
  logic [5:0] b_wn = '0, b_bn = '0;
  logic [6:0] b_wi = '0, b_iaddr;
  logic signed [DW-1:0] b_wd = '0, b_bd = '0, b_idata;
  logic [5:0] b_og;
  logic [BP-1:0] b_om;
  logic [BP-1:0][DW-1:0] b_od;
  longint b_x [BI];
  longint b_res [BO];

  fc_layer #(.DW(DW), .FRAC(FRAC), .N_IN(BI), .N_OUT(BO), .N_PE(BP), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .start(b_start), .busy(b_busy), .done(b_done),
    .w_we(b_wwe), .w_neuron(b_wn), .w_input(b_wi), .w_data(b_wd),
    .b_we(b_bwe), .b_neuron(b_bn), .b_data(b_bd),
    .in_addr(b_iaddr), .in_data(b_idata),
    .out_we(b_owe), .out_group(b_og), .out_mask(b_om), .out_data(b_od));

  always_ff @(posedge clk) b_idata <= DW'(b_x[b_iaddr]);
  always_ff @(posedge clk)
    if (b_owe && b_om[0]) b_res[b_og] <= sx(b_od[0], DW);

  longint aw [AO][AI], ab [AO], bw [BO][BI], bb [BO];

  task automatic run_a();
    int t0, t1;
    longint xs[], ws[];
    foreach (a_x[i]) a_x[i] = sx($urandom, 20);
    @(negedge clk); a_start = 1; t0 = $time;
    @(negedge clk); a_start = 0;
    while (!a_done) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != AG*AI + 4) begin
      failures++;
      $display("FAIL layer A latency %0d", (t1 - t0) / 10);
    end
    xs = new[AI]; ws = new[AI];
    for (int n = 0; n < AO; n++) begin
      longint e;
      foreach (xs[i]) begin xs[i] = a_x[i]; ws[i] = aw[n][i]; end
      e = neuron(xs, ws, ab[n], DW, FRAC, 1'b1);
      if (neuron(xs, ws, ab[n], DW, FRAC, 1'b0) < 0) relu_clamps++;
      checks++;
      if (a_res[n] != e) begin
        failures++;
        $display("FAIL layer A neuron %0d: %0d expected %0d", n, a_res[n], e);
      end
    end
  endtask

  task automatic run_b();
    int t0, t1;
    longint xs[], ws[];
    foreach (b_x[i]) b_x[i] = sx($urandom, 20);
    @(negedge clk); b_start = 1; t0 = $time;
    @(negedge clk); b_start = 0;
    while (!b_done) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != BO*BI + 4) begin
      failures++;
      $display("FAIL layer B latency %0d", (t1 - t0) / 10);
    end
    xs = new[BI]; ws = new[BI];
    for (int n = 0; n < BO; n++) begin
      longint e;
      foreach (xs[i]) begin xs[i] = b_x[i]; ws[i] = bw[n][i]; end
      e = neuron(xs, ws, bb[n], DW, FRAC, 1'b0);
      checks++;
      if (b_res[n] != e) begin
        failures++;
        $display("FAIL layer B neuron %0d: %0d expected %0d", n, b_res[n], e);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load weights and biases, in random neuron order
    for (int n = 0; n < AO; n++) begin
      ab[n] = sx($urandom, 19);
      @(negedge clk); a_bwe = 1; a_bn = 4'(n); a_bd = DW'(ab[n]);
      for (int i = 0; i < AI; i++) begin
        aw[n][i] = sx($urandom, 19);
        @(negedge clk); a_bwe = 0; a_wwe = 1; a_wn = 4'(n); a_wi = 3'(i); a_wd = DW'(aw[n][i]);
      end
      @(negedge clk); a_wwe = 0;
    end
    for (int n = BO-1; n >= 0; n--) begin
      bb[n] = sx($urandom, 19);
      @(negedge clk); b_bwe = 1; b_bn = 6'(n); b_bd = DW'(bb[n]);
      for (int i = 0; i < BI; i++) begin
        bw[n][i] = sx($urandom, 17);
        @(negedge clk); b_bwe = 0; b_wwe = 1; b_wn = 6'(n); b_wi = 7'(i); b_wd = DW'(bw[n][i]);
      end
      @(negedge clk); b_wwe = 0;
    end
    run_a(); run_a(); run_b(); run_b();
    checks++;
    if (relu_clamps == 0) begin
      failures++;
      $display("FAIL ReLU never clamped");
    end
    $display("relu clamps: %0d", relu_clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
