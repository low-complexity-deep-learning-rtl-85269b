// tb_fc_pe: feeds a PE (N_IN = 96) many neurons, back to back and with idle
// gaps, and compares each result with the reference neuron arithmetic. Also
// checks that out_valid comes exactly two clocks after the last input and
// that large sums saturate.
module tb_fc_pe;
  import tb_model_pkg::*;
  localparam int DW = 26, FRAC = 18, N_IN = 96, NEURONS = 40;
  logic clk = 0, rst_n = 0, pe_en = 0;
  logic signed [DW-1:0] x = '0, w = '0, bias = '0, out;
  logic out_valid;
  longint exp_q[$];
  int last_cycle_q[$];
  int cycle = 0;
  int checks = 0, failures = 0, saturated = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  fc_pe #(.DW(DW), .FRAC(FRAC), .N_IN(N_IN)) dut (.*);

  always @(negedge clk)
    if (rst_n && out_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        automatic longint e = exp_q.pop_front();
        automatic int lc = last_cycle_q.pop_front();
        if (out !== DW'(e)) begin
          failures++;
          $display("FAIL neuron result %0d expected %0d", out, e);
        end
        if (cycle - lc != 2) begin
          failures++;
          $display("FAIL latency %0d", cycle - lc);
        end
      end
    end

  initial begin
    longint xs[], ws[], b;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < NEURONS; n++) begin
      automatic bit big = (n % 10 == 9);
      xs = new[N_IN];
      ws = new[N_IN];
      b = sx($urandom, 20);
      foreach (xs[i]) begin
        xs[i] = big ? (64'sd1 <<< 24) : sx($urandom, 20);
        ws[i] = big ? ((n % 20 == 9) ? (64'sd1 <<< 22) : -(64'sd1 <<< 22)) : sx($urandom, 18);
      end
      exp_q.push_back(neuron(xs, ws, b, DW, FRAC, 1'b0));
      if (big) saturated++;
      foreach (xs[i]) begin
        if (n % 3 == 1 && ($urandom % 4 == 0)) begin
          pe_en = 0;
          @(negedge clk);
        end
        pe_en = 1; x = DW'(xs[i]); w = DW'(ws[i]);
        bias = (i == 0) ? DW'(b) : DW'($urandom);   // bias only sampled with the first input
        if (i == N_IN-1) last_cycle_q.push_back(cycle);
        @(negedge clk);
      end
      pe_en = 0;
      if (n % 2 == 0) repeat ($urandom_range(3)) @(negedge clk);
    end
    pe_en = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("saturating neurons: %0d", saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
