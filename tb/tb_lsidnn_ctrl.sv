// tb_lsidnn_ctrl: drives the sequencer through three frames (N_P = 5) with
// gaps in the input and random delays on every completion. Checks the state
// sequence S0 -> S1 -> S2 -> S3 -> S0, that exactly N_P beats are accepted per
// frame with in_idx counting 0..N_P-1, and that each start pulse is one clock
// long and comes only after the completion it waits for.
module tb_lsidnn_ctrl;
  import lsidnn_pkg::*;
  localparam int N_P = 5;
  logic clk = 0, rst_n = 0;
  logic in_fire, ls_done = 0, l1_done = 0, l2_done = 0, out_done = 0;
  logic in_ready, l1_start, l2_start, out_start;
  logic [2:0] in_idx;
  state_e state;
  logic in_valid = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  assign in_fire = in_valid && in_ready;

  lsidnn_ctrl #(.N_P(N_P)) dut (.*);

  task automatic expect_state(input state_e s, input string where);
    checks++;
    if (state !== s) begin
      failures++;
      $display("FAIL %s: state %s expected %s", where, state.name(), s.name());
    end
  endtask

  task automatic pulse(ref logic sig);
    @(negedge clk); sig = 1;
    @(negedge clk); sig = 0;
  endtask

  task automatic wait_pulse(ref logic sig, input string name);
    int n = 0;
    while (!sig && n < 50) begin @(negedge clk); n++; end
    checks++;
    if (!sig) begin
      failures++;
      $display("FAIL %s never pulsed", name);
    end
    @(negedge clk);
    checks++;
    if (sig) begin
      failures++;
      $display("FAIL %s longer than one clock", name);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      automatic int accepted = 0;
      expect_state(ST_S0, "idle");
      // feed N_P+2 offers; only N_P may be accepted
      while (accepted < N_P + 2) begin
        @(negedge clk);
        in_valid = ($urandom % 3 != 0);
        #1;
        if (in_fire) begin
          checks++;
          if (in_idx != 3'(accepted)) begin
            failures++;
            $display("FAIL in_idx %0d expected %0d", in_idx, accepted);
          end
          accepted++;
        end
        if (accepted == N_P) begin
          @(negedge clk); in_valid = 1; #1;
          checks++;
          if (in_ready) begin
            failures++;
            $display("FAIL accepts more than N_P pilots");
          end
          in_valid = 0;
          break;
        end
      end
      expect_state(ST_S1, "after pilots");
      checks++;
      if (l1_start) begin failures++; $display("FAIL early l1_start"); end
      repeat ($urandom_range(2)) @(negedge clk);
      pulse(ls_done);
      wait_pulse(l1_start, "l1_start");
      expect_state(ST_S2, "hidden layer");
      repeat ($urandom_range(5)) @(negedge clk);
      checks++;
      if (l2_start) begin failures++; $display("FAIL early l2_start"); end
      pulse(l1_done);
      wait_pulse(l2_start, "l2_start");
      repeat ($urandom_range(5)) @(negedge clk);
      pulse(l2_done);
      wait_pulse(out_start, "out_start");
      expect_state(ST_S3, "output");
      repeat ($urandom_range(5)) @(negedge clk);
      pulse(out_done);
      expect_state(ST_S0, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
