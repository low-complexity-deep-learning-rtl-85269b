// tb_r2c_stream: streams 20 complex estimates out of a 40-word buffer model,
// first with tready always high (must take exactly 20 clocks, one beat per
// clock), then with random back-pressure. Checks every beat's {im, re},
// tlast, the beat count and the done pulse.
module tb_r2c_stream;
  localparam int DW = 26, N_C = 20, AW = 6;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [AW-1:0] rd_addr_a, rd_addr_b;
  logic signed [DW-1:0] rd_data_a, rd_data_b;
  logic [2*DW-1:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic [DW-1:0] mem [2*N_C];
  int checks = 0, failures = 0, beats = 0, stalls = 0, done_seen = 0;
  bit backpressure = 0;

  always #5 clk = ~clk;

  r2c_stream #(.DW(DW), .N_C(N_C)) dut (.*);

  always_ff @(posedge clk) begin
    rd_data_a <= mem[rd_addr_a];
    rd_data_b <= mem[rd_addr_b];
  end

  always @(negedge clk) m_tready = backpressure ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) begin
    if (done) done_seen++;
    if (m_tvalid && !m_tready) stalls++;
    if (m_tvalid && m_tready) begin
      checks += 2;
      if (m_tdata !== {mem[beats + N_C], mem[beats]}) begin
        failures++;
        $display("FAIL beat %0d data %h", beats, m_tdata);
      end
      if (m_tlast !== (beats == N_C-1)) begin
        failures++;
        $display("FAIL beat %0d tlast %b", beats, m_tlast);
      end
      beats++;
    end
  end

  task automatic frame(input bit bp);
    int t0;
    foreach (mem[i]) mem[i] = DW'($urandom);
    backpressure = bp;
    beats = 0;
    done_seen = 0;
    @(negedge clk); start = 1; t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks += 2;
    if (beats != N_C) begin
      failures++;
      $display("FAIL %0d beats", beats);
    end
    if (!bp && ($time - t0) / 10 != N_C + 1) begin
      failures++;
      $display("FAIL stream took %0d clocks", ($time - t0) / 10);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (done_seen != 1 || m_tvalid) begin
      failures++;
      $display("FAIL done pulses %0d", done_seen);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(0);
    frame(1);
    frame(1);
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("FAIL no back-pressure happened");
    end
    $display("stalls: %0d", stalls);
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
