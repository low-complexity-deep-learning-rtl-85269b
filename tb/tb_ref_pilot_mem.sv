// tb_ref_pilot_mem: writes 48 random complex reference pilots and reads them
// back in random order; the read is combinational.
module tb_ref_pilot_mem;
  localparam int DW = 26, N = 48;
  logic clk = 0, we = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [2*DW-1:0] wdata = '0, rdata;
  logic [2*DW-1:0] model [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ref_pilot_mem #(.DW(DW), .N(N)) dut (.*);

  initial begin
    for (int p = 0; p < N; p++) begin
      model[p] = {$urandom, $urandom};
      @(negedge clk); we = 1; waddr = 6'(p); wdata = model[p];
    end
    @(negedge clk); we = 0;
    // overwrite a few
    for (int k = 0; k < 5; k++) begin
      automatic int p = $urandom_range(N-1);
      model[p] = {$urandom, $urandom};
      @(negedge clk); we = 1; waddr = 6'(p); wdata = model[p];
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int p = $urandom_range(N-1);
      raddr = 6'(p);
      #1;
      checks++;
      if (rdata !== model[p]) begin
        failures++;
        $display("FAIL pilot %0d: %h expected %h", p, rdata, model[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
