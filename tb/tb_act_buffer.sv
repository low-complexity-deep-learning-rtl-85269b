// tb_act_buffer: a 3-lane buffer of 10 elements (4 rows, last row partial).
// Writes groups with lane masks, including a masked-off lane that must keep
// its old value, and reads every element back on both ports.
module tb_act_buffer;
  localparam int DW = 26, DEPTH = 10, LANES = 3, ROWS = 4;
  logic clk = 0, we = 0;
  logic [1:0] wr_row = '0;
  logic [LANES-1:0] wr_mask = '0;
  logic [LANES-1:0][DW-1:0] wr_data = '0;
  logic [3:0] rd_addr_a = '0, rd_addr_b = '0;
  logic signed [DW-1:0] rd_data_a, rd_data_b;
  logic [DW-1:0] model [ROWS*LANES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_buffer #(.DW(DW), .DEPTH(DEPTH), .LANES(LANES)) dut (.*);

  task automatic write_row(input int r, input logic [LANES-1:0] m);
    @(negedge clk);
    we = 1; wr_row = 2'(r); wr_mask = m;
    for (int l = 0; l < LANES; l++) begin
      wr_data[l] = DW'($urandom);
      if (m[l]) model[r*LANES + l] = wr_data[l];
    end
  endtask

  task automatic read_all();
    for (int e = 0; e < DEPTH; e++) begin
      @(negedge clk);
      rd_addr_a = 4'(e);
      rd_addr_b = 4'(DEPTH - 1 - e);
      @(negedge clk);
      checks += 2;
      if (rd_data_a !== model[e]) begin
        failures++;
        $display("FAIL port a element %0d", e);
      end
      if (rd_data_b !== model[DEPTH-1-e]) begin
        failures++;
        $display("FAIL port b element %0d", DEPTH-1-e);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) write_row(r, (r == ROWS-1) ? 3'b001 : 3'b111);
    @(negedge clk); we = 0;
    read_all();
    write_row(1, 3'b101);          // lane 1 of row 1 must be kept
    write_row(2, 3'b010);
    @(negedge clk); we = 0;
    read_all();
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
