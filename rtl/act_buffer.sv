// act_buffer: output memory of a fully connected layer, partitioned in lanes.
//
// A layer with N_PE processing elements finishes N_PE neurons at once; the
// buffer is split into LANES = N_PE partitions so the whole group is written
// in one cycle (row wr_row, one word per lane, lanes enabled by wr_mask).
// Element e lives in row e / LANES, lane e % LANES. The next stage reads one
// element per cycle on each of two synchronous read ports (data one clock
// after the address). Partitioning follows the published low-latency
// architecture; the second read port is this implementation's choice and lets
// the complex recombination read a real and an imaginary part together.
module act_buffer #(
  parameter int unsigned DW    = 26,
  parameter int unsigned DEPTH = 48,
  parameter int unsigned LANES = 1,
  localparam int unsigned ROWS = (DEPTH + LANES - 1) / LANES,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [RW-1:0]              wr_row,
  input  logic [LANES-1:0]           wr_mask,
  input  logic [LANES-1:0][DW-1:0]   wr_data,
  input  logic [AW-1:0]              rd_addr_a,
  output logic signed [DW-1:0]       rd_data_a,
  input  logic [AW-1:0]              rd_addr_b,
  output logic signed [DW-1:0]       rd_data_b
);
  logic [LANES-1:0][DW-1:0] mem [ROWS];

  always_ff @(posedge clk)
    if (we)
      for (int l = 0; l < LANES; l++)
        if (wr_mask[l]) mem[wr_row][l] <= wr_data[l];

  always_ff @(posedge clk) begin
    rd_data_a <= mem[int'(rd_addr_a) / LANES][int'(rd_addr_a) % LANES];
    rd_data_b <= mem[int'(rd_addr_b) / LANES][int'(rd_addr_b) % LANES];
  end
endmodule
