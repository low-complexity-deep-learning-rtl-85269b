// ref_pilot_mem: store of the known (reference) pilot symbols X_p.
//
// One complex entry {im, re} per pilot location. The host writes it through
// the parameter port, so a different pilot sequence can be configured without
// changing the hardware. The LS estimator reads the entry of the pilot that is
// arriving in the same cycle, so the read is asynchronous (a small LUT RAM);
// the write is synchronous. Depth and read timing are this implementation's
// choice; the published design only names a block RAM holding the reference.
module ref_pilot_mem #(
  parameter int unsigned DW = 26,
  parameter int unsigned N  = 48,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [2*DW-1:0] wdata,
  input  logic [AW-1:0]   raddr,
  output logic [2*DW-1:0] rdata
);
  logic [2*DW-1:0] mem [N];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
