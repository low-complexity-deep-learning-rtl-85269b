// c2r_concat: complex-to-real flattening of the LS estimates; the input
// buffer of the hidden layer.
//
// The N complex LS estimates of a frame (N = pilot sub-carriers x pilot
// symbols) become one real vector of 2N elements: first the N real parts, then
// the N imaginary parts, each in pilot order (pilot index p = pilot symbol *
// pilots per symbol + pilot sub-carrier, the order in which the pilots arrive).
// Real-then-imaginary concatenation follows the published network input; the
// flattening order is this implementation's choice.
//
// Storage is two N-entry banks so one complex estimate is written per cycle.
// Read: element raddr (0 .. 2N-1), registered, valid one clock later.
module c2r_concat #(
  parameter int unsigned DW = 26,
  parameter int unsigned N  = 48,
  localparam int unsigned WAW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RAW = $clog2(2*N)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [WAW-1:0]       widx,
  input  logic signed [DW-1:0] wre,
  input  logic signed [DW-1:0] wim,
  input  logic [RAW-1:0]       raddr,
  output logic signed [DW-1:0] rdata
);
  logic signed [DW-1:0] re_mem [N];
  logic signed [DW-1:0] im_mem [N];

  always_ff @(posedge clk)
    if (we) begin
      re_mem[widx] <= wre;
      im_mem[widx] <= wim;
    end

  always_ff @(posedge clk)
    if (raddr < RAW'(N)) rdata <= re_mem[WAW'(raddr)];
    else                 rdata <= im_mem[WAW'(raddr - RAW'(N))];
endmodule
