// fc_pe: one neuron processing element of a fully connected layer.
//
// The PE receives one (input, weight) pair per cycle in which pe_en is high and
// multiplies and accumulates them serially. A modulo-N_IN counter marks the
// first and the last input of each neuron: the first product starts a new sum
// (the accumulator multiplexer selects 0), and when the counter reaches N_IN-1
// the bias is added and the result is moved to the output register. This is
// the serialized, pipelined PE of the published design (input multiplexer,
// multiplier, accumulator with a zero multiplexer, register, mod-(l-1)
// counter, '=(l-1)' compare, bias adder, output register).
//
// Arithmetic (this implementation's choice): the DW x DW products are kept
// exact with 2*FRAC fraction bits and summed with clog2(N_IN)+1 guard bits;
// the bias is aligned to 2*FRAC fraction bits and added; the sum is shifted
// right by FRAC (truncation toward minus infinity) and saturated to DW bits.
// The bias is sampled together with the first input of a neuron, so neurons
// may follow each other without a gap.
//
// Timing: two stages. out_valid is high for one cycle, two clocks after the
// pe_en cycle that carried the last input of a neuron.
module fc_pe #(
  parameter int unsigned DW   = 26,
  parameter int unsigned FRAC = 18,
  parameter int unsigned N_IN = 96,
  localparam int unsigned CW  = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pe_en,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] w,
  input  logic signed [DW-1:0] bias,
  output logic                 out_valid,
  output logic signed [DW-1:0] out
);
  localparam int unsigned AW = 2*DW + CW + 1;
  localparam logic signed [AW-1:0] MAXV = {{(AW-DW+1){1'b0}}, {(DW-1){1'b1}}};
  localparam logic signed [AW-1:0] MINV = {{(AW-DW+1){1'b1}}, {(DW-1){1'b0}}};

  logic [CW-1:0]          cnt;          // mod-N_IN input counter
  logic                   p_vld, p_first, p_last;
  logic signed [2*DW-1:0] prod_q;
  logic signed [DW-1:0]   bias_q;
  logic signed [AW-1:0]   acc, acc_next, total, shifted;

  wire first_in = (cnt == '0);
  wire last_in  = (cnt == CW'(N_IN - 1));

  // control
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt       <= '0;
      p_vld     <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      p_vld     <= pe_en;
      out_valid <= p_vld && p_last;
      if (pe_en) cnt <= last_in ? '0 : cnt + 1'b1;
    end

  // stage 1: product
  always_ff @(posedge clk)
    if (pe_en) begin
      prod_q  <= x * w;
      p_first <= first_in;
      p_last  <= last_in;
      if (first_in) bias_q <= bias;
    end

  // stage 2: accumulate, bias, scale, saturate
  always_comb begin
    acc_next = (p_first ? '0 : acc) + AW'(prod_q);
    total    = acc_next + (AW'(bias_q) <<< FRAC);
    shifted  = total >>> FRAC;
  end

  always_ff @(posedge clk)
    if (p_vld) begin
      acc <= acc_next;
      if (p_last) begin
        if (shifted > MAXV)      out <= MAXV[DW-1:0];
        else if (shifted < MINV) out <= MINV[DW-1:0];
        else                     out <= shifted[DW-1:0];
      end
    end
endmodule
