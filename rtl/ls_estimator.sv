// ls_estimator: least-squares channel estimate at one pilot, H = Y / X.
//
// Two datapaths, chosen by the BPSK parameter:
//  * BPSK = 1 (default): the reference pilots are +1/-1, so Y / X is either Y
//    or its two's complement. The sign of the reference real part selects
//    which. No multiplier is used.
//  * BPSK = 0: a general complex divider built from six real products, two
//    adders/subtracters and two real dividers,
//        re = (xr*yr + xi*yi) / (xr^2 + xi^2)
//        im = (xr*yi - xi*yr) / (xr^2 + xi^2)
//    with X the reference and Y the received sample. A zero reference gives 0.
// Both forms and the operation counts are those of the published LS module;
// the pipeline depth, truncating division and saturation to the (DW, DW-FRAC)
// word are this implementation's choices.
//
// With BPSK = 1 the imaginary part of the reference is not used (a BPSK
// pilot has none), which the linter reports as an unused input.
//
// Timing: one registered stage; out_valid/out_idx/h_* follow in_valid/in_idx
// by one clock. in_idx is carried through unchanged.
module ls_estimator #(
  parameter int unsigned DW   = 26,
  parameter int unsigned FRAC = 18,
  parameter int unsigned IDXW = 6,
  parameter bit          BPSK = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [IDXW-1:0]      in_idx,
  input  logic signed [DW-1:0] y_re,
  input  logic signed [DW-1:0] y_im,
  input  logic signed [DW-1:0] x_re,
  input  logic signed [DW-1:0] x_im,
  output logic                 out_valid,
  output logic [IDXW-1:0]      out_idx,
  output logic signed [DW-1:0] h_re,
  output logic signed [DW-1:0] h_im
);
  localparam int unsigned PW = 2*DW + 1;        // products and their sums
  localparam int unsigned NW = PW + FRAC;       // numerator aligned for the division
  localparam logic signed [NW-1:0] MAXV = {{(NW-DW+1){1'b0}}, {(DW-1){1'b1}}};
  localparam logic signed [NW-1:0] MINV = {{(NW-DW+1){1'b1}}, {(DW-1){1'b0}}};

  function automatic logic signed [DW-1:0] sat(input logic signed [NW-1:0] v);
    if (v > MAXV)      return MAXV[DW-1:0];
    else if (v < MINV) return MINV[DW-1:0];
    else               return v[DW-1:0];
  endfunction

  logic signed [DW-1:0] re_d, im_d;

  if (BPSK) begin : g_bpsk
    // Select Y or -Y by the reference sign; -(-2^(DW-1)) saturates.
    always_comb begin
      if (x_re[DW-1]) begin
        re_d = sat(-NW'(y_re));
        im_d = sat(-NW'(y_im));
      end else begin
        re_d = y_re;
        im_d = y_im;
      end
    end
  end else begin : g_div
    logic signed [PW-1:0] p_rr, p_ii, p_r2, p_i2, p_ri, p_ir;
    logic signed [PW-1:0] num_re, num_im, den;
    logic signed [NW-1:0] q_re, q_im;
    always_comb begin
      p_rr   = x_re * y_re;
      p_ii   = x_im * y_im;
      p_r2   = x_re * x_re;
      p_i2   = x_im * x_im;
      p_ri   = x_re * y_im;
      p_ir   = x_im * y_re;
      num_re = p_rr + p_ii;
      num_im = p_ri - p_ir;
      den    = p_r2 + p_i2;
      if (den == '0) begin
        q_re = '0;
        q_im = '0;
      end else begin
        q_re = (NW'(num_re) <<< FRAC) / NW'(den);
        q_im = (NW'(num_im) <<< FRAC) / NW'(den);
      end
      re_d = sat(q_re);
      im_d = sat(q_im);
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) begin
      out_idx <= in_idx;
      h_re    <= re_d;
      h_im    <= im_d;
    end
endmodule
