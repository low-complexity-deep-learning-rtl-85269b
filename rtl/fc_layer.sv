// fc_layer: one fully connected layer, out[n] = act(sum_i W[n][i]*in[i] + B[n]).
//
// N_PE processing elements (fc_pe) work in parallel on a group of N_PE
// neurons; the groups are processed one after another, so the same hardware
// covers both published architectures: N_PE = 1 is the compute-efficient
// LSiDNN-CE (one PE serially evaluates every neuron of the layer; choosing a
// neuron is choosing its weight vector) and N_PE = N_OUT is the low-latency
// LSiDNN-LL (all neurons of the layer at once). In every cycle one input
// element is read from the previous layer's buffer and broadcast to all PEs,
// together with one weight per PE from the weight memory, which holds the full
// N_IN x N_OUT matrix as rows of N_PE weights. The bias memory holds one row of
// N_PE biases per group. With RELU = 1 every result passes a relu unit; the
// output layer of the network has no activation.
//
// Interface:
//  * start (pulse) runs the layer once; busy is high until done (pulse).
//  * w_we/w_neuron/w_input/w_data and b_we/b_neuron/b_data load one weight or
//    bias; they must not be used while busy.
//  * in_addr/in_data: synchronous read of the input vector, data one clock
//    after the address.
//  * out_we/out_group/out_mask/out_data: the N_PE results of group out_group;
//    out_mask clears lanes past N_OUT in the last group.
// Timing: done follows start by GROUPS*N_IN + 4 clocks, GROUPS = ceil(N_OUT/N_PE).
// The neuron-to-PE mapping (neuron n on PE n % N_PE, group n / N_PE) and the
// memory layout are this implementation's choices.
module fc_layer #(
  parameter int unsigned DW    = 26,
  parameter int unsigned FRAC  = 18,
  parameter int unsigned N_IN  = 96,
  parameter int unsigned N_OUT = 48,
  parameter int unsigned N_PE  = 1,
  parameter bit          RELU  = 1'b1,
  localparam int unsigned GROUPS = (N_OUT + N_PE - 1) / N_PE,
  localparam int unsigned IW   = (N_IN   > 1) ? $clog2(N_IN)   : 1,
  localparam int unsigned NW   = (N_OUT  > 1) ? $clog2(N_OUT)  : 1,
  localparam int unsigned GW   = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned WDEP = GROUPS * N_IN,
  localparam int unsigned WAW  = (WDEP   > 1) ? $clog2(WDEP)   : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // parameter load
  input  logic                     w_we,
  input  logic [NW-1:0]            w_neuron,
  input  logic [IW-1:0]            w_input,
  input  logic signed [DW-1:0]     w_data,
  input  logic                     b_we,
  input  logic [NW-1:0]            b_neuron,
  input  logic signed [DW-1:0]     b_data,
  // input vector read
  output logic [IW-1:0]            in_addr,
  input  logic signed [DW-1:0]     in_data,
  // results
  output logic                     out_we,
  output logic [GW-1:0]            out_group,
  output logic [N_PE-1:0]          out_mask,
  output logic [N_PE-1:0][DW-1:0]  out_data
);
  logic [N_PE-1:0][DW-1:0] wmem [WDEP];
  logic [N_PE-1:0][DW-1:0] bmem [GROUPS];

  // ---- parameter load -------------------------------------------------
  always_ff @(posedge clk) begin
    if (w_we)
      wmem[(int'(w_neuron) / N_PE) * N_IN + int'(w_input)][int'(w_neuron) % N_PE] <= w_data;
    if (b_we)
      bmem[int'(b_neuron) / N_PE][int'(b_neuron) % N_PE] <= b_data;
  end

  // ---- issue sequencer ----------------------------------------------------
  logic            running;
  logic [IW-1:0]   i_cnt;
  logic [GW-1:0]   g_cnt;
  logic [WAW-1:0]  w_addr;
  logic            issue_q;
  logic [N_PE-1:0][DW-1:0] w_row_q, b_row_q;
  logic [GW-1:0]   o_grp;

  wire last_issue = running && (i_cnt == IW'(N_IN - 1)) && (g_cnt == GW'(GROUPS - 1));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      running <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
      issue_q <= 1'b0;
      i_cnt   <= '0;
      g_cnt   <= '0;
      w_addr  <= '0;
      o_grp   <= '0;
    end else begin
      done    <= 1'b0;
      issue_q <= running;
      if (start && !busy) begin
        running <= 1'b1;
        busy    <= 1'b1;
        i_cnt   <= '0;
        g_cnt   <= '0;
        w_addr  <= '0;
        o_grp   <= '0;
      end else if (running) begin
        w_addr <= w_addr + 1'b1;
        if (i_cnt == IW'(N_IN - 1)) begin
          i_cnt <= '0;
          g_cnt <= g_cnt + 1'b1;
        end else begin
          i_cnt <= i_cnt + 1'b1;
        end
        if (last_issue) running <= 1'b0;
      end
      if (out_we) begin
        o_grp <= o_grp + 1'b1;
        if (o_grp == GW'(GROUPS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end

  assign in_addr = i_cnt;

  always_ff @(posedge clk) begin
    w_row_q <= wmem[w_addr];
    b_row_q <= bmem[g_cnt];
  end

  // ---- processing elements ------------------------------------------------
  logic [N_PE-1:0]         pe_valid;
  logic [N_PE-1:0][DW-1:0] pe_out;

  for (genvar k = 0; k < N_PE; k++) begin : g_pe
    fc_pe #(.DW(DW), .FRAC(FRAC), .N_IN(N_IN)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .pe_en     (issue_q),
      .x         (in_data),
      .w         (w_row_q[k]),
      .bias      (b_row_q[k]),
      .out_valid (pe_valid[k]),
      .out       (pe_out[k])
    );
    if (RELU) begin : g_act
      relu #(.DW(DW)) u_relu (.x(pe_out[k]), .y(out_data[k]));
    end else begin : g_lin
      assign out_data[k] = pe_out[k];
    end
    assign out_mask[k] = (int'(o_grp) * N_PE + k) < N_OUT;
  end

  assign out_we    = pe_valid[0];
  assign out_group = o_grp;
endmodule
