// lsidnn_ctrl: frame sequencer of the LSiDNN core.
//
// Four states in a chain, S0 -> S1 -> S2 -> S3, then back to S0:
//  S0  idle; the input stream is ready. The first accepted pilot moves to S1.
//  S1  the remaining pilots are accepted (in_ready until N_P have been taken);
//      each passes the LS estimator into the concatenation buffer. When the LS
//      estimate of the last pilot is written (ls_done) the hidden layer is
//      started.
//  S2  hidden layer, then output layer (l1_start on entry, l2_start when the
//      hidden layer reports l1_done).
//  S3  the estimates are streamed out (out_start on entry); out_done returns
//      to S0.
// The chain of four states is that of the published design; what each state
// covers and the return to S0 are this implementation's reading of it.
// in_idx is the index of the pilot being accepted in the current cycle.
// All *_start outputs are one-clock pulses.
module lsidnn_ctrl
  import lsidnn_pkg::*;
#(
  parameter int unsigned N_P = 48,
  localparam int unsigned IW = (N_P > 1) ? $clog2(N_P) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_fire,    // input beat accepted this cycle
  input  logic          ls_done,    // LS estimate of the last pilot written
  input  logic          l1_done,
  input  logic          l2_done,
  input  logic          out_done,
  output logic          in_ready,
  output logic [IW-1:0] in_idx,
  output logic          l1_start,
  output logic          l2_start,
  output logic          out_start,
  output state_e        state
);
  logic [IW:0] n_acc;   // pilots accepted in this frame

  assign in_ready = (state == ST_S0) || (state == ST_S1 && n_acc < (IW+1)'(N_P));
  assign in_idx   = n_acc[IW-1:0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state     <= ST_S0;
      n_acc     <= '0;
      l1_start  <= 1'b0;
      l2_start  <= 1'b0;
      out_start <= 1'b0;
    end else begin
      l1_start  <= 1'b0;
      l2_start  <= 1'b0;
      out_start <= 1'b0;
      if (in_fire) n_acc <= n_acc + 1'b1;
      unique case (state)
        ST_S0: if (in_fire) state <= ST_S1;
        ST_S1: if (ls_done) begin
                 state    <= ST_S2;
                 l1_start <= 1'b1;
               end
        ST_S2: if (l1_done) l2_start <= 1'b1;
               else if (l2_done) begin
                 state     <= ST_S3;
                 out_start <= 1'b1;
               end
        ST_S3: if (out_done) begin
                 state <= ST_S0;
                 n_acc <= '0;
               end
        default: state <= ST_S0;
      endcase
    end

  // Phase completions only arrive in the state that started them.
  a_l1: assert property (@(posedge clk) disable iff (!rst_n) l1_done |-> state == ST_S2);
  a_l2: assert property (@(posedge clk) disable iff (!rst_n) l2_done |-> state == ST_S2);
  a_out: assert property (@(posedge clk) disable iff (!rst_n) out_done |-> state == ST_S3);
  a_in: assert property (@(posedge clk) disable iff (!rst_n) in_fire |-> in_ready);
endmodule
