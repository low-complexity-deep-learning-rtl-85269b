// r2c_stream: real-to-complex recombination and AXI-Stream output of the
// channel estimates.
//
// The output layer produces 2*N_C real values: elements 0..N_C-1 are the real
// parts and N_C..2*N_C-1 the imaginary parts of the N_C channel estimates
// (N_C = sub-carriers x OFDM symbols). Beat j of the stream carries estimate j
// as tdata = {im, re}; tlast marks beat N_C-1. The two parts are read on the
// two ports of the output buffer in the same cycle; tdata is wired straight
// from those read ports, so this block only generates addresses and handshake.
//
// The buffer reads are synchronous, so the address presented in a cycle is the
// beat that will be on the bus in the next cycle: j+1 after a handshake, j
// otherwise. This sustains one beat per clock while m_tready is high and keeps
// tdata stable while it is low. start (pulse) begins a frame; the first beat is
// valid one clock later; done pulses one clock after the handshake of the
// last beat.
module r2c_stream #(
  parameter int unsigned DW  = 26,
  parameter int unsigned N_C = 1008,
  localparam int unsigned CW = (N_C > 1) ? $clog2(N_C) : 1,
  localparam int unsigned AW = $clog2(2*N_C)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 done,
  output logic [AW-1:0]        rd_addr_a,
  input  logic signed [DW-1:0] rd_data_a,
  output logic [AW-1:0]        rd_addr_b,
  input  logic signed [DW-1:0] rd_data_b,
  output logic [2*DW-1:0]      m_tdata,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic                 m_tlast
);
  logic [CW-1:0] j;
  logic [CW-1:0] j_rd;

  wire fire = m_tvalid && m_tready;
  wire last = (j == CW'(N_C - 1));

  always_comb begin
    if (start)     j_rd = '0;
    else if (fire) j_rd = j + 1'b1;
    else           j_rd = j;
  end

  assign rd_addr_a = AW'(j_rd);
  assign rd_addr_b = AW'(j_rd) + AW'(N_C);
  assign m_tdata   = {rd_data_b, rd_data_a};
  assign m_tlast   = m_tvalid && last;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      j        <= '0;
      m_tvalid <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !m_tvalid) begin
        j        <= '0;
        m_tvalid <= 1'b1;
      end else if (fire) begin
        if (last) begin
          m_tvalid <= 1'b0;
          done     <= 1'b1;
        end else begin
          j <= j + 1'b1;
        end
      end
    end

  // AXI-Stream rule: a beat that is offered stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));
endmodule
