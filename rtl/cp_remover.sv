// Cyclic-prefix removal.
//
// Counts the samples of each NFFT+NCP-sample OFDM symbol and drops the first NCP,
// the cyclic prefix, passing the NFFT useful samples on. Ready/valid stream of cplx_t
// in and out; clear restarts the count at a symbol boundary (start of payload).
// Timing: combinational, one sample per cycle, prefix samples are consumed without
// output. The block appears by name in the paper's receiver chain; the 802.11a sizes
// (64 + 16) come from that standard.
module cp_remover
  import rx_pkg::*;
#(
  parameter int N  = NFFT,
  parameter int CP = NCP
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_data,
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_data
);
  logic [$clog2(N+CP)-1:0] cnt;
  logic in_cp;
  assign in_cp   = int'(cnt) < CP;
  assign s_ready = in_cp ? 1'b1 : m_ready;
  assign m_valid = s_valid && !in_cp;
  assign m_data  = s_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (clear) cnt <= '0;
    else if (s_valid && s_ready) cnt <= (int'(cnt) == N + CP - 1) ? '0 : cnt + 1'b1;
  end
endmodule
