// 802.11a block de-interleaver for one OFDM symbol of soft bits.
//
// Collects the NCBPS (192 for 16QAM) LLRs of a symbol in received order, then emits
// them in coded-bit order: output k is received position j(k) of the standard's
// two-step permutation, i = 12*(k mod 16) + floor(k/16),
// j = 2*floor(i/2) + (i + 192 - floor(16*i/192)) mod 2.
// Interface: ready/valid LLR streams; the input is stalled while a symbol is emitted.
// Timing: 192 input beats, then 192 output beats.
// Named in the paper's chain; the permutation is the 802.11a one.
module deinterleaver
  import rx_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  word_t s_llr,
  output logic  m_valid,
  input  logic  m_ready,
  output word_t m_llr
);
  word_t mem [NCBPS];
  logic [7:0] cnt;
  logic emit;

  assign s_ready = !emit;
  assign m_valid = emit;
  assign m_llr   = mem[ilv_pos(int'(cnt))];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      emit <= 1'b0;
    end else if (!emit) begin
      if (s_valid) begin
        mem[cnt] <= s_llr;
        if (int'(cnt) == NCBPS - 1) begin
          cnt  <= '0;
          emit <= 1'b1;
        end else cnt <= cnt + 1'b1;
      end
    end else if (m_ready) begin
      if (int'(cnt) == NCBPS - 1) begin
        cnt  <= '0;
        emit <= 1'b0;
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule
