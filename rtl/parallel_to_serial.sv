// Parallel-to-serial conversion after the equalizer.
//
// Takes one equalized frame of the NSC used subcarriers with their channel power
// |H|^2 and sends the NDATA data subcarriers (pilots at -21, -7, +7, +21 skipped) one
// per cycle, lowest subcarrier first, to the demapper. s_ready is high only when no
// frame is being sent.
// Timing: NDATA output beats per frame when the output is ready.
// Named in the paper's chain; the pilot positions and order follow 802.11a.
module parallel_to_serial
  import rx_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_eq  [NSC],
  input  word_t s_csi [NSC],
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_sym,
  output word_t m_csi
);
  cplx_t eq_q  [NSC];
  word_t csi_q [NSC];
  logic  busy;
  logic [5:0] d;
  int k;

  assign s_ready = !busy;
  assign m_valid = busy;
  always_comb begin
    k     = data_sc(int'(d));
    m_sym = eq_q[k];
    m_csi = csi_q[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      d    <= '0;
    end else if (!busy) begin
      if (s_valid) begin
        eq_q  <= s_eq;
        csi_q <= s_csi;
        busy  <= 1'b1;
        d     <= '0;
      end
    end else if (m_ready) begin
      if (int'(d) == NDATA - 1) busy <= 1'b0;
      else d <= d + 1'b1;
    end
  end
endmodule
