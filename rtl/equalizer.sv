// Frequency-domain equalizer.
//
// Holds the NSC channel coefficients H[k] delivered by the channel estimator and,
// for each FFT frame, divides every used subcarrier by its coefficient:
//   eq[k] = Y[k] * conj(H[k]) / |H[k]|^2,   csi[k] = |H[k]|^2
// using one divider pair, one subcarrier per cycle. csi is passed on for scaling the
// demapper's LLRs. A coefficient with |H|^2 = 0 gives eq = 0. Subcarrier k = 0..51
// is -26..-1, +1..+26, read from FFT bin (k-26) mod 64 or (k-25) mod 64.
// Interface: h_load writes all coefficients at once; ready/valid frames in and out.
// Timing: NSC cycles per frame, result held until taken.
// The division follows the paper's classical equalizer; the sequential schedule and
// the output of |H|^2 as the CSI term are this design's choices.
module equalizer
  import rx_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  h_load,
  input  cplx_t h_in  [NSC],
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_frame [NFFT],
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_eq  [NSC],
  output word_t m_csi [NSC]
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;
  cplx_t h_q [NSC];
  cplx_t y_q [NFFT];
  logic [5:0] k;

  cplx_t hk, yk, eqk;
  word_t csik;
  always_comb begin
    logic signed [47:0] nr, ni, den;
    hk  = h_q[k];
    yk  = y_q[sc_bin(int'(k))];
    den = 48'(32'(hk.re) * 32'(hk.re)) + 48'(32'(hk.im) * 32'(hk.im));
    nr  = 48'(32'(yk.re) * 32'(hk.re)) + 48'(32'(yk.im) * 32'(hk.im));
    ni  = 48'(32'(yk.im) * 32'(hk.re)) - 48'(32'(yk.re) * 32'(hk.im));
    if (den == 0) begin
      eqk = '0;
    end else begin
      eqk.re = sat(64'((nr <<< FRAC) / den));
      eqk.im = sat(64'((ni <<< FRAC) / den));
    end
    csik = sat(64'(den >>> FRAC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
      for (int i = 0; i < NSC; i++) h_q[i] <= '0;
    end else begin
      if (h_load) h_q <= h_in;
      case (state)
        S_IDLE: if (s_valid) begin
          y_q   <= s_frame;
          k     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          m_eq[k]  <= eqk;
          m_csi[k] <= csik;
          if (int'(k) == NSC - 1) state <= S_DONE;
          else k <= k + 1'b1;
        end
        S_DONE: if (m_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign s_ready = (state == S_IDLE);
  assign m_valid = (state == S_DONE);
endmodule
