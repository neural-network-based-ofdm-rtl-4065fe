// Demapper network for 16QAM: one equalized symbol in, four scaled LLRs out.
//
// A 2-20-4 perceptron (ReLU hidden layer, 4-bit weights) maps the I and Q parts of
// an equalized symbol to four logits z_b, one per bit. The network's last layer is a
// sigmoid p_b = sigmoid(z_b), the probability that bit b is 1, and the soft bit is
// LLR_b = log((1 - p_b) / p_b), which is exactly -z_b: the sigmoid and the logarithm
// cancel, so no sigmoid is evaluated here. Each LLR is then scaled by the channel
// power |H|^2 of its subcarrier and by the inverse noise variance inv_nvar:
//   llr_b = sat(-z_b * csi * inv_nvar / 2^16)      (all Q7.8)
// and the four values leave one per beat, bit 0 first.
// Load port: ld_layer 0 or 1, then nn_dense's load port.
// Timing: layer 1 (5 block rows of 4 rows over 2 columns: 15 cycles unpruned),
// layer 2 (21 cycles), 2 hand-over cycles, then 4 output beats; a new symbol is taken
// when the previous one has left.
// Sizes, width and the LLR definition follow the paper; the scaling formula and where
// inv_nvar comes from (a register input) are this design's choices.
module demapper_nn
  import rx_pkg::*;
#(
  parameter int H  = 20,
  parameter int NB = NBPSC,
  parameter int WB = 4,
  parameter int BR = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ld_we,
  input  logic            ld_layer,
  input  logic [2:0]      ld_sel,
  input  logic [31:0]     ld_addr,
  input  logic [LDW-1:0]  ld_data,
  input  word_t           inv_nvar,
  input  logic            s_valid,
  output logic            s_ready,
  input  cplx_t           s_sym,
  input  word_t           s_csi,
  output logic            m_valid,
  input  logic            m_ready,
  output word_t           m_llr,
  output word_t           m_logit [NB]
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;
  word_t xin [2];
  word_t hid [H];
  word_t csi_q;
  logic  start;
  logic [$clog2(NB+1)-1:0] ob;

  logic [$clog2(3)-1:0]     xa1;
  logic [$clog2(H+1)-1:0]   xa2;
  logic v1, v2, d1, d2, b1, b2;
  logic [$clog2((H+BR-1)/BR+1)-1:0] yb1;
  logic [$clog2((NB+BR-1)/BR+1)-1:0] yb2;
  word_t y1 [BR], y2 [BR];
  word_t x1, x2;

  assign x1 = xin[xa1[0]];
  assign x2 = hid[xa2];

  nn_dense #(.IN(2), .OUT(H), .WB(WB), .WFRAC(WB - 2), .BR(BR), .BC(2), .ACT(ACT_RELU)) u_l1 (
    .clk, .rst_n, .ld_we(ld_we && !ld_layer), .ld_sel, .ld_addr, .ld_data(ld_data[BR*DW-1:0]),
    .start, .busy(b1), .x_addr(xa1), .x_data(x1), .y_valid(v1), .y_br(yb1), .y_vec(y1), .done(d1));
  nn_dense #(.IN(H), .OUT(NB), .WB(WB), .WFRAC(WB - 2), .BR(BR), .BC(4), .ACT(ACT_LINEAR)) u_l2 (
    .clk, .rst_n, .ld_we(ld_we && ld_layer), .ld_sel, .ld_addr, .ld_data(ld_data[BR*DW-1:0]),
    .start(d1), .busy(b2), .x_addr(xa2), .x_data(x2), .y_valid(v2), .y_br(yb2), .y_vec(y2), .done(d2));

  always_ff @(posedge clk) begin
    for (int l = 0; l < BR; l++)
      if (v1 && int'(yb1) * BR + l < H) hid[int'(yb1) * BR + l] <= y1[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      start <= 1'b0;
      ob    <= '0;
      csi_q <= '0;
      xin[0] <= '0;
      xin[1] <= '0;
      for (int b = 0; b < NB; b++) m_logit[b] <= '0;
    end else begin
      start <= 1'b0;
      case (state)
        S_IDLE: if (s_valid) begin
          xin[0] <= s_sym.re;
          xin[1] <= s_sym.im;
          csi_q  <= s_csi;
          start  <= 1'b1;
          state  <= S_RUN;
        end
        S_RUN: begin
          for (int l = 0; l < BR; l++)
            if (v2 && int'(yb2) * BR + l < NB) m_logit[int'(yb2) * BR + l] <= y2[l];
          if (d2) begin
            state <= S_OUT;
            ob    <= '0;
          end
        end
        S_OUT: if (m_ready) begin
          if (int'(ob) == NB - 1) state <= S_IDLE;
          else ob <= ob + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    logic signed [63:0] p;
    p = -64'(m_logit[ob]) * 64'(csi_q) * 64'(inv_nvar);
    m_llr = sat(p >>> (2 * FRAC));
  end

  assign s_ready = (state == S_IDLE);
  assign m_valid = (state == S_OUT);
  logic unused;
  assign unused = b1 ^ b2 ^ xa1[$left(xa1)];
endmodule
