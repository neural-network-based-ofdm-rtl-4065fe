// RMS power normalization of a received packet.
//
// The channel-estimator network expects its time-domain L-LTF input at a nominal
// power of 1 (0 dBW). This block buffers the first LLTF_LEN samples of a packet while
// summing |x|^2, then finds the gain g with g^2 * mean(|x|^2) = 1 by a 16-step
// bit-serial search (one trial square per cycle, no divider or square root). It then
// replays the buffered preamble scaled by g with m_lltf = 1, and afterwards passes
// every payload sample scaled by the same g, so the channel estimate and the payload
// stay on one scale.
// Interface: ready/valid streams of cplx_t (Q7.8) in and out; pkt_start restarts
// collection for a new packet. gain is Q8.8 unsigned (largest 255.996).
// Timing: LLTF_LEN input cycles, 16 cycles of gain search, LLTF_LEN output cycles,
// then one sample per cycle when the output is ready.
// The normalization itself follows the paper; applying the preamble's gain to the
// payload and the search method are this design's choices.
module rms_normalizer
  import rx_pkg::*;
#(
  parameter int N = LLTF_LEN
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  pkt_start,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_data,
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_data,
  output logic  m_lltf,
  output logic [15:0] gain
);
  typedef enum logic [1:0] {S_COLLECT, S_GAIN, S_EMIT, S_PASS} state_e;
  state_e state;
  cplx_t  buf_q [N];
  logic [$clog2(N+1)-1:0] cnt;
  logic [47:0] acc;
  logic [4:0]  bitn;
  logic [15:0] g;

  function automatic word_t scale(input word_t x, input logic [15:0] gg);
    logic signed [40:0] p;
    p = 41'(x) * $signed({25'd0, gg});
    return sat(64'((p + 41'sd128) >>> 8));
  endfunction

  // trial gain for the current bit and its test g^2 * acc <= N * 2^32
  logic [15:0] trial;
  logic [95:0] lhs, rhs;
  always_comb begin
    trial = g | (16'd1 << bitn[3:0]);
    lhs   = 96'(trial) * 96'(trial) * 96'(acc);
    rhs   = 96'(N) << 32;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT;
      cnt   <= '0;
      acc   <= '0;
      bitn  <= '0;
      g     <= '0;
    end else if (pkt_start) begin
      state <= S_COLLECT;
      cnt   <= '0;
      acc   <= '0;
    end else begin
      case (state)
        S_COLLECT: if (s_valid) begin
          buf_q[cnt] <= s_data;
          acc <= acc + 48'(32'(s_data.re) * 32'(s_data.re)) + 48'(32'(s_data.im) * 32'(s_data.im));
          if (int'(cnt) == N - 1) begin
            state <= S_GAIN;
            bitn  <= 5'd15;
            g     <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_GAIN: begin
          if (acc == 0) g <= 16'hffff;
          else if (lhs <= rhs) g <= trial;
          if (bitn == 0) begin
            state <= S_EMIT;
            cnt   <= '0;
          end else bitn <= bitn - 1'b1;
        end
        S_EMIT: if (m_ready) begin
          if (int'(cnt) == N - 1) state <= S_PASS;
          else cnt <= cnt + 1'b1;
        end
        default: ;  // S_PASS: combinational pass-through
      endcase
    end
  end

  always_comb begin
    s_ready = 1'b0;
    m_valid = 1'b0;
    m_lltf  = 1'b0;
    m_data  = '0;
    case (state)
      S_COLLECT: s_ready = 1'b1;
      S_EMIT: begin
        m_valid = 1'b1;
        m_lltf  = 1'b1;
        m_data.re = scale(buf_q[cnt].re, g);
        m_data.im = scale(buf_q[cnt].im, g);
      end
      S_PASS: begin
        s_ready = m_ready;
        m_valid = s_valid;
        m_data.re = scale(s_data.re, g);
        m_data.im = scale(s_data.im, g);
      end
      default: ;
    endcase
  end

  assign gain = g;
endmodule
