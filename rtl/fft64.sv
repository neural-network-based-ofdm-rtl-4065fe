// 64-point FFT of one OFDM symbol.
//
// In-place radix-2 decimation-in-time FFT with one butterfly per cycle. A frame is
// loaded in bit-reversed order, then 6 stages of 32 butterflies run; stages whose bit
// is set in SCALE halve their results (default 3 stages, so the output is the DFT
// divided by 8 = sqrt(64) and keeps the signal power). Twiddles are cos/sin of
// 2*pi*k/64 in Q1.14, taken from a 17-entry quarter-wave table
// (round(16384*cos(2*pi*k/64)), k = 0..16); products and halvings are rounded.
// Interface: ready/valid frame of 64 cplx_t (Q7.8) in, natural-order frame out,
// X[k] = sum_n x[n] exp(-j 2 pi k n / 64) / 8.
// Timing: the result is valid 192 cycles (6 x 32 butterflies) after the edge that
// takes the frame, and is held until taken.
// The FFT is named in the paper's chain; its architecture is this design's choice.
module fft64
  import rx_pkg::*;
#(
  parameter logic [5:0] SCALE = 6'b010101
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_frame [NFFT],
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_frame [NFFT]
);
  localparam int LOGN = 6;

  function automatic logic signed [15:0] qcos(input int k);  // cos(2 pi k/64), k = 0..16
    case (k)
      0: return 16'sd16384;  1: return 16'sd16305;  2: return 16'sd16069;  3: return 16'sd15679;
      4: return 16'sd15137;  5: return 16'sd14449;  6: return 16'sd13623;  7: return 16'sd12665;
      8: return 16'sd11585;  9: return 16'sd10394; 10: return 16'sd9102;  11: return 16'sd7723;
     12: return 16'sd6270;  13: return 16'sd4756;  14: return 16'sd3196;  15: return 16'sd1606;
      default: return 16'sd0;
    endcase
  endfunction
  function automatic logic signed [15:0] tw_cos(input int k);  // k = 0..31
    return (k <= 16) ? qcos(k) : -qcos(32 - k);
  endfunction
  function automatic logic signed [15:0] tw_sin(input int k);
    return (k <= 16) ? qcos(16 - k) : qcos(k - 16);
  endfunction
  function automatic int bitrev(input int n);
    int r;
    r = 0;
    for (int b = 0; b < LOGN; b++) if (n & (1 << b)) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;
  cplx_t mem [NFFT];
  logic [2:0] stage;
  logic [4:0] bfly;

  // butterfly addresses and twiddle of the current step
  int half, grp, pos, ia, ib, tk;
  cplx_t a, b, ya, yb;
  always_comb begin
    logic signed [31:0] pr, pi, wr, wi;
    logic signed [17:0] sr, si, dr, di;
    half = 1 << stage;
    grp  = int'(bfly) / half;
    pos  = int'(bfly) % half;
    ia   = grp * 2 * half + pos;
    ib   = ia + half;
    tk   = pos * (NFFT / (2 * half));
    a    = mem[ia];
    b    = mem[ib];
    // W = cos - j sin;  W*b
    wr = 32'(tw_cos(tk));
    wi = -32'(tw_sin(tk));
    pr = (32'(b.re) * wr - 32'(b.im) * wi + 32'sd8192) >>> 14;
    pi = (32'(b.re) * wi + 32'(b.im) * wr + 32'sd8192) >>> 14;
    sr = 18'(a.re) + 18'(pr);
    si = 18'(a.im) + 18'(pi);
    dr = 18'(a.re) - 18'(pr);
    di = 18'(a.im) - 18'(pi);
    if (SCALE[stage]) begin
      sr = (sr + 18'sd1) >>> 1; si = (si + 18'sd1) >>> 1;
      dr = (dr + 18'sd1) >>> 1; di = (di + 18'sd1) >>> 1;
    end
    ya.re = sat(64'(sr)); ya.im = sat(64'(si));
    yb.re = sat(64'(dr)); yb.im = sat(64'(di));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      stage <= '0;
      bfly  <= '0;
    end else begin
      case (state)
        S_IDLE: if (s_valid) begin
          for (int n = 0; n < NFFT; n++) mem[bitrev(n)] <= s_frame[n];
          stage <= '0;
          bfly  <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          mem[ia] <= ya;
          mem[ib] <= yb;
          if (bfly == 5'd31) begin
            bfly <= '0;
            if (int'(stage) == LOGN - 1) state <= S_DONE;
            else stage <= stage + 1'b1;
          end else bfly <= bfly + 1'b1;
        end
        S_DONE: if (m_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign s_ready = (state == S_IDLE);
  assign m_valid = (state == S_DONE);
  assign m_frame = mem;
endmodule
