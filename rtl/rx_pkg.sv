// Shared types, constants and arithmetic helpers of the neural-network OFDM receiver.
//
// Every datapath value is a signed 16-bit fixed-point number with 8 fractional bits
// (Q7.8), so 1.0 is 256. Complex samples travel as a cplx_t struct. Weights are
// narrower (8 or 4 bits) and are interpreted per output row either as a plain
// fixed-point integer or as a power-of-two code (mixed-scheme quantization).
// The helpers here (saturation, the piecewise-linear sigmoid and tanh, the 802.11a
// subcarrier map and the interleaver permutation) are pure functions, used both by
// the RTL and, independently re-derived, checked by the testbenches.
// The formats, the activation approximations and the subcarrier ordering are this
// design's own choices; the paper fixes only the layer sizes and weight widths.
package rx_pkg;

  localparam int DW   = 16;          // datapath word width
  localparam int FRAC = 8;           // fractional bits of a datapath word
  localparam int ONE  = 1 << FRAC;   // 1.0 in datapath format

  localparam int NFFT   = 64;        // 802.11a FFT size
  localparam int NCP    = 16;        // cyclic prefix length
  localparam int NSYM_T = NFFT + NCP;
  localparam int NSC    = 52;        // used subcarriers (data + pilots)
  localparam int NDATA  = 48;        // data subcarriers
  localparam int NBPSC  = 4;         // 16QAM bits per subcarrier
  localparam int NCBPS  = NDATA * NBPSC;  // coded bits per OFDM symbol (192)
  localparam int LLTF_LEN = 160;     // time-domain L-LTF samples
  localparam int LDW = 256;          // width of the weight-load data bus (16 lanes x 16 bits)

  typedef logic signed [DW-1:0] word_t;

  typedef struct packed {
    word_t re;
    word_t im;
  } cplx_t;

  typedef enum logic [0:0] {ACT_LINEAR = 1'b0, ACT_RELU = 1'b1} act_e;

  // Saturate a wide signed value to a datapath word.
  function automatic word_t sat(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return word_t'(v);
  endfunction

  // Piecewise-linear sigmoid (shift-and-add only), Q7.8 in and out:
  //   |x| >= 5       : 1
  //   2.375 <= |x|<5 : |x|/32 + 0.84375
  //   1 <= |x|<2.375 : |x|/8  + 0.625
  //   |x| < 1        : |x|/4  + 0.5
  // and sigmoid(-x) = 1 - sigmoid(x).
  function automatic word_t sigmoid_pwl(input word_t x);
    logic signed [DW:0] a;
    logic signed [DW:0] y;
    a = (x < 0) ? -$signed({x[DW-1], x}) : $signed({x[DW-1], x});
    if (a >= 17'sd1280)      y = 17'sd256;
    else if (a >= 17'sd608)  y = (a >>> 5) + 17'sd216;
    else if (a >= 17'sd256)  y = (a >>> 3) + 17'sd160;
    else                     y = (a >>> 2) + 17'sd128;
    if (x < 0) y = 17'sd256 - y;
    return word_t'(y);
  endfunction

  // tanh(x) = 2*sigmoid(2x) - 1, using the approximation above.
  function automatic word_t tanh_pwl(input word_t x);
    logic signed [63:0] x2;
    x2 = 64'(x) * 2;
    return word_t'(2 * sigmoid_pwl(sat(x2)) - ONE);
  endfunction

  // FFT bin of the k-th used subcarrier, k = 0..51 covering -26..-1, 1..26.
  function automatic int sc_bin(input int k);
    int s;
    s = (k < 26) ? k - 26 : k - 25;
    return (s < 0) ? s + NFFT : s;
  endfunction

  // Index (0..51) of the d-th data subcarrier, skipping pilots at -21, -7, 7, 21.
  function automatic int data_sc(input int d);
    int k;
    int n;
    n = -1;
    for (k = 0; k < NSC; k++) begin
      if (!(k == 5 || k == 19 || k == 32 || k == 46)) n++;
      if (n == d) return k;
    end
    return 0;
  endfunction

  // 802.11a interleaver: position j (after both permutations) of coded bit k.
  function automatic int ilv_pos(input int k);
    int i;
    int s;
    i = (NCBPS / 16) * (k % 16) + k / 16;
    s = NBPSC / 2;
    return s * (i / s) + (i + NCBPS - (16 * i / NCBPS)) % s;
  endfunction

endpackage
