// Neural-network OFDM receiver: received 802.11a time samples in, decoded bits out.
//
// Chain: RMS normalization -> (L-LTF) channel-estimator network -> equalizer
// coefficients; (payload) cyclic-prefix removal -> serial/parallel -> 64-point FFT ->
// equalizer -> parallel/serial -> demapper network (scaled LLRs) -> de-interleaver ->
// decoder network -> bits. A packet is announced by pkt_start (packet detection and
// timing are outside this design) with its number of payload OFDM symbols n_sym; the
// first 160 samples are the L-LTF, then n_sym symbols of 80 samples follow. Payload
// samples are held back (s_ready low) until the channel estimate exists, and every
// stage stalls its predecessor when busy. The decoder needs the whole packet, so the
// bits leave after the last symbol: n_sym*96 of them, then pkt_done.
// Weight load port: ld_unit 0 = channel estimator (ld_sub[2] = imaginary network,
// ld_sub[1:0] = layer), 1 = demapper (ld_sub[0] = layer), 2 = decoder (ld_sub =
// engine), with nn_dense's ld_sel/ld_addr/ld_data underneath.
// The chain and the three networks follow the paper's receiver figure; the
// handshakes, the packet framing and the weight port are this design's choices.
module nn_ofdm_rx
  import rx_pkg::*;
#(
  parameter int MAXSYM = 86,   // 4128 data symbols / 48 per OFDM symbol
  parameter int CE_H1  = 512,
  parameter int CE_H2  = 256,
  parameter int DM_H   = 20,
  parameter int DEC_HID = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  // weights
  input  logic           ld_we,
  input  logic [1:0]     ld_unit,
  input  logic [2:0]     ld_sub,
  input  logic [2:0]     ld_sel,
  input  logic [31:0]    ld_addr,
  input  logic [LDW-1:0] ld_data,
  // packet
  input  logic           pkt_start,
  input  logic [$clog2(MAXSYM+1)-1:0] n_sym,
  input  word_t          inv_nvar,
  input  logic           s_valid,
  output logic           s_ready,
  input  cplx_t          s_data,
  // bits
  output logic           bit_valid,
  output logic           bit_out,
  output logic           pkt_done,
  output logic           h_ready
);
  localparam int MAXT = MAXSYM * NCBPS / 2;

  // ---- RMS normalization
  logic  n_valid, n_ready, n_lltf;
  cplx_t n_data;
  logic [15:0] gain;
  rms_normalizer u_rms (.clk, .rst_n, .pkt_start, .s_valid, .s_ready, .s_data,
    .m_valid(n_valid), .m_ready(n_ready), .m_data(n_data), .m_lltf(n_lltf), .gain);

  // ---- channel estimator
  logic  ce_ready, ce_hv;
  cplx_t ce_h [NSC];
  logic  have_h;
  channel_estimator_nn #(.N1(CE_H1), .N2(CE_H2)) u_ce (.clk, .rst_n,
    .ld_we(ld_we && ld_unit == 2'd0), .ld_net(ld_sub[2]), .ld_layer(ld_sub[1:0]), .ld_sel, .ld_addr, .ld_data,
    .s_valid(n_valid && n_lltf), .s_ready(ce_ready), .s_data(n_data), .h_valid(ce_hv), .h(ce_h));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) have_h <= 1'b0;
    else if (pkt_start) have_h <= 1'b0;
    else if (ce_hv) have_h <= 1'b1;
  end
  assign h_ready = have_h;

  // ---- payload front end
  logic  c_valid, c_ready, p_valid, p_ready;
  cplx_t c_data;
  cplx_t p_frame [NFFT];
  logic  c_in_ready;
  assign n_ready = n_lltf ? ce_ready : (have_h && c_in_ready);
  cp_remover u_cp (.clk, .rst_n, .clear(pkt_start), .s_valid(n_valid && !n_lltf && have_h),
    .s_ready(c_in_ready), .s_data(n_data), .m_valid(c_valid), .m_ready(c_ready), .m_data(c_data));
  serial_to_parallel u_s2p (.clk, .rst_n, .clear(pkt_start), .s_valid(c_valid), .s_ready(c_ready),
    .s_data(c_data), .m_valid(p_valid), .m_ready(p_ready), .m_frame(p_frame));

  logic  f_valid, f_ready;
  cplx_t f_frame [NFFT];
  fft64 u_fft (.clk, .rst_n, .s_valid(p_valid), .s_ready(p_ready), .s_frame(p_frame),
    .m_valid(f_valid), .m_ready(f_ready), .m_frame(f_frame));

  logic  e_valid, e_ready;
  cplx_t e_eq [NSC];
  word_t e_csi [NSC];
  equalizer u_eq (.clk, .rst_n, .h_load(ce_hv), .h_in(ce_h), .s_valid(f_valid), .s_ready(f_ready),
    .s_frame(f_frame), .m_valid(e_valid), .m_ready(e_ready), .m_eq(e_eq), .m_csi(e_csi));

  logic  q_valid, q_ready;
  cplx_t q_sym;
  word_t q_csi;
  parallel_to_serial u_p2s (.clk, .rst_n, .s_valid(e_valid), .s_ready(e_ready), .s_eq(e_eq),
    .s_csi(e_csi), .m_valid(q_valid), .m_ready(q_ready), .m_sym(q_sym), .m_csi(q_csi));

  // ---- demapper, de-interleaver, decoder
  logic  l_valid, l_ready, d_valid, d_ready;
  word_t l_llr, d_llr;
  word_t dm_logit [NBPSC];
  demapper_nn #(.H(DM_H)) u_dm (.clk, .rst_n, .ld_we(ld_we && ld_unit == 2'd1), .ld_layer(ld_sub[0]),
    .ld_sel, .ld_addr, .ld_data, .inv_nvar, .s_valid(q_valid), .s_ready(q_ready), .s_sym(q_sym),
    .s_csi(q_csi), .m_valid(l_valid), .m_ready(l_ready), .m_llr(l_llr), .m_logit(dm_logit));

  deinterleaver u_di (.clk, .rst_n, .s_valid(l_valid), .s_ready(l_ready), .s_llr(l_llr),
    .m_valid(d_valid), .m_ready(d_ready), .m_llr(d_llr));

  logic [$clog2(MAXT+1)-1:0] nsteps;
  assign nsteps = ($clog2(MAXT+1))'(int'(n_sym) * (NCBPS / 2));
  word_t dec_logit;
  decoder_nn #(.HID(DEC_HID), .MAXT(MAXT)) u_dec (.clk, .rst_n, .ld_we(ld_we && ld_unit == 2'd2),
    .ld_eng(ld_sub), .ld_sel, .ld_addr, .ld_data, .n_steps(nsteps), .s_valid(d_valid),
    .s_ready(d_ready), .s_llr(d_llr), .m_valid(bit_valid), .m_bit(bit_out), .m_logit(dec_logit),
    .done(pkt_done));

  logic unused;
  assign unused = ^gain ^ ^dec_logit ^ dm_logit[0][0];
endmodule
