// Channel-estimator network: time-domain L-LTF in, 52 complex channel coefficients out.
//
// Two independent three-layer perceptrons of 160-512-256-52 neurons (ReLU hidden
// layers, linear output layer, 8-bit weights) estimate the real and the imaginary
// parts of the channel. The 160 RMS-normalized L-LTF samples are streamed in; the
// in-phase parts feed the real-part network and the quadrature parts the
// imaginary-part network, then both run in parallel. Coefficient k (k = 0..51) is
// subcarrier -26..-1, +1..+26.
// Load port: ld_net 0 = real network, 1 = imaginary network; ld_layer picks the layer.
// Timing: 160 input beats, then one mlp3 run (both networks together); h_valid pulses
// for one cycle with h. Sizes, activations and widths follow the paper; the split of
// I and Q between the two networks is this design's reading of it.
module channel_estimator_nn
  import rx_pkg::*;
#(
  parameter int N0 = LLTF_LEN,
  parameter int N1 = 512,
  parameter int N2 = 256,
  parameter int N3 = NSC,
  parameter int WB = 8,
  parameter int BR = 16,
  parameter int BC = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ld_we,
  input  logic            ld_net,
  input  logic [1:0]      ld_layer,
  input  logic [2:0]      ld_sel,
  input  logic [31:0]     ld_addr,
  input  logic [LDW-1:0]  ld_data,
  input  logic            s_valid,
  output logic            s_ready,
  input  cplx_t           s_data,
  output logic            h_valid,
  output cplx_t           h [N3]
);
  logic [$clog2(N0+1)-1:0] cnt;
  logic start, done_re, done_im, running;
  logic busy_re, busy_im;  // engine status, not needed outside
  word_t yre [N3], yim [N3];

  assign s_ready = !running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      start   <= 1'b0;
      running <= 1'b0;
    end else begin
      start <= 1'b0;
      if (!running && s_valid) begin
        if (int'(cnt) == N0 - 1) begin
          cnt     <= '0;
          start   <= 1'b1;
          running <= 1'b1;
        end else cnt <= cnt + 1'b1;
      end
      if (h_valid) running <= 1'b0;
    end
  end

  mlp3 #(.N0(N0), .N1(N1), .N2(N2), .N3(N3), .WB(WB), .WFRAC(WB - 2), .BR(BR), .BC(BC)) u_re (
    .clk, .rst_n, .ld_we(ld_we && !ld_net), .ld_layer, .ld_sel, .ld_addr, .ld_data,
    .in_we(!running && s_valid), .in_addr(($clog2(N0))'(cnt)), .in_data(s_data.re),
    .start, .busy(busy_re), .done(done_re), .y(yre));
  mlp3 #(.N0(N0), .N1(N1), .N2(N2), .N3(N3), .WB(WB), .WFRAC(WB - 2), .BR(BR), .BC(BC)) u_im (
    .clk, .rst_n, .ld_we(ld_we && ld_net), .ld_layer, .ld_sel, .ld_addr, .ld_data,
    .in_we(!running && s_valid), .in_addr(($clog2(N0))'(cnt)), .in_data(s_data.im),
    .start, .busy(busy_im), .done(done_im), .y(yim));

  // both networks see the same column schedule only if pruned alike; wait for both
  logic got_re, got_im;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got_re  <= 1'b0;
      got_im  <= 1'b0;
      h_valid <= 1'b0;
    end else begin
      h_valid <= 1'b0;
      if ((got_re || done_re) && (got_im || done_im)) begin
        h_valid <= 1'b1;
        got_re  <= 1'b0;
        got_im  <= 1'b0;
      end else begin
        if (done_re) got_re <= 1'b1;
        if (done_im) got_im <= 1'b1;
      end
    end
  end

  always_comb for (int k = 0; k < N3; k++) begin
    h[k].re = yre[k];
    h[k].im = yim[k];
  end
endmodule
