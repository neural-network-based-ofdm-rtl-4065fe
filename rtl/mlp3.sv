// Three-layer perceptron built from three nn_dense engines, one per layer.
//
// The input vector (N0 words) is written through in_we/in_addr/in_data. A start pulse
// runs layer 1 (ReLU), then layer 2 (ReLU), then layer 3 (linear); each layer's
// outputs are stored in a buffer that feeds the next, and the N3 results stay on
// y until the next run. done pulses when layer 3 has finished.
// Load port: ld_layer (0..2) picks the engine, the rest is nn_dense's load port.
// Timing: the sum of the three layers' nn_dense cycle counts plus 2 hand-over cycles.
// Used for each of the two channel-estimator networks.
module mlp3
  import rx_pkg::*;
#(
  parameter int N0 = 160,
  parameter int N1 = 512,
  parameter int N2 = 256,
  parameter int N3 = 52,
  parameter int WB = 8,
  parameter int WFRAC = 6,
  parameter int BR = 16,
  parameter int BC = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ld_we,
  input  logic [1:0]      ld_layer,
  input  logic [2:0]      ld_sel,
  input  logic [31:0]     ld_addr,
  input  logic [LDW-1:0]  ld_data,
  input  logic            in_we,
  input  logic [$clog2(N0)-1:0] in_addr,
  input  word_t           in_data,
  input  logic            start,
  output logic            busy,
  output logic            done,
  output word_t           y [N3]
);
  word_t a0 [N0];
  word_t a1 [N1];
  word_t a2 [N2];

  logic [$clog2(N0+1)-1:0] xa1;
  logic [$clog2(N1+1)-1:0] xa2;
  logic [$clog2(N2+1)-1:0] xa3;
  logic v1, v2, v3, d1, d2, d3, b1, b2, b3;
  logic [$clog2((N1+BR-1)/BR+1)-1:0] yb1;
  logic [$clog2((N2+BR-1)/BR+1)-1:0] yb2;
  logic [$clog2((N3+BR-1)/BR+1)-1:0] yb3;
  word_t y1 [BR], y2 [BR], y3 [BR];
  word_t x1, x2, x3;

  assign x1 = a0[xa1];
  assign x2 = a1[xa2];
  assign x3 = a2[xa3];

  nn_dense #(.IN(N0), .OUT(N1), .WB(WB), .WFRAC(WFRAC), .BR(BR), .BC(BC), .ACT(ACT_RELU)) u_l1 (
    .clk, .rst_n, .ld_we(ld_we && ld_layer == 2'd0), .ld_sel, .ld_addr, .ld_data(ld_data[BR*DW-1:0]),
    .start, .busy(b1), .x_addr(xa1), .x_data(x1), .y_valid(v1), .y_br(yb1), .y_vec(y1), .done(d1));
  nn_dense #(.IN(N1), .OUT(N2), .WB(WB), .WFRAC(WFRAC), .BR(BR), .BC(BC), .ACT(ACT_RELU)) u_l2 (
    .clk, .rst_n, .ld_we(ld_we && ld_layer == 2'd1), .ld_sel, .ld_addr, .ld_data(ld_data[BR*DW-1:0]),
    .start(d1), .busy(b2), .x_addr(xa2), .x_data(x2), .y_valid(v2), .y_br(yb2), .y_vec(y2), .done(d2));
  nn_dense #(.IN(N2), .OUT(N3), .WB(WB), .WFRAC(WFRAC), .BR(BR), .BC(BC), .ACT(ACT_LINEAR)) u_l3 (
    .clk, .rst_n, .ld_we(ld_we && ld_layer == 2'd2), .ld_sel, .ld_addr, .ld_data(ld_data[BR*DW-1:0]),
    .start(d2), .busy(b3), .x_addr(xa3), .x_data(x3), .y_valid(v3), .y_br(yb3), .y_vec(y3), .done(d3));

  always_ff @(posedge clk) begin
    if (in_we) a0[in_addr] <= in_data;
    for (int l = 0; l < BR; l++) begin
      if (v1 && int'(yb1) * BR + l < N1) a1[int'(yb1) * BR + l] <= y1[l];
      if (v2 && int'(yb2) * BR + l < N2) a2[int'(yb2) * BR + l] <= y2[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N3; i++) y[i] <= '0;
    end else begin
      for (int l = 0; l < BR; l++)
        if (v3 && int'(yb3) * BR + l < N3) y[int'(yb3) * BR + l] <= y3[l];
    end
  end

  assign busy = b1 | b2 | b3;
  assign done = d3;
endmodule
