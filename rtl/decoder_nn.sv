// Decoder network: de-interleaved LLRs of a packet in, decoded bits out.
//
// Each LLR is first turned into the probability that its bit is 1,
// p = 1/(1 + e^LLR) = sigmoid(-LLR) (piecewise-linear sigmoid), and pairs of
// probabilities form the 2-wide input of one time step (rate 1/2: one decoded bit per
// two coded bits). Three bidirectional GRU layers of HID units follow, then a 2*HID-16
// dense layer with ReLU and a 16-1 output layer; the bit is 1 when the output
// sigmoid exceeds 0.5, that is when the output logit is positive.
// GRU step per direction (PyTorch gate order r, z, n):
//   r = sig(Wr [x;h] + br)   z = sig(Wz [x;h] + bz)
//   n = tanh(Wnx x + bnx + r * (Wnh h + bnh))   h' = (1 - z) * n + z * h
// Each (layer, direction) has one nn_dense engine over the 4*HID x (GIN+HID) matrix
// [Wr; Wz; Wnx|0; 0|Wnh] (the zero halves are pruned blocks and cost no cycle when
// their column masks are cleared). Forward and backward directions of a layer run
// side by side, t and T-1-t; a step is the gate engine run followed by HID combine
// cycles. Layer outputs (forward units 0..HID-1, backward HID..2*HID-1) are kept
// for the whole packet in two sequence buffers, as the backward pass needs them all.
// Interface: n_steps (T <= MAXT) is sampled when the first LLR arrives; 2*T LLRs are
// taken, then T bits leave on m_valid/m_bit (with m_logit), done pulses after the
// last. Load port: ld_eng = 2*layer + direction for the GRU engines, 6 and 7 for the
// two dense layers.
// Timing: per layer and step, one gate-engine run plus HID + 3 cycles; per output bit
// the two dense runs plus 4 cycles. The first bit leaves 4 + the two dense runs after
// the last step of the last layer.
// Sizes and activations follow the paper; the engine schedule, the fixed-point
// formats and the activation approximations are this design's choices.
module decoder_nn
  import rx_pkg::*;
#(
  parameter int GIN  = 2,
  parameter int HID  = 256,
  parameter int NL   = 3,
  parameter int NH   = 16,
  parameter int MAXT = 8256,
  parameter int WB   = 8,
  parameter int BR   = 16,
  parameter int BC   = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ld_we,
  input  logic [2:0]      ld_eng,
  input  logic [2:0]      ld_sel,
  input  logic [31:0]     ld_addr,
  input  logic [LDW-1:0]  ld_data,
  input  logic [$clog2(MAXT+1)-1:0] n_steps,
  input  logic            s_valid,
  output logic            s_ready,
  input  word_t           s_llr,
  output logic            m_valid,
  output logic            m_bit,
  output word_t           m_logit,
  output logic            done
);
  localparam int TW = $clog2(MAXT + 1);
  localparam int G4 = 4 * HID;
  localparam int XW = 16;

  typedef enum logic [2:0] {S_COLLECT, S_START, S_WAIT, S_COMB, S_H1, S_H1W, S_H2W} state_e;
  state_e state;

  word_t xin  [MAXT][GIN];
  word_t seqa [MAXT][2*HID];
  word_t seqb [MAXT][2*HID];
  word_t hst  [2][HID];
  word_t gb   [2][G4];
  word_t hb   [NH];

  logic [TW-1:0] tsteps, s, hidx;
  logic [TW:0]   nin;
  logic [1:0]    layer;
  logic [$clog2(HID+1)-1:0] j;
  logic [1:0]    gdone;
  logic [TW-1:0] tdir [2];

  assign tdir[0] = s;
  assign tdir[1] = tsteps - 1'b1 - s;

  // ---------------- GRU gate engines ----------------
  logic            e_start [NL];
  logic            e_done  [NL][2];
  logic            e_v     [NL][2];
  logic [XW-1:0]   e_yb    [NL][2];
  word_t           e_y     [NL][2][BR];
  logic [XW-1:0]   e_xa    [NL][2];
  word_t           e_x     [NL][2];

  for (genvar L = 0; L < NL; L++) begin : g_layer
    localparam int GINL = (L == 0) ? GIN : 2 * HID;
    localparam int INL  = GINL + HID;
    for (genvar d = 0; d < 2; d++) begin : g_dir
      logic [$clog2(INL+1)-1:0] xa;
      logic [$clog2(G4/BR+1)-1:0] yb;
      logic busy;  // not needed: done is used
      word_t yv [BR];
      nn_dense #(.IN(INL), .OUT(G4), .WB(WB), .WFRAC(WB - 2), .BR(BR), .BC(BC), .ACT(ACT_LINEAR)) u_gate (
        .clk, .rst_n, .ld_we(ld_we && int'(ld_eng) == 2 * L + d), .ld_sel, .ld_addr,
        .ld_data(ld_data[BR*DW-1:0]), .start(e_start[L]), .busy, .x_addr(xa), .x_data(e_x[L][d]),
        .y_valid(e_v[L][d]), .y_br(yb), .y_vec(yv), .done(e_done[L][d]));
      assign e_xa[L][d] = XW'(xa);
      assign e_yb[L][d] = XW'(yb);
      assign e_y[L][d]  = yv;

      always_comb begin
        int col;
        col = int'(e_xa[L][d]);
        if (col < GINL) begin
          if (L == 0)      e_x[L][d] = xin[tdir[d]][col % GIN];
          else if (L == 1) e_x[L][d] = seqa[tdir[d]][col % (2 * HID)];
          else             e_x[L][d] = seqb[tdir[d]][col % (2 * HID)];
        end else           e_x[L][d] = hst[d][(col - GINL) % HID];
      end
    end
  end

  // ---------------- output dense layers ----------------
  logic [$clog2(2*HID+1)-1:0] h1_xa;
  logic [$clog2(NH+1)-1:0]    h2_xa;
  logic h1_start, h1_v, h1_done, h1_busy, h2_v, h2_done, h2_busy;
  logic [$clog2((NH+BR-1)/BR+1)-1:0] h1_yb;
  logic [0:0] h2_yb;
  word_t h1_y [BR];
  word_t h2_y [1];
  word_t h1_x, h2_x;

  assign h1_x = seqa[hidx][h1_xa % (2 * HID)];
  assign h2_x = hb[h2_xa % NH];

  nn_dense #(.IN(2*HID), .OUT(NH), .WB(WB), .WFRAC(WB - 2), .BR(BR), .BC(BC), .ACT(ACT_RELU)) u_head1 (
    .clk, .rst_n, .ld_we(ld_we && ld_eng == 3'd6), .ld_sel, .ld_addr, .ld_data(ld_data[BR*DW-1:0]),
    .start(h1_start), .busy(h1_busy), .x_addr(h1_xa), .x_data(h1_x), .y_valid(h1_v), .y_br(h1_yb),
    .y_vec(h1_y), .done(h1_done));
  nn_dense #(.IN(NH), .OUT(1), .WB(WB), .WFRAC(WB - 2), .BR(1), .BC(BC), .ACT(ACT_LINEAR)) u_head2 (
    .clk, .rst_n, .ld_we(ld_we && ld_eng == 3'd7), .ld_sel, .ld_addr, .ld_data(ld_data[DW-1:0]),
    .start(h1_done), .busy(h2_busy), .x_addr(h2_xa), .x_data(h2_x), .y_valid(h2_v), .y_br(h2_yb),
    .y_vec(h2_y), .done(h2_done));

  // ---------------- GRU element-wise update ----------------
  word_t hnew [2];
  always_comb begin
    for (int d = 0; d < 2; d++) begin
      word_t r, z, n;
      logic signed [63:0] rn, hh;
      r  = sigmoid_pwl(gb[d][int'(j)]);
      z  = sigmoid_pwl(gb[d][HID + int'(j)]);
      rn = (64'(r) * 64'(gb[d][3*HID + int'(j)]) + 64'sd128) >>> FRAC;
      n  = tanh_pwl(sat(64'(gb[d][2*HID + int'(j)]) + rn));
      hh = (64'(ONE - z) * 64'(n) + 64'(z) * 64'(hst[d][j]) + 64'sd128) >>> FRAC;
      hnew[d] = sat(hh);
    end
  end

  function automatic word_t neg(input word_t v);
    return (v == 16'sh8000) ? 16'sh7fff : -v;
  endfunction

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    if (state == S_COLLECT && s_valid) xin[nin[TW:1]][nin[0] ? 1 : 0] <= sigmoid_pwl(neg(s_llr));
    for (int L = 0; L < NL; L++)
      for (int d = 0; d < 2; d++)
        if (int'(layer) == L && e_v[L][d])
          for (int l = 0; l < BR; l++) gb[d][int'(e_yb[L][d]) * BR + l] <= e_y[L][d][l];
    if (state == S_COMB)
      for (int d = 0; d < 2; d++) begin
        if (layer == 2'd1) seqb[tdir[d]][d * HID + int'(j)] <= hnew[d];
        else               seqa[tdir[d]][d * HID + int'(j)] <= hnew[d];
      end
    if (h1_v)
      for (int l = 0; l < BR; l++)
        if (int'(h1_yb) * BR + l < NH) hb[int'(h1_yb) * BR + l] <= h1_y[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_COLLECT;
      nin      <= '0;
      tsteps   <= '0;
      s        <= '0;
      hidx     <= '0;
      layer    <= '0;
      j        <= '0;
      gdone    <= '0;
      h1_start <= 1'b0;
      m_valid  <= 1'b0;
      m_bit    <= 1'b0;
      m_logit  <= '0;
      done     <= 1'b0;
      for (int L = 0; L < NL; L++) e_start[L] <= 1'b0;
      for (int d = 0; d < 2; d++) for (int u = 0; u < HID; u++) hst[d][u] <= '0;
    end else begin
      for (int L = 0; L < NL; L++) e_start[L] <= 1'b0;
      h1_start <= 1'b0;
      m_valid  <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_COLLECT: if (s_valid) begin
          if (nin == 0) tsteps <= n_steps;
          if (nin == 2 * ((nin == 0) ? (TW+1)'(n_steps) : (TW+1)'(tsteps)) - 1) begin
            nin   <= '0;
            layer <= '0;
            s     <= '0;
            state <= S_START;
            for (int d = 0; d < 2; d++) for (int u = 0; u < HID; u++) hst[d][u] <= '0;
          end else nin <= nin + 1'b1;
        end
        S_START: begin
          e_start[layer] <= 1'b1;
          gdone <= '0;
          state <= S_WAIT;
        end
        S_WAIT: begin
          logic [1:0] dn;
          dn = gdone | {e_done[layer][1], e_done[layer][0]};
          gdone <= dn;
          if (dn == 2'b11) begin
            j     <= '0;
            state <= S_COMB;
          end
        end
        S_COMB: begin
          for (int d = 0; d < 2; d++) hst[d][j] <= hnew[d];
          if (int'(j) == HID - 1) begin
            if (s == tsteps - 1'b1) begin
              s <= '0;
              for (int d = 0; d < 2; d++) for (int u = 0; u < HID; u++) hst[d][u] <= '0;
              if (int'(layer) == NL - 1) begin
                hidx     <= '0;
                state    <= S_H1;
              end else begin
                layer <= layer + 1'b1;
                state <= S_START;
              end
            end else begin
              s     <= s + 1'b1;
              state <= S_START;
            end
          end else j <= j + 1'b1;
        end
        S_H1: begin
          h1_start <= 1'b1;
          state    <= S_H1W;
        end
        S_H1W: if (h1_done) state <= S_H2W;
        S_H2W: if (h2_v) begin
          m_valid <= 1'b1;
          m_bit   <= (h2_y[0] > 0);
          m_logit <= h2_y[0];
          if (hidx == tsteps - 1'b1) begin
            done  <= 1'b1;
            state <= S_COLLECT;
          end else begin
            hidx  <= hidx + 1'b1;
            state <= S_H1;
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  assign s_ready = (state == S_COLLECT);

  logic unused;
  assign unused = h1_busy ^ h2_busy ^ h2_done ^ h2_yb[0];
endmodule
