// Testbench for decoder_nn at reduced size: 3 bidirectional GRU layers of 8 units,
// a 16-16-1 output stage, 4 x 4 blocks, packets of 5 and 3 steps. Weights are drawn
// in the PyTorch GRU shape (W_ih, W_hh, b_ih, b_hh) and packed into the engines'
// [Wr; Wz; Wnx|0; 0|Wnh] layout; the reference here runs the GRU recursion forward
// and backward over the packet with its own activation approximations and checks
// every output logit and bit. Timing: the first bit must come
// T*(C0+HID+3) + 2*T*(C1+HID+3) + 4 + Ch1 + Ch2 cycles after the last LLR, and
// later bits every 4 + Ch1 + Ch2 cycles (C = dense cycle counts of the engines).
module tb_decoder_nn;
  import rx_pkg::*;
  import nn_ref_pkg::*;
  localparam int GIN = 2, HID = 8, NL = 3, NH = 16, MAXT = 8, WB = 8, BR = 4, BC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0;
  logic [2:0] ld_eng = 0, ld_sel = 0;
  logic [31:0] ld_addr = 0;
  logic [LDW-1:0] ld_data = '0;
  logic [$clog2(MAXT+1)-1:0] n_steps = 0;
  logic s_valid = 0, s_ready, m_valid, m_bit, done;
  word_t s_llr = '0, m_logit;
  decoder_nn #(.GIN(GIN), .HID(HID), .NL(NL), .NH(NH), .MAXT(MAXT), .WB(WB), .BR(BR), .BC(BC)) dut (.*);

  int checks = 0, failures = 0;
  int GW [NL][2][], GB [NL][2][];
  bit GP [NL][2][], GK [NL][2][];
  int H1W [], H1B [], H2W [], H2B [];
  bit H1P [], H1K [], H2P [], H2K [];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ld(input int eng, input int sel, input int addr, input logic [LDW-1:0] d);
    @(negedge clk);
    ld_we = 1; ld_eng = 3'(eng); ld_sel = 3'(sel); ld_addr = addr; ld_data = d;
    @(negedge clk) ld_we = 0;
  endtask

  task automatic load(input int eng, input int ni, input int no, input int br_, input int w[], input int b[], input bit p[]);
    logic [LDW-1:0] d;
    for (int br = 0; br < (no + br_ - 1) / br_; br++) begin
      for (int c = 0; c < ni; c++) begin
        d = '0;
        for (int l = 0; l < br_; l++) if (br * br_ + l < no) d[l*WB +: WB] = WB'(w[(br*br_+l)*ni + c]);
        ld(eng, 0, br * ni + c, d);
      end
      d = '0;
      for (int l = 0; l < br_; l++) if (br * br_ + l < no) d[l*16 +: 16] = 16'(b[br*br_+l]);
      ld(eng, 1, br, d);
      d = '0;
      for (int l = 0; l < br_; l++) if (br * br_ + l < no) d[l] = p[br*br_+l];
      ld(eng, 2, br, d);
    end
  endtask

  function automatic int rw();
    return $urandom_range(0, 100) - 50;
  endfunction

  task automatic run_packet(input int T);
    int llr [], x [][], y [][], hst [], g [], hb [], o [];
    int cyc, c0, c1, ch1, ch2, first, period, nb, last;
    llr = new[2*T];
    foreach (llr[i]) llr[i] = $urandom_range(0, 1535) - 768;
    // reference
    x = new[T];
    for (int t = 0; t < T; t++) begin
      x[t] = new[GIN];
      x[t][0] = sig_ref(-llr[2*t]);
      x[t][1] = sig_ref(-llr[2*t+1]);
    end
    for (int L = 0; L < NL; L++) begin
      int gin;
      gin = (L == 0) ? GIN : 2 * HID;
      y = new[T];
      for (int t = 0; t < T; t++) y[t] = new[2*HID];
      for (int d = 0; d < 2; d++) begin
        hst = new[HID];
        foreach (hst[i]) hst[i] = 0;
        for (int s = 0; s < T; s++) begin
          int t;
          int v [];
          t = (d == 0) ? s : T - 1 - s;
          v = new[gin + HID];
          for (int c = 0; c < gin; c++) v[c] = x[t][c];
          for (int c = 0; c < HID; c++) v[gin + c] = hst[c];
          dense_ref(gin + HID, 4 * HID, v, GW[L][d], GB[L][d], GP[L][d], GK[L][d], WB, WB - 2, 0, g);
          for (int j = 0; j < HID; j++) begin
            int r, z, n;
            r = sig_ref(g[j]);
            z = sig_ref(g[HID + j]);
            n = tanh_ref(sat16(longint'(g[2*HID + j]) + fdiv(longint'(r) * g[3*HID + j] + 128, 8)));
            hst[j] = sat16(fdiv(longint'(256 - z) * n + longint'(z) * hst[j] + 128, 8));
            y[t][d * HID + j] = hst[j];
          end
        end
      end
      x = y;
    end
    // timing of this configuration
    c0 = 0; c1 = 0;
    for (int br = 0; br < 4 * HID / BR; br++) begin
      c0 += GIN + HID + 1;
      c1 += 2 * HID + HID + 1;
    end
    ch1 = ((NH + BR - 1) / BR) * (2 * HID + 1);
    ch2 = NH + 1;
    first = T * (c0 + HID + 3) + 2 * T * (c1 + HID + 3) + 4 + ch1 + ch2;
    period = 4 + ch1 + ch2;
    // drive
    n_steps = ($clog2(MAXT+1))'(T);
    for (int i = 0; i < 2 * T; i++) begin
      @(negedge clk);
      s_llr = word_t'(llr[i]); s_valid = 1;
      @(posedge clk); #1;
    end
    s_valid = 0;
    cyc = 0; nb = 0; last = 0;
    while (nb < T) begin
      @(posedge clk); #1 cyc++;
      if (m_valid) begin
        dense_ref(2 * HID, NH, x[nb], H1W, H1B, H1P, H1K, WB, WB - 2, 1, hb);
        dense_ref(NH, 1, hb, H2W, H2B, H2P, H2K, WB, WB - 2, 0, o);
        checks += 3;
        if (m_logit != word_t'(o[0]) || m_bit != (o[0] > 0)) begin
          failures++;
          $display("T=%0d bit %0d: logit %0d vs %0d", T, nb, m_logit, o[0]);
        end
        if ((nb == 0 && cyc != first) || (nb > 0 && cyc - last != period)) begin
          failures++;
          $display("T=%0d bit %0d at cycle %0d (first %0d, period %0d)", T, nb, cyc, first, period);
        end
        if ((nb == T - 1) != done) failures++;
        last = cyc;
        nb++;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int L = 0; L < NL; L++)
      for (int d = 0; d < 2; d++) begin
        int gin, ni;
        gin = (L == 0) ? GIN : 2 * HID;
        ni = gin + HID;
        GW[L][d] = new[4*HID*ni]; GB[L][d] = new[4*HID]; GP[L][d] = new[4*HID]; GK[L][d] = new[4*HID*ni];
        for (int r = 0; r < 4 * HID; r++) begin
          GP[L][d][r] = $urandom_range(0, 3) == 0;
          GB[L][d][r] = rw();
          for (int c = 0; c < ni; c++) begin
            bit zero;
            zero = (r >= 2 * HID && r < 3 * HID && c >= gin) || (r >= 3 * HID && c < gin);
            GW[L][d][r*ni + c] = zero ? 0 : rw();
            GK[L][d][r*ni + c] = 1;
          end
        end
        load(2 * L + d, ni, 4 * HID, BR, GW[L][d], GB[L][d], GP[L][d]);
      end
    H1W = new[NH*2*HID]; H1K = new[NH*2*HID]; H1B = new[NH]; H1P = new[NH];
    H2W = new[NH]; H2K = new[NH]; H2B = new[1]; H2P = new[1];
    foreach (H1W[i]) begin H1W[i] = $urandom_range(0, 255) - 128; H1K[i] = 1; end
    foreach (H1B[i]) begin H1B[i] = rw(); H1P[i] = 0; end
    foreach (H2W[i]) begin H2W[i] = $urandom_range(0, 255) - 128; H2K[i] = 1; end
    H2B[0] = rw(); H2P[0] = 0;
    load(6, 2 * HID, NH, BR, H1W, H1B, H1P);
    load(7, NH, 1, 1, H2W, H2B, H2P);
    run_packet(5);
    run_packet(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
