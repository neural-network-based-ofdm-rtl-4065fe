// Testbench for demapper_nn: random 4-bit weights (random fixed-point and
// power-of-two rows), random biases, random equalized symbols, CSI and noise scale.
// The four logits and the four scaled LLRs, -z * csi * inv_nvar / 2^16, are checked
// against a reference network evaluated here, under random output stalls. The first
// LLR must appear 39 cycles after a symbol is taken (3 + 15 + 21 engine cycles).
module tb_demapper_nn;
  import rx_pkg::*;
  import nn_ref_pkg::*;
  localparam int H = 20, NB = 4, WB = 4, BR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0, ld_layer = 0;
  logic [2:0] ld_sel = 0;
  logic [31:0] ld_addr = 0;
  logic [LDW-1:0] ld_data = '0;
  word_t inv_nvar = 16'sd256;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  cplx_t s_sym = '0;
  word_t s_csi = '0, m_llr;
  word_t m_logit [NB];
  demapper_nn dut (.*);

  int checks = 0, failures = 0;
  int w1 [], w2 [], b1 [], b2 [];
  bit p1 [], p2 [], k1 [], k2 [];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ld(input bit layer, input int sel, input int addr, input logic [LDW-1:0] d);
    @(negedge clk);
    ld_we = 1; ld_layer = layer; ld_sel = 3'(sel); ld_addr = addr; ld_data = d;
    @(negedge clk) ld_we = 0;
  endtask

  task automatic load_layer(input bit layer, input int nin, input int nout, input int w[], input int b[], input bit p[]);
    logic [LDW-1:0] d;
    for (int br = 0; br < (nout + BR - 1) / BR; br++) begin
      for (int c = 0; c < nin; c++) begin
        d = '0;
        for (int l = 0; l < BR; l++) if (br * BR + l < nout) d[l*WB +: WB] = WB'(w[(br*BR+l)*nin + c]);
        ld(layer, 0, br * nin + c, d);
      end
      d = '0;
      for (int l = 0; l < BR; l++) if (br * BR + l < nout) d[l*16 +: 16] = 16'(b[br*BR+l]);
      ld(layer, 1, br, d);
      d = '0;
      for (int l = 0; l < BR; l++) if (br * BR + l < nout) d[l] = p[br*BR+l];
      ld(layer, 2, br, d);
    end
  endtask

  initial begin
    int x [], hid [], z [];
    w1 = new[H*2]; b1 = new[H]; p1 = new[H]; k1 = new[H*2];
    w2 = new[NB*H]; b2 = new[NB]; p2 = new[NB]; k2 = new[NB*H];
    foreach (w1[i]) begin w1[i] = $urandom_range(0, 15) - 8; k1[i] = 1; end
    foreach (w2[i]) begin w2[i] = $urandom_range(0, 15) - 8; k2[i] = 1; end
    foreach (b1[i]) begin b1[i] = $urandom_range(0, 511) - 256; p1[i] = $urandom_range(0, 1); end
    foreach (b2[i]) begin b2[i] = $urandom_range(0, 511) - 256; p2[i] = $urandom_range(0, 1); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_layer(0, 2, H, w1, b1, p1);
    load_layer(1, H, NB, w2, b2, p2);
    for (int n = 0; n < 20; n++) begin
      int cyc, nb, csi, inv;
      x = new[2];
      x[0] = $urandom_range(0, 767) - 384;
      x[1] = $urandom_range(0, 767) - 384;
      csi = $urandom_range(0, 600);
      inv = $urandom_range(64, 1024);
      dense_ref(2, H, x, w1, b1, p1, k1, WB, WB - 2, 1, hid);
      dense_ref(H, NB, hid, w2, b2, p2, k2, WB, WB - 2, 0, z);
      @(negedge clk);
      s_sym.re = word_t'(x[0]); s_sym.im = word_t'(x[1]); s_csi = word_t'(csi); inv_nvar = word_t'(inv);
      s_valid = 1;
      @(posedge clk); #1 s_valid = 0;
      cyc = 0;
      while (!m_valid) begin @(posedge clk); #1 cyc++; end
      checks++;
      if (cyc != 39) begin failures++; $display("latency %0d", cyc); end
      nb = 0;
      while (nb < NB) begin
        @(negedge clk);
        m_ready = $urandom_range(0, 1);
        @(posedge clk);
        if (m_ready) begin
          int e;
          e = sat16(fdiv(-longint'(z[nb]) * csi * inv, 16));
          checks += 2;
          if (m_logit[nb] != word_t'(z[nb])) begin failures++; $display("sym %0d logit %0d: %0d vs %0d", n, nb, m_logit[nb], z[nb]); end
          if (m_llr != word_t'(e)) begin failures++; $display("sym %0d llr %0d: %0d vs %0d", n, nb, m_llr, e); end
          nb++;
        end
        #1;
      end
      @(negedge clk) m_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
