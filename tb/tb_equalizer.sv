// Testbench for equalizer: random channel coefficients (one set to zero) and three
// random FFT frames. Each equalized subcarrier must match Y/H computed in floating
// point within 2 LSB (0 where H = 0), csi must be |H|^2 in Q7.8, and a frame must
// take 52 cycles.
module tb_equalizer;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0, h_load = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  cplx_t h_in [NSC];
  cplx_t s_frame [NFFT];
  cplx_t m_eq [NSC];
  word_t m_csi [NSC];
  equalizer dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < NSC; k++) begin
      h_in[k].re = word_t'($urandom_range(0, 767) - 384);
      h_in[k].im = word_t'($urandom_range(0, 767) - 384);
    end
    h_in[7] = '0;
    h_load = 1;
    @(negedge clk) h_load = 0;
    for (int f = 0; f < 3; f++) begin
      int cyc;
      for (int n = 0; n < NFFT; n++) begin
        s_frame[n].re = word_t'($urandom_range(0, 1023) - 512);
        s_frame[n].im = word_t'($urandom_range(0, 1023) - 512);
      end
      @(negedge clk); s_valid = 1; @(posedge clk); #1 s_valid = 0;
      cyc = 0;
      while (!m_valid) begin @(posedge clk); #1 cyc++; end
      checks++;
      if (cyc != 52) begin failures++; $display("latency %0d", cyc); end
      for (int k = 0; k < NSC; k++) begin
        int s, bin;
        real hr, hi, yr, yi, d, er, ei;
        s = (k < 26) ? k - 26 : k - 25;
        bin = (s + 64) % 64;
        hr = h_in[k].re / 256.0; hi = h_in[k].im / 256.0;
        yr = s_frame[bin].re / 256.0; yi = s_frame[bin].im / 256.0;
        d = hr * hr + hi * hi;
        if (d == 0) begin er = 0; ei = 0; end
        else begin
          er = (yr * hr + yi * hi) / d * 256.0;
          ei = (yi * hr - yr * hi) / d * 256.0;
          if (er > 32767) er = 32767; if (er < -32768) er = -32768;
          if (ei > 32767) ei = 32767; if (ei < -32768) ei = -32768;
        end
        checks += 2;
        if ((m_eq[k].re - er) > 2.0 || (er - m_eq[k].re) > 2.0 || (m_eq[k].im - ei) > 2.0 || (ei - m_eq[k].im) > 2.0) begin
          failures++;
          $display("sc %0d: got %0d,%0d expected %f,%f", k, m_eq[k].re, m_eq[k].im, er, ei);
        end
        if (m_csi[k] != word_t'((int'(h_in[k].re) * h_in[k].re + int'(h_in[k].im) * h_in[k].im) / 256)) begin
          failures++;
          $display("csi %0d: got %0d", k, m_csi[k]);
        end
      end
      @(negedge clk); m_ready = 1; @(posedge clk); #1 m_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
