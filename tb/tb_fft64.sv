// Testbench for fft64: six random frames (plus one impulse and one tone) against a
// direct DFT evaluated in floating point, divided by 8; every bin must agree within
// 6 LSB. The result must appear 192 cycles (6 stages x 32 butterflies) after the
// edge that takes the frame.
module tb_fft64;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  cplx_t s_frame [NFFT];
  cplx_t m_frame [NFFT];
  fft64 dut (.*);

  int checks = 0, failures = 0;
  real xr [NFFT], xi [NFFT];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int kind);
    int cyc;
    real pi2;
    pi2 = 2.0 * 3.14159265358979;
    for (int n = 0; n < NFFT; n++) begin
      if (kind == 0) begin
        s_frame[n].re = word_t'($urandom_range(0, 511) - 256);
        s_frame[n].im = word_t'($urandom_range(0, 511) - 256);
      end else if (kind == 1) begin
        s_frame[n].re = (n == 3) ? 16'sd2000 : 16'sd0;
        s_frame[n].im = '0;
      end else begin
        s_frame[n].re = word_t'($rtoi(300.0 * $cos(pi2 * 5 * n / 64)));
        s_frame[n].im = word_t'($rtoi(300.0 * $sin(pi2 * 5 * n / 64)));
      end
      xr[n] = s_frame[n].re;
      xi[n] = s_frame[n].im;
    end
    @(negedge clk);
    s_valid = 1;
    @(posedge clk); #1 s_valid = 0;
    cyc = 0;
    while (!m_valid) begin @(posedge clk); #1 cyc++; end
    checks++;
    if (cyc != 192) begin failures++; $display("latency %0d", cyc); end
    for (int k = 0; k < NFFT; k++) begin
      real er, ei;
      er = 0; ei = 0;
      for (int n = 0; n < NFFT; n++) begin
        er += xr[n] * $cos(pi2 * k * n / 64) + xi[n] * $sin(pi2 * k * n / 64);
        ei += xi[n] * $cos(pi2 * k * n / 64) - xr[n] * $sin(pi2 * k * n / 64);
      end
      er /= 8.0; ei /= 8.0;
      checks++;
      if ((m_frame[k].re - er) > 6.0 || (er - m_frame[k].re) > 6.0 ||
          (m_frame[k].im - ei) > 6.0 || (ei - m_frame[k].im) > 6.0) begin
        failures++;
        $display("%h", m_frame[k]);
        $display("kind %0d bin %0d: got %0d %0d expected %0d %0d", kind, k, m_frame[k].re, m_frame[k].im, $rtoi(er), $rtoi(ei));
      end
    end
    @(negedge clk); m_ready = 1; @(posedge clk); #1 m_ready = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1);
    run(2);
    for (int i = 0; i < 6; i++) run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
