// Testbench for serial_to_parallel: five 64-sample frames with random gaps; the
// consumer takes each frame after a random delay. Each frame must hold its samples
// in arrival order, input must stall while a frame waits, and a frame must appear
// the cycle after its last sample.
module tb_serial_to_parallel;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  cplx_t s_data = '0;
  cplx_t m_frame [NFFT];
  serial_to_parallel dut (.*);

  int checks = 0, failures = 0, nin = 0, nf = 0, stalls = 0, nin_m = 0;
  bit chk_next = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (s_valid && !s_ready) stalls++;
    if (chk_next) begin
      checks++;
      if (!m_valid) begin failures++; $display("frame late"); end
    end
    chk_next = s_valid && s_ready && (nin_m % 64 == 63);
    if (s_valid && s_ready) nin_m++;
    if (m_valid && m_ready) begin
      for (int n = 0; n < NFFT; n++) begin
        checks++;
        if (m_frame[n].re != word_t'(nf * 64 + n) || m_frame[n].im != word_t'(7 * (nf * 64 + n))) failures++;
      end
      nf++;
    end
  end

  initial begin
    int wait_c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait_c = 0;
    while (nf < 5) begin
      @(negedge clk);
      if (s_valid && s_ready) nin++;
      m_ready = m_valid && ($urandom_range(0, 5) == 0);
      s_valid = (nin < 5 * 64) && ($urandom_range(0, 3) != 0);
      s_data.re = word_t'(nin);
      s_data.im = word_t'(7 * nin);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
