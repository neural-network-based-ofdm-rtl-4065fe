// Testbench for rms_normalizer: two packets at different power levels. The gain must
// be within one LSB of 256/sqrt(mean |x|^2) (Q8.8), the preamble must be replayed
// scaled by it with m_lltf set, payload samples must follow scaled by the same gain
// under random output stalls, and the gain search must take 16 cycles.
module tb_rms_normalizer;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0, pkt_start = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_lltf;
  cplx_t s_data = '0, m_data;
  logic [15:0] gain;
  rms_normalizer dut (.*);

  int checks = 0, failures = 0;
  cplx_t pre [LLTF_LEN];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int scl(input int x, input int g);
    longint p;
    p = longint'(x) * g + 128;
    p = (p >= 0) ? p / 256 : -((-p + 255) / 256);
    if (p > 32767) p = 32767; if (p < -32768) p = -32768;
    return int'(p);
  endfunction

  task automatic packet(input int amp);
    real pw, ge;
    int cyc, n;
    @(negedge clk); pkt_start = 1; @(negedge clk); pkt_start = 0;
    pw = 0;
    for (int i = 0; i < LLTF_LEN; i++) begin
      pre[i].re = word_t'($urandom_range(0, 2 * amp) - amp);
      pre[i].im = word_t'($urandom_range(0, 2 * amp) - amp);
      pw += (real'(pre[i].re) ** 2 + real'(pre[i].im) ** 2) / 65536.0;
      s_data = pre[i]; s_valid = 1;
      @(posedge clk); #1;
      @(negedge clk);
    end
    s_valid = 0;
    cyc = 0;
    while (!m_valid) begin @(posedge clk); #1 cyc++; end
    checks++;
    if (cyc != 16) begin failures++; $display("gain latency %0d", cyc); end
    ge = 256.0 / $sqrt(pw / LLTF_LEN);
    checks++;
    if (real'(gain) > ge + 1.0 || real'(gain) < ge - 1.0) begin failures++; $display("gain %0d expected %f", gain, ge); end
    n = 0;
    while (n < LLTF_LEN) begin
      @(negedge clk);
      m_ready = $urandom_range(0, 2) != 0;
      @(posedge clk);
      if (m_ready) begin
        checks++;
        if (!m_lltf || m_data.re != word_t'(scl(pre[n].re, gain)) || m_data.im != word_t'(scl(pre[n].im, gain))) begin
          failures++; $display("preamble %0d", n);
        end
        n++;
      end
      #1;
    end
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      s_data.re = word_t'($urandom_range(0, 2 * amp) - amp);
      s_data.im = word_t'($urandom_range(0, 2 * amp) - amp);
      s_valid = 1;
      m_ready = $urandom_range(0, 2) != 0;
      #1;
      checks++;
      if (s_ready != m_ready || m_lltf || m_data.re != word_t'(scl(s_data.re, gain)) || m_data.im != word_t'(scl(s_data.im, gain))) begin
        failures++; $display("payload %0d", i);
      end
    end
    s_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    packet(100);
    packet(900);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
