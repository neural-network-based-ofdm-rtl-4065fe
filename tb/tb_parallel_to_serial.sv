// Testbench for parallel_to_serial: three frames of 52 subcarriers with known
// values; the output must be the 48 data subcarriers (pilots -21, -7, 7, 21
// removed) from -26 upwards, with their CSI, under random output stalls.
module tb_parallel_to_serial;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  cplx_t s_eq [NSC];
  word_t s_csi [NSC];
  cplx_t m_sym;
  word_t m_csi;
  parallel_to_serial dut (.*);

  int checks = 0, failures = 0, nout = 0;
  int dlist [NDATA];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    n = 0;
    for (int s = -26; s <= 26; s++)
      if (s != 0 && s != -21 && s != -7 && s != 7 && s != 21) begin
        dlist[n] = (s < 0) ? s + 26 : s + 25;
        n++;
      end
  end

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    int f, d;
    f = nout / NDATA; d = nout % NDATA;
    checks++;
    if (m_sym.re != word_t'(100 * f + dlist[d]) || m_sym.im != word_t'(-dlist[d]) || m_csi != word_t'(dlist[d] + 1000)) begin
      failures++;
      $display("beat %0d: got %0d", nout, m_sym.re);
    end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      @(negedge clk);
      while (!s_ready) begin m_ready = $urandom_range(0, 2) != 0; @(negedge clk); end
      for (int k = 0; k < NSC; k++) begin
        s_eq[k].re = word_t'(100 * f + k);
        s_eq[k].im = word_t'(-k);
        s_csi[k]   = word_t'(k + 1000);
      end
      s_valid = 1;
      @(posedge clk); #1 s_valid = 0;
    end
    m_ready = 1;
    repeat (60) @(posedge clk);
    checks++;
    if (nout != 3 * NDATA) begin failures++; $display("count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
