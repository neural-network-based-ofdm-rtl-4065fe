// Testbench for deinterleaver: a transmitter-side 802.11a interleaver written here
// (two permutations for N_CBPS = 192, N_BPSC = 4) interleaves two symbols of
// numbered soft bits; the de-interleaver, fed in that order with random gaps and
// stalls, must give back the original numbering.
module tb_deinterleaver;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  word_t s_llr = '0, m_llr;
  deinterleaver dut (.*);

  int nin_acc = 0;
  int checks = 0, failures = 0, nout = 0;
  int tx [2*192];   // interleaved order: tx[j] = coded bit number

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && s_valid && s_ready) nin_acc++;
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    checks++;
    if (m_llr != word_t'(nout - 1000)) begin failures++; $display("out %0d got %0d", nout, m_llr); end
    nout++;
  end

  initial begin
    for (int sym = 0; sym < 2; sym++)
      for (int k = 0; k < 192; k++) begin
        int i, j;
        i = 12 * (k % 16) + k / 16;
        j = 2 * (i / 2) + (i + 192 - (16 * i) / 192) % 2;
        tx[sym * 192 + j] = sym * 192 + k;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (nout < 384) begin
      @(negedge clk);
      m_ready = $urandom_range(0, 3) != 0;
      s_valid = (nin_acc < 384) && ($urandom_range(0, 3) != 0);
      s_llr = word_t'(tx[nin_acc % 384] - 1000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
