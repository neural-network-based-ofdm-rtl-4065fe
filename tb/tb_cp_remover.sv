// Testbench for cp_remover: four 80-sample symbols with random input gaps and random
// output stalls; the output must be exactly the samples at positions 16..79 of each
// symbol, in order, and nothing else.
module tb_cp_remover;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  cplx_t s_data = '0, m_data;
  cp_remover dut (.*);

  int nin_acc = 0;
  int checks = 0, failures = 0, nout = 0;
  localparam int NS = 4;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && s_valid && s_ready) nin_acc++;
  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      int sym, pos;
      sym = nout / 64; pos = nout % 64 + 16;
      checks++;
      if (m_data.re != word_t'(sym * 80 + pos) || m_data.im != word_t'(-(sym * 80 + pos))) begin
        failures++;
        $display("output %0d: got %0d", nout, m_data.re);
      end
      nout++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (nin_acc < NS * 80) begin
      @(negedge clk);
      m_ready = ($urandom_range(0, 3) != 0);
      s_valid = (nin_acc < NS * 80) && ($urandom_range(0, 4) != 0);
      s_data.re = word_t'(nin_acc);
      s_data.im = word_t'(-nin_acc);
    end
    s_valid = 0;
    m_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NS * 64) begin failures++; $display("count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
