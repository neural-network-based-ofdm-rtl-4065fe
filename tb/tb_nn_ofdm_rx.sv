// End-to-end testbench for nn_ofdm_rx at its default sizes.
//
// An 802.11a-style transmitter model here builds packets: random coded bits, the
// standard interleaver, Gray-coded 16QAM on the 48 data subcarriers (pilots +1), an
// inverse DFT divided by 8 and a 16-sample cyclic prefix, after a 160-sample L-LTF
// of random +/-1 subcarriers; each packet is sent at its own amplitude.
// Since trained weights are not part of the design, the networks get hand-made
// weights with a known function, loaded through the weight port:
//  - channel estimator: every block pruned (BCR column masks cleared), output biases
//    1.109 + 0j, the flat channel the RMS normalization leaves (sqrt(64/52));
//  - demapper: power-of-two hidden rows relu(+-I), relu(+-Q) and fixed-point output
//    rows giving the sign and the |x| < 2/sqrt(10) decisions of Gray 16QAM;
//  - decoder: in every layer forward unit 0 follows the sign of its input
//    (update gate shut by a -8 bias), all other blocks pruned; the output stage
//    returns the sign of that unit.
// Three packets are sent: 1 and 2 OFDM symbols, then one of 86 symbols, the
// longest the design holds (4128 16QAM symbols, 16512 coded bits).
// The decoder output t must then equal coded bit 2t of the packet. Counted
// mechanisms: payload stalls while the channel is estimated, pruned blocks skipped,
// power-of-two rows, normalizer gains other than 1, decoded ones and zeros, and
// packets completed; each must happen at least once.
module tb_nn_ofdm_rx;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_we = 0;
  logic [1:0] ld_unit = 0;
  logic [2:0] ld_sub = 0, ld_sel = 0;
  logic [31:0] ld_addr = 0;
  logic [LDW-1:0] ld_data = '0;
  logic pkt_start = 0;
  logic [$clog2(86+1)-1:0] n_sym = 0;
  word_t inv_nvar = 16'sd256;
  logic s_valid = 0, s_ready;
  cplx_t s_data = '0;
  logic bit_valid, bit_out, pkt_done, h_ready;

  nn_ofdm_rx dut (.*);

  // sizes of the design under test, as in its defaults
  localparam int CE1 = 512, CE2 = 256, HID = 256, BR = 16, BC = 16;

  int checks = 0, failures = 0;
  int n_stall = 0, n_skip = 0, n_pot = 0, n_gain = 0, n_one = 0, n_zero = 0, n_pkt = 0;
  longint cycle = 0;
  int ce_prev = 0;

  always @(posedge clk) begin
    cycle++;
    if (s_valid && !s_ready && rst_n) n_stall++;
    // a block row finished with no MAC cycle: all of its blocks were skipped
    if (dut.u_ce.u_re.u_l1.state == 2 && ce_prev != 1) n_skip++;
    ce_prev = int'(dut.u_ce.u_re.u_l1.state);
    if (dut.u_dm.u_l1.state == 1 && dut.u_dm.u_l1.found && dut.u_dm.u_l1.potm[0][0]) n_pot++;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog at cycle %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ld(input int unit, input int sub, input int sel, input int addr, input logic [LDW-1:0] d);
    @(negedge clk);
    ld_we = 1; ld_unit = 2'(unit); ld_sub = 3'(sub); ld_sel = 3'(sel); ld_addr = addr; ld_data = d;
    @(negedge clk) ld_we = 0;
  endtask

  // clear every column mask of an engine except block (kbr, 0), which keeps kcols
  task automatic prune_all(input int unit, input int sub, input int nbr, input int nbc, input int kbr, input logic [15:0] kcols);
    for (int br = 0; br < nbr; br++)
      for (int bc = 0; bc < nbc; bc++)
        ld(unit, sub, 3, br * nbc + bc, (br == kbr && bc == 0) ? LDW'(kcols) : '0);
  endtask

  task automatic load_weights();
    logic [LDW-1:0] d;
    // channel estimator: all pruned, output biases give H = 284/256 + 0j
    for (int net = 0; net < 2; net++) begin
      prune_all(0, net * 4 + 0, CE1 / BR, (LLTF_LEN + BC - 1) / BC, -1, 0);
      prune_all(0, net * 4 + 1, CE2 / BR, CE1 / BC, -1, 0);
      prune_all(0, net * 4 + 2, (NSC + BR - 1) / BR, CE2 / BC, -1, 0);
    end
    for (int br = 0; br < (NSC + BR - 1) / BR; br++) begin
      d = '0;
      for (int l = 0; l < BR; l++) d[l*16 +: 16] = 16'sd284;
      ld(0, 2, 1, br, d);
    end
    // demapper layer 1 (2 -> 20, lanes of 4, 4-bit codes): rows 0..3 power-of-two
    for (int br = 0; br < 5; br++)
      for (int c = 0; c < 2; c++) begin
        d = '0;
        if (br == 0 && c == 0) begin d[3:0] = 4'b0001; d[7:4] = 4'b1001; end
        if (br == 0 && c == 1) begin d[11:8] = 4'b0001; d[15:12] = 4'b1001; end
        ld(1, 0, 0, br * 2 + c, d);
      end
    ld(1, 0, 2, 0, LDW'(4'b1111));
    // demapper layer 2 (20 -> 4): z0 = h0-h1, z1 = 0.632-h0-h1, z2 = h2-h3, z3 = 0.632-h2-h3
    for (int c = 0; c < 20; c++) begin
      d = '0;
      case (c)
        0: begin d[3:0] = 4'd4;  d[7:4] = 4'b1100; end
        1: begin d[3:0] = 4'b1100; d[7:4] = 4'b1100; end
        2: begin d[11:8] = 4'd4; d[15:12] = 4'b1100; end
        3: begin d[11:8] = 4'b1100; d[15:12] = 4'b1100; end
        default: ;
      endcase
      ld(1, 1, 0, c, d);
    end
    d = '0; d[31:16] = 16'sd162; d[63:48] = 16'sd162;
    ld(1, 1, 1, 0, d);
    // decoder GRU engines
    for (int L = 0; L < 3; L++) begin
      int ni, nbc;
      ni  = ((L == 0) ? 2 : 2 * HID) + HID;
      nbc = (ni + BC - 1) / BC;
      // backward direction: everything pruned
      prune_all(2, 2 * L + 1, 4 * HID / BR, nbc, -1, 0);
      // forward direction: only the block holding (row 2*HID, column 0)
      prune_all(2, 2 * L, 4 * HID / BR, nbc, 2 * HID / BR, 16'h0001);
      d = '0; d[7:0] = 8'sd127;
      ld(2, 2 * L, 0, (2 * HID / BR) * ni, d);
      d = '0; d[15:0] = -16'sd2048;
      ld(2, 2 * L, 1, HID / BR, d);          // update gate of unit 0 shut
      d = '0; d[15:0] = (L == 0) ? -16'sd253 : 16'sd0;
      ld(2, 2 * L, 1, 2 * HID / BR, d);      // n = tanh(1.98 x - 0.99) for probabilities
    end
    // output stage: relu(+x0), relu(-x0), then their difference
    prune_all(2, 6, 1, 2 * HID / BC, 0, 16'h0001);
    d = '0; d[7:0] = 8'sd127; d[15:8] = -8'sd127;
    ld(2, 6, 0, 0, d);
    ld(2, 7, 3, 0, LDW'(16'h0003));
    ld(2, 7, 0, 0, LDW'(8'sd127));
    ld(2, 7, 0, 1, LDW'(-8'sd127));
  endtask

  function automatic real qam(input bit b0, input bit b1);
    return (b0 ? 1.0 : -1.0) * (b1 ? 1.0 : 3.0) / $sqrt(10.0);
  endfunction

  task automatic packet(input int nsym, input real amp);
    int nbits, nb, pos;
    bit code [];
    real fr [NFFT], fi [NFFT];
    cplx_t tx [$];
    real pi2;
    pi2 = 2.0 * 3.14159265358979;
    nbits = nsym * NCBPS;
    code = new[nbits];
    foreach (code[i]) code[i] = $urandom_range(0, 1);
    // L-LTF: 32-sample prefix + two symbols
    for (int k = 0; k < NFFT; k++) begin fr[k] = 0; fi[k] = 0; end
    for (int s = -26; s <= 26; s++) if (s != 0) fr[(s + 64) % 64] = $urandom_range(0, 1) ? 1.0 : -1.0;
    for (int n = -32; n < 128; n++) begin
      real xr, xi;
      cplx_t c;
      xr = 0; xi = 0;
      for (int k = 0; k < NFFT; k++) begin
        xr += fr[k] * $cos(pi2 * k * n / 64) - fi[k] * $sin(pi2 * k * n / 64);
        xi += fr[k] * $sin(pi2 * k * n / 64) + fi[k] * $cos(pi2 * k * n / 64);
      end
      c.re = word_t'($rtoi(amp * xr / 8.0 * 256.0));
      c.im = word_t'($rtoi(amp * xi / 8.0 * 256.0));
      tx.push_back(c);
    end
    // payload symbols
    for (int m = 0; m < nsym; m++) begin
      bit il [NCBPS];
      int d;
      for (int k = 0; k < NCBPS; k++) begin
        int i, j;
        i = 12 * (k % 16) + k / 16;
        j = 2 * (i / 2) + (i + NCBPS - (16 * i) / NCBPS) % 2;
        il[j] = code[m * NCBPS + k];
      end
      for (int k = 0; k < NFFT; k++) begin fr[k] = 0; fi[k] = 0; end
      d = 0;
      for (int s = -26; s <= 26; s++) begin
        if (s == 0) continue;
        if (s == -21 || s == -7 || s == 7 || s == 21) fr[(s + 64) % 64] = 1.0;
        else begin
          fr[(s + 64) % 64] = qam(il[4*d], il[4*d+1]);
          fi[(s + 64) % 64] = qam(il[4*d+2], il[4*d+3]);
          d++;
        end
      end
      for (int n = -16; n < 64; n++) begin
        real xr, xi;
        cplx_t c;
        xr = 0; xi = 0;
        for (int k = 0; k < NFFT; k++) begin
          xr += fr[k] * $cos(pi2 * k * n / 64) - fi[k] * $sin(pi2 * k * n / 64);
          xi += fr[k] * $sin(pi2 * k * n / 64) + fi[k] * $cos(pi2 * k * n / 64);
        end
        c.re = word_t'($rtoi(amp * xr / 8.0 * 256.0));
        c.im = word_t'($rtoi(amp * xi / 8.0 * 256.0));
        tx.push_back(c);
      end
    end
    // send and receive
    @(negedge clk);
    n_sym = 7'(nsym);
    pkt_start = 1;
    @(negedge clk) pkt_start = 0;
    nb = 0;
    pos = 0;
    fork
      begin
        while (pos < tx.size()) begin
          s_data = tx[pos];
          s_valid = 1;
          @(posedge clk);
          if (s_ready) pos++;
          #1;
        end
        s_valid = 0;
      end
      begin
        while (!pkt_done) begin
          @(posedge clk); #1;
          if (bit_valid) begin
            checks++;
            if (nb >= nbits / 2 || bit_out != code[2 * nb]) begin
              failures++;
              if (failures < 10) $display("packet bit %0d: got %0d expected %0d", nb, bit_out, code[2 * nb]);
            end
            if (bit_out) n_one++; else n_zero++;
            nb++;
          end
        end
      end
    join
    checks++;
    if (nb != nbits / 2) begin failures++; $display("%0d bits out, expected %0d", nb, nbits / 2); end
    if (dut.u_rms.gain != 16'd256) n_gain++;
    n_pkt++;
    $display("packet of %0d symbols at amplitude %f: %0d bits, gain %0d, cycle %0d", nsym, amp, nb, dut.u_rms.gain, cycle);
  endtask

  task automatic need(input string what, input int n);
    checks++;
    $display("%s: %0d", what, n);
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();
    $display("weights loaded at cycle %0d", cycle);
    packet(1, 0.6);
    packet(2, 2.5);
    packet(86, 1.0);
    need("payload stall cycles", n_stall);
    need("pruned blocks skipped", n_skip);
    need("power-of-two row products", n_pot);
    need("normalizer gains other than 1", n_gain);
    need("decoded ones", n_one);
    need("decoded zeros", n_zero);
    need("packets completed", n_pkt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
