// Testbench for channel_estimator_nn at reduced hidden sizes (160-32-16-52, 16 x 16
// blocks). Both networks get random 8-bit weights, random row schemes and random
// block column/row pruning masks, different for the two networks. Two L-LTF inputs
// are streamed in and the 52 complex outputs are compared with a reference network
// evaluated here. h_valid must come 4 + max(C_re, C_im) cycles after the last input,
// where C is the sum of the three layers' BCR cycle counts.
module tb_channel_estimator_nn;
  import rx_pkg::*;
  import nn_ref_pkg::*;
  localparam int N0 = 160, N1 = 32, N2 = 16, N3 = 52, WB = 8, BR = 16, BC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0, ld_net = 0;
  logic [1:0] ld_layer = 0;
  logic [2:0] ld_sel = 0;
  logic [31:0] ld_addr = 0;
  logic [LDW-1:0] ld_data = '0;
  logic s_valid = 0, s_ready, h_valid;
  cplx_t s_data = '0;
  cplx_t h [N3];
  channel_estimator_nn #(.N1(N1), .N2(N2)) dut (.*);

  int checks = 0, failures = 0;
  int nin [3] = '{N0, N1, N2};
  int nout [3] = '{N1, N2, N3};
  int W [2][3][], B [2][3][];
  bit P [2][3][], K [2][3][];
  int cyc_net [2];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ld(input bit net, input int layer, input int sel, input int addr, input logic [LDW-1:0] d);
    @(negedge clk);
    ld_we = 1; ld_net = net; ld_layer = 2'(layer); ld_sel = 3'(sel); ld_addr = addr; ld_data = d;
    @(negedge clk) ld_we = 0;
  endtask

  // random layer with BCR masks; returns its cycle count
  task automatic make_layer(input bit net, input int L, output int cyc);
    int ni, no, nbr, nbc;
    logic [LDW-1:0] d;
    ni = nin[L]; no = nout[L];
    nbr = (no + BR - 1) / BR; nbc = (ni + BC - 1) / BC;
    W[net][L] = new[ni*no]; K[net][L] = new[ni*no]; B[net][L] = new[no]; P[net][L] = new[no];
    foreach (W[net][L][i]) W[net][L][i] = $urandom_range(0, 255) - 128;
    foreach (B[net][L][i]) begin B[net][L][i] = $urandom_range(0, 255) - 128; P[net][L][i] = $urandom_range(0, 3) == 0; end
    cyc = 0;
    for (int br = 0; br < nbr; br++) begin
      for (int c = 0; c < ni; c++) begin
        d = '0;
        for (int l = 0; l < BR; l++) if (br * BR + l < no) d[l*WB +: WB] = WB'(W[net][L][(br*BR+l)*ni + c]);
        ld(net, L, 0, br * ni + c, d);
      end
      d = '0;
      for (int l = 0; l < BR; l++) if (br * BR + l < no) d[l*16 +: 16] = 16'(B[net][L][br*BR+l]);
      ld(net, L, 1, br, d);
      d = '0;
      for (int l = 0; l < BR; l++) if (br * BR + l < no) d[l] = P[net][L][br*BR+l];
      ld(net, L, 2, br, d);
      for (int bc = 0; bc < nbc; bc++) begin
        logic [BC-1:0] cm;
        logic [BR-1:0] rm;
        int k;
        cm = BC'($urandom()) | BC'($urandom());   // about 3/4 of the columns kept
        rm = BR'($urandom()) | BR'($urandom());
        if ($urandom_range(0, 7) == 0) cm = '0;      // a fully pruned block now and then
        ld(net, L, 3, br * nbc + bc, LDW'(cm));
        ld(net, L, 4, br * nbc + bc, LDW'(rm));
        k = 0;
        for (int c = 0; c < BC; c++) if (bc * BC + c < ni && cm[c] && rm != 0) k++;
        cyc += k;
        for (int l = 0; l < BR; l++) for (int c = 0; c < BC; c++)
          if (br * BR + l < no && bc * BC + c < ni)
            K[net][L][(br*BR+l)*ni + bc*BC + c] = cm[c] && rm[l];
      end
      cyc += 1;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int net = 0; net < 2; net++) begin
      int c;
      cyc_net[net] = 0;
      for (int L = 0; L < 3; L++) begin make_layer(net[0], L, c); cyc_net[net] += c; end
    end
    for (int run = 0; run < 2; run++) begin
      int xr [], xi [], a [], bq [], yr [], yi [];
      int cyc, expc;
      xr = new[N0]; xi = new[N0];
      foreach (xr[i]) begin xr[i] = $urandom_range(0, 511) - 256; xi[i] = $urandom_range(0, 511) - 256; end
      for (int i = 0; i < N0; i++) begin
        @(negedge clk);
        s_data.re = word_t'(xr[i]); s_data.im = word_t'(xi[i]); s_valid = 1;
        @(posedge clk); #1;
      end
      s_valid = 0;
      cyc = 0;
      while (!h_valid) begin @(posedge clk); #1 cyc++; end
      expc = 4 + ((cyc_net[0] > cyc_net[1]) ? cyc_net[0] : cyc_net[1]);
      checks++;
      if (cyc != expc) begin failures++; $display("latency %0d expected %0d", cyc, expc); end
      dense_ref(N0, N1, xr, W[0][0], B[0][0], P[0][0], K[0][0], WB, WB - 2, 1, a);
      dense_ref(N1, N2, a, W[0][1], B[0][1], P[0][1], K[0][1], WB, WB - 2, 1, bq);
      dense_ref(N2, N3, bq, W[0][2], B[0][2], P[0][2], K[0][2], WB, WB - 2, 0, yr);
      dense_ref(N0, N1, xi, W[1][0], B[1][0], P[1][0], K[1][0], WB, WB - 2, 1, a);
      dense_ref(N1, N2, a, W[1][1], B[1][1], P[1][1], K[1][1], WB, WB - 2, 1, bq);
      dense_ref(N2, N3, bq, W[1][2], B[1][2], P[1][2], K[1][2], WB, WB - 2, 0, yi);
      for (int k = 0; k < N3; k++) begin
        checks++;
        if (h[k].re != word_t'(yr[k]) || h[k].im != word_t'(yi[k])) begin
          failures++;
          $display("run %0d coef %0d: %0d,%0d vs %0d,%0d", run, k, h[k].re, h[k].im, yr[k], yi[k]);
        end
      end
      repeat (3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
