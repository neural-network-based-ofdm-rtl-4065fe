// Testbench for nn_dense: a 12 x 10 layer in 4 x 4 blocks (partial blocks at the
// right and bottom edges). Several rounds load random weights, biases, row schemes
// (fixed-point or power-of-two) and random block column/row masks, run the layer on
// a random input and compare every output with a reference computed here in plain
// integer arithmetic. The cycle count of each run is checked against
// sum over block rows of (kept columns of its non-empty blocks + 1).
// A fully pruned round checks that only the biases remain and that it runs in
// one cycle per block row.
module tb_nn_dense;
  import rx_pkg::*;
  localparam int IN = 10, OUT = 12, WB = 8, WFRAC = 6, BR = 4, BC = 4;
  localparam int NBR = (OUT + BR - 1) / BR, NBC = (IN + BC - 1) / BC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_we = 0;
  logic [2:0] ld_sel = 0;
  logic [31:0] ld_addr = 0;
  logic [BR*DW-1:0] ld_data = 0;
  logic start = 0, busy, y_valid, done;
  logic [$clog2(IN+1)-1:0] x_addr;
  logic [$clog2(NBR+1)-1:0] y_br;
  word_t x_data, y_vec [BR];

  word_t xv [IN];
  assign x_data = xv[x_addr % IN];

  nn_dense #(.IN(IN), .OUT(OUT), .WB(WB), .WFRAC(WFRAC), .BR(BR), .BC(BC), .ACT(ACT_RELU)) dut (.*);

  int checks = 0, failures = 0;
  int w [OUT][IN];
  int b [OUT];
  bit pot [OUT];
  bit cm [NBR][NBC][BC];
  bit rm [NBR][NBC][BR];
  word_t got [OUT];

  always @(posedge clk) if (y_valid) for (int l = 0; l < BR; l++) if (y_br * BR + l < OUT) got[y_br * BR + l] = y_vec[l];

  task automatic load(input int sel, input int addr, input logic [BR*DW-1:0] data);
    @(negedge clk);
    ld_we = 1; ld_sel = 3'(sel); ld_addr = addr; ld_data = data;
    @(negedge clk);
    ld_we = 0;
  endtask

  function automatic longint ref_prod(input int x, input int code, input bit p);
    longint v;
    int mag;
    if (!p) return longint'(x) * longint'(code);   // code already sign-extended
    mag = code & ((1 << (WB - 1)) - 1);
    if (mag == 0) return 0;
    begin
      longint xs, q;
      xs = longint'(x) * (1 << WFRAC);
      if (mag - 1 >= 40) v = (xs < 0) ? -1 : 0;
      else begin
        q = longint'(1) << (mag - 1);
        v = xs / q;
        if (xs < 0 && xs % q != 0) v = v - 1;   // arithmetic shift rounds down
      end
    end
    return ((code >> (WB - 1)) & 1) ? -v : v;
  endfunction

  task automatic round_run(input int mode);
    // mode 0: dense, 1: random masks, 2: everything pruned
    int expc, cyc;
    logic [BR*DW-1:0] d;
    for (int r = 0; r < OUT; r++) begin
      b[r] = $signed(16'($urandom_range(0, 1023))) - 512;
      pot[r] = (mode == 0) ? 0 : $urandom_range(0, 1);
      for (int c = 0; c < IN; c++) w[r][c] = $urandom_range(0, 255) - 128;
    end
    for (int i = 0; i < NBR; i++) for (int j = 0; j < NBC; j++) begin
      for (int c = 0; c < BC; c++) cm[i][j][c] = (mode == 0) ? 1 : (mode == 2) ? 0 : ($urandom_range(0, 2) != 0);
      for (int l = 0; l < BR; l++) rm[i][j][l] = (mode == 0) ? 1 : (mode == 2) ? 1 : ($urandom_range(0, 3) != 0);
    end
    for (int c = 0; c < IN; c++) xv[c] = word_t'($urandom_range(0, 2047) - 1024);
    // load
    for (int i = 0; i < NBR; i++) begin
      for (int c = 0; c < IN; c++) begin
        d = '0;
        for (int l = 0; l < BR; l++) if (i * BR + l < OUT) d[l*WB +: WB] = WB'(w[i*BR+l][c]);
        load(0, i * IN + c, d);
      end
      d = '0;
      for (int l = 0; l < BR; l++) if (i * BR + l < OUT) begin d[l*DW +: DW] = DW'(b[i*BR+l]); end
      load(1, i, d);
      d = '0;
      for (int l = 0; l < BR; l++) if (i * BR + l < OUT) d[l] = pot[i*BR+l];
      load(2, i, d);
      for (int j = 0; j < NBC; j++) begin
        d = '0; for (int c = 0; c < BC; c++) d[c] = cm[i][j][c];
        load(3, i * NBC + j, d);
        d = '0; for (int l = 0; l < BR; l++) d[l] = rm[i][j][l];
        load(4, i * NBC + j, d);
      end
    end
    // expected cycles
    expc = 0;
    for (int i = 0; i < NBR; i++) begin
      for (int j = 0; j < NBC; j++) begin
        int k; bit anyr;
        k = 0; anyr = 0;
        for (int l = 0; l < BR; l++) anyr |= rm[i][j][l];
        for (int c = 0; c < BC; c++) if (j * BC + c < IN && cm[i][j][c] && anyr) k++;
        expc += k;
      end
      expc += 1;
    end
    // run
    @(negedge clk); start = 1; @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1 cyc++; end
    @(posedge clk); #1;
    checks++;
    if (cyc != expc) begin failures++; $display("cycle count %0d, expected %0d", cyc, expc); end
    // reference
    for (int r = 0; r < OUT; r++) begin
      longint acc;
      longint t;
      int e;
      acc = 0;
      for (int c = 0; c < IN; c++) begin
        int br, bcx;
        br = r / BR; bcx = c / BC;
        if (cm[br][bcx][c % BC] && rm[br][bcx][r % BR]) acc += ref_prod(xv[c], w[r][c], pot[r]);
      end
      t = acc + longint'(b[r]) * 64 + 32;
      t = (t >= 0) ? t / 64 : -((-t + 63) / 64);
      if (t > 32767) t = 32767;
      if (t < -32768) t = -32768;
      e = (t < 0) ? 0 : int'(t);
      checks++;
      if (int'(got[r]) != e) begin
        failures++;
        $display("mode %0d row %0d: got %0d expected %0d", mode, r, got[r], e);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    round_run(0);
    for (int n = 0; n < 6; n++) round_run(1);
    round_run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
