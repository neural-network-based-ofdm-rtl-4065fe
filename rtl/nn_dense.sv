// Fully-connected layer engine with block column-row (BCR) pruning and
// mixed-scheme quantization (MSQ).
//
// The OUT x IN weight matrix is cut into blocks of BR rows by BC columns. The engine
// computes one block row (BR output neurons) at a time with BR multiply-accumulate
// lanes that share one input value per cycle. Each block has a column-keep mask and a
// row-keep mask: a pruned column costs no cycle (the sequencer jumps to the next kept
// column of the block), a pruned row contributes nothing to that block, and a block
// with no kept column or no kept row is skipped without costing a cycle. After the
// last block of a block row the bias is added, the result is rounded, saturated and
// passed through ReLU (ACT_RELU) or left linear, and the BR results leave on y_vec
// with y_valid.
// Every output row is marked fixed-point or power-of-two (MSQ). A fixed-point code is
// a signed integer worth code/2^WFRAC. A power-of-two code is sign|magnitude with
// magnitude m: m = 0 is zero, otherwise the weight is +/-2^-(m-1) and the product is a
// shift of the input.
//
// Interface: the weights, biases, row schemes and masks are written through the load
// port (ld_sel chooses the table, ld_addr the word, one word per cycle):
//   LD_W    addr = br*IN + col, lane l weight in ld_data[l*WB +: WB]
//   LD_B    addr = br,          lane l bias (Q7.8) in ld_data[l*16 +: 16]
//   LD_POT  addr = br,          bit l = 1: row br*BR+l uses power-of-two codes
//   LD_CM   addr = br*NBC + bc, bit c = 1: column bc*BC+c of the block is kept
//   LD_RM   addr = br*NBC + bc, bit l = 1: row br*BR+l of the block is kept
// After reset all masks keep everything and all rows are fixed-point. A start pulse
// runs the layer; the engine reads input col through x_addr/x_data in the same cycle.
// Timing: per block row, its kept columns (summed over the blocks that have a kept
// row) plus one cycle; done follows the start pulse by that sum over all block rows.
// The block structure and the two weight schemes follow the paper; lane count, block
// size, weight formats and the cycle schedule are this design's choices.
module nn_dense
  import rx_pkg::*;
#(
  parameter int   IN    = 16,
  parameter int   OUT   = 16,
  parameter int   WB    = 8,
  parameter int   WFRAC = 6,
  parameter int   BR    = 4,
  parameter int   BC    = 4,
  parameter act_e ACT   = ACT_RELU,
  parameter int   NBR   = (OUT + BR - 1) / BR,
  parameter int   NBC   = (IN + BC - 1) / BC,
  parameter int   LW    = BR * DW
) (
  input  logic              clk,
  input  logic              rst_n,
  // load port
  input  logic              ld_we,
  input  logic [2:0]        ld_sel,
  input  logic [31:0]       ld_addr,
  input  logic [LW-1:0]     ld_data,
  // run
  input  logic              start,
  output logic              busy,
  output logic [$clog2(IN+1)-1:0] x_addr,
  input  word_t             x_data,
  output logic              y_valid,
  output logic [$clog2(NBR+1)-1:0] y_br,
  output word_t             y_vec [BR],
  output logic              done
);
  localparam logic [2:0] LD_W = 3'd0, LD_B = 3'd1, LD_POT = 3'd2, LD_CM = 3'd3, LD_RM = 3'd4;
  localparam int ACCW = 48;

  logic [BR*WB-1:0] wmem [NBR*IN];
  word_t            bmem [NBR][BR];
  logic [BR-1:0]    potm [NBR];
  logic [BC-1:0]    cmask [NBR*NBC];
  logic [BR-1:0]    rmask [NBR*NBC];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN} state_e;
  state_e state;
  logic [$clog2(NBR+1)-1:0] br;
  logic [$clog2(NBC+1)-1:0] bc;
  logic [$clog2(BC+1)-1:0]  cidx;
  logic signed [ACCW-1:0]   acc [BR];

  // ---------------- load port ----------------
  always_ff @(posedge clk) begin
    if (ld_we && ld_sel == LD_W) wmem[ld_addr] <= ld_data[BR*WB-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBR; b++) begin
        potm[b] <= '0;
        for (int l = 0; l < BR; l++) bmem[b][l] <= '0;
      end
      for (int b = 0; b < NBR*NBC; b++) begin
        cmask[b] <= '1;
        rmask[b] <= '1;
      end
    end else if (ld_we) begin
      case (ld_sel)
        LD_B:   for (int l = 0; l < BR; l++) bmem[ld_addr][l] <= ld_data[l*DW +: DW];
        LD_POT: potm[ld_addr]  <= ld_data[BR-1:0];
        LD_CM:  cmask[ld_addr] <= ld_data[BC-1:0];
        LD_RM:  rmask[ld_addr] <= ld_data[BR-1:0];
        default: ;
      endcase
    end
  end

  // ---------------- column search inside the current block ----------------
  logic [BC-1:0] colvalid, meff;
  logic [BR-1:0] rkeep;
  logic          found, more;
  logic [$clog2(BC+1)-1:0] pos;
  int unsigned   blk;

  always_comb begin
    blk = int'(br) * NBC + int'(bc);
    for (int c = 0; c < BC; c++) colvalid[c] = (int'(bc) * BC + c) < IN;
    rkeep = rmask[blk];
    meff  = cmask[blk] & colvalid & {BC{|rkeep}};
    found = 1'b0;
    more  = 1'b0;
    pos   = '0;
    for (int c = BC - 1; c >= 0; c--) begin
      if (meff[c] && c >= int'(cidx)) begin
        more  = found;      // a kept column above the one picked
        found = 1'b1;
        pos   = ($clog2(BC+1))'(c);
      end
    end
    x_addr = ($clog2(IN+1))'(int'(bc) * BC + int'(pos));
  end

  // ---------------- MSQ products ----------------
  logic signed [ACCW-1:0] prod [BR];
  logic [BR*WB-1:0] wrow;
  always_comb begin
    wrow = wmem[int'(br) * IN + int'(x_addr)];
    for (int l = 0; l < BR; l++) begin
      logic [WB-1:0] code;
      logic [WB-2:0] mag;
      logic signed [ACCW-1:0] xs;
      code = wrow[l*WB +: WB];
      mag  = code[WB-2:0];
      xs   = ACCW'(x_data) <<< WFRAC;
      if (!rkeep[l]) prod[l] = '0;
      else if (potm[int'(br)][l]) begin
        if (mag == 0) prod[l] = '0;
        else begin
          prod[l] = xs >>> (int'(mag) - 1);
          if (code[WB-1]) prod[l] = -prod[l];
        end
      end else begin
        prod[l] = ACCW'(x_data) * ACCW'($signed(code));
      end
    end
  end

  // ---------------- block search ----------------
  // ne[b]: block b of block row srow has a kept column and a kept row. srow is the
  // block row being worked on, or the next one while a block row is finished.
  logic [$clog2(NBR+1)-1:0] srow;
  logic [NBC-1:0] ne;
  logic                     any_ne, any_after;
  logic [$clog2(NBC+1)-1:0] first_ne, next_ne;
  always_comb begin
    srow = (state == S_IDLE) ? '0 : (state == S_FIN) ? br + 1'b1 : br;
    for (int b = 0; b < NBC; b++) begin
      logic [BC-1:0] cv;
      for (int c = 0; c < BC; c++) cv[c] = (b * BC + c) < IN;
      ne[b] = (int'(srow) < NBR) && |(cmask[(int'(srow) % NBR) * NBC + b] & cv) &&
              |rmask[(int'(srow) % NBR) * NBC + b];
    end
    any_ne = 1'b0; first_ne = '0;
    any_after = 1'b0; next_ne = '0;
    for (int b = NBC - 1; b >= 0; b--) begin
      if (ne[b]) begin
        any_ne = 1'b1;
        first_ne = ($clog2(NBC+1))'(b);
      end
      if (ne[b] && b > int'(bc)) begin
        any_after = 1'b1;
        next_ne = ($clog2(NBC+1))'(b);
      end
    end
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      br      <= '0;
      bc      <= '0;
      cidx    <= '0;
      y_valid <= 1'b0;
      y_br    <= '0;
      done    <= 1'b0;
      for (int l = 0; l < BR; l++) begin
        acc[l]   <= '0;
        y_vec[l] <= '0;
      end
    end else begin
      y_valid <= 1'b0;
      done    <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= any_ne ? S_RUN : S_FIN;
          br    <= '0;
          bc    <= first_ne;
          cidx  <= '0;
          for (int l = 0; l < BR; l++) acc[l] <= '0;
        end
        S_RUN: begin
          if (found)
            for (int l = 0; l < BR; l++) acc[l] <= acc[l] + prod[l];
          if (found && more) begin
            cidx <= pos + 1'b1;
          end else begin
            cidx <= '0;
            if (any_after) bc <= next_ne;
            else state <= S_FIN;
          end
        end
        S_FIN: begin
          for (int l = 0; l < BR; l++) begin
            logic signed [ACCW-1:0] t;
            word_t v;
            t = acc[l] + (ACCW'(bmem[int'(br)][l]) <<< WFRAC);
            if (WFRAC > 0) t = t + (ACCW'(1) <<< (WFRAC - 1));
            v = sat(64'(t >>> WFRAC));
            y_vec[l] <= (ACT == ACT_RELU && v < 0) ? '0 : v;
            acc[l]   <= '0;
          end
          y_valid <= 1'b1;
          y_br    <= br;
          cidx    <= '0;
          if (int'(br) == NBR - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            br    <= br + 1'b1;
            bc    <= first_ne;
            state <= any_ne ? S_RUN : S_FIN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // a start while running would be lost
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
