// Serial-to-parallel conversion in front of the FFT.
//
// Gathers N consecutive samples into one frame (element n = n-th sample) and offers
// it with m_valid until the FFT takes it; s_ready is low while a full frame waits.
// Timing: N input cycles per frame, frame valid the cycle after the last sample.
// Named in the paper's receiver chain; the frame layout is this design's choice.
module serial_to_parallel
  import rx_pkg::*;
#(
  parameter int N = NFFT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_data,
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_frame [N]
);
  logic [$clog2(N+1)-1:0] cnt;
  logic full;
  assign s_ready = !full;
  assign m_valid = full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      full <= 1'b0;
    end else if (clear) begin
      cnt  <= '0;
      full <= 1'b0;
    end else begin
      if (full && m_ready) full <= 1'b0;
      if (s_valid && !full) begin
        m_frame[cnt] <= s_data;
        if (int'(cnt) == N - 1) begin
          cnt  <= '0;
          full <= 1'b1;
        end else cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
