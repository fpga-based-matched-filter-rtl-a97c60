// fft_reorder: bit-reversal buffer at the end of the streaming FFT engine.
//
// A decimation-in-frequency FFT leaves X[bitrev(i)] at position i. This block stores a
// frame as it arrives (P points per cycle, each with its index) in one of two buffers
// and reads it out in natural order, P consecutive frequencies per cycle, reading
// position bitrev(m) for output m, while the other buffer fills with the next frame.
//
// Timing: the first beat of a frame leaves two cycles after its last point arrived;
// `out_beat` numbers the beats of a frame 0 .. N/P-1. The block is this design's own
// choice of output ordering: natural order lets the overlap-save discard be a simple
// index test downstream.
module fft_reorder
  import mfg_pkg::*;
#(
  parameter int unsigned N = 4096,
  parameter int unsigned P = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [$clog2(N)-1:0]           in_idx[P],
  input  cplx_t                          in_data[P],
  output logic                           out_valid,
  output logic [$clog2(N/P)-1:0]         out_beat,
  output cplx_t                          out_data[P]
);

  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned BEATS = N / P;
  localparam int unsigned BW    = $clog2(BEATS);

  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] v);
    logic [LOGN-1:0] r;
    for (int i = 0; i < int'(LOGN); i++) r[i] = v[LOGN-1-i];
    return r;
  endfunction

  cplx_t         mem[2][N];
  logic          wb, rb, reading;
  logic [1:0]    full;
  logic [BW-1:0] wcnt, rcnt;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int q = 0; q < P; q++) mem[wb][in_idx[q]] <= in_data[q];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 1'b0; rb <= 1'b0; reading <= 1'b0; full <= '0;
      wcnt <= '0; rcnt <= '0;
      out_valid <= 1'b0; out_beat <= '0;
      for (int q = 0; q < P; q++) out_data[q] <= CZERO;
    end else begin
      logic [1:0] full_n;
      full_n = full;
      if (in_valid) begin
        wcnt <= wcnt + BW'(1);
        if (wcnt == BW'(BEATS - 1)) begin
          full_n[wb] = 1'b1;
          wb <= ~wb;
        end
      end
      out_valid <= reading;
      if (reading) begin
        for (int q = 0; q < P; q++)
          out_data[q] <= mem[rb][bitrev(LOGN'(rcnt) * LOGN'(P) + LOGN'(q))];
        out_beat <= rcnt;
        rcnt <= rcnt + BW'(1);
        if (rcnt == BW'(BEATS - 1)) begin
          full_n[rb] = 1'b0;
          rb      <= ~rb;
          reading <= full_n[~rb];
        end
      end else if (full_n[rb]) begin
        reading <= 1'b1;
        rcnt    <= '0;
      end
      full <= full_n;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && wcnt == BW'(BEATS - 1)) |-> !full[wb]);

endmodule
