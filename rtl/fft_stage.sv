// fft_stage: one radix-2 decimation-in-frequency stage of the streaming FFT engine.
//
// Stage S of an N-point transform combines the points a and b = a + H, H = N/2^(S+1):
//     out[a] = in[a] + in[b]
//     out[b] = (in[a] - in[b]) * W^(r*2^S),  r = a mod H,  W = exp(-+2*pi*i/N)
// (the sign of the exponent is + for the inverse transform). P points enter per cycle,
// each with its index in the frame, and are written into one of two frame buffers; when
// a frame is complete the stage reads it back in butterfly order, P/2 butterflies per
// cycle, while the other buffer fills with the next frame. Outputs leave with their
// indices, so the next stage can store them wherever they arrive. Twiddle factors are
// a constant table computed at elaboration and rounded to single precision.
//
// Timing: a frame takes N/P cycles to enter; its butterflies start the cycle after its
// last point arrives and their results are registered, so the first output of a frame
// leaves two cycles after its last input (N/P + 1 cycles after its first), and a new
// frame is accepted every N/P cycles. Input must not
// arrive faster than one beat per cycle, which keeps the reader ahead of the writer.
//
// The radix-2 DIF structure, the double buffers and the indexed transfer are this
// design's choices: the paper gives only the engine's length and width.
module fft_stage
  import mfg_pkg::*;
#(
  parameter int unsigned N       = 4096,
  parameter int unsigned P       = 4,
  parameter int unsigned S       = 0,
  parameter bit          INVERSE = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [$clog2(N)-1:0]  in_idx[P],
  input  cplx_t                 in_data[P],
  output logic                  out_valid,
  output logic [$clog2(N)-1:0]  out_idx[P],
  output cplx_t                 out_data[P]
);

  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned H     = N >> (S + 1);
  localparam int unsigned LOGH  = $clog2(H);
  localparam int unsigned BEATS = N / P;
  localparam int unsigned BW    = $clog2(BEATS);

  typedef logic [63:0] tw_tab_t[H];  // {re, im} bit patterns

  function automatic tw_tab_t gen_tw();
    tw_tab_t t;
    for (int r = 0; r < int'(H); r++) begin
      real ang;
      ang  = 2.0 * 3.14159265358979323846 * real'(r << S) / real'(N);
      t[r] = {real_to_fp32($cos(ang)), real_to_fp32(INVERSE ? $sin(ang) : -$sin(ang))};
    end
    return t;
  endfunction

  localparam tw_tab_t TW = gen_tw();

  cplx_t           mem[2][N];
  logic            wb, rb, reading;
  logic [1:0]      full;
  logic [BW-1:0]   wcnt, rcnt;

  // writer
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int q = 0; q < P; q++) mem[wb][in_idx[q]] <= in_data[q];
    end
  end

  // butterflies of the current read beat
  logic [LOGN-1:0] ia[P/2], ib[P/2];
  cplx_t           bf_top[P/2], bf_bot[P/2];
  always_comb begin
    for (int q = 0; q < P / 2; q++) begin
      logic [LOGN-2:0] kk;
      logic [LOGN-1:0] r;
      kk    = (LOGN-1)'(rcnt) * (LOGN-1)'(P / 2) + (LOGN-1)'(q);
      r     = LOGN'(kk) & LOGN'(H - 1);
      ia[q] = ((LOGN'(kk) >> LOGH) << (LOGH + 1)) | r;
      ib[q] = ia[q] + LOGN'(H);
      bf_top[q] = c_add(mem[rb][ia[q]], mem[rb][ib[q]]);
      bf_bot[q] = c_mul(c_sub(mem[rb][ia[q]], mem[rb][ib[q]]), cplx_t'(TW[r]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 1'b0; rb <= 1'b0; reading <= 1'b0; full <= '0;
      wcnt <= '0; rcnt <= '0;
      out_valid <= 1'b0;
      for (int q = 0; q < P; q++) begin
        out_idx[q]  <= '0;
        out_data[q] <= CZERO;
      end
    end else begin
      logic [1:0] full_n;
      full_n = full;
      // writer bookkeeping
      if (in_valid) begin
        wcnt <= wcnt + BW'(1);
        if (wcnt == BW'(BEATS - 1)) begin
          full_n[wb] = 1'b1;
          wb <= ~wb;
        end
      end
      // reader
      out_valid <= reading;
      if (reading) begin
        for (int q = 0; q < P / 2; q++) begin
          out_idx[2*q]    <= ia[q];
          out_idx[2*q+1]  <= ib[q];
          out_data[2*q]   <= bf_top[q];
          out_data[2*q+1] <= bf_bot[q];
        end
        rcnt <= rcnt + BW'(1);
        if (rcnt == BW'(BEATS - 1)) begin
          // go straight on with the other buffer if it already holds a frame
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

  // a frame must not complete into a buffer that is still waiting to be read
  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && wcnt == BW'(BEATS - 1)) |-> !full[wb]);

endmodule
