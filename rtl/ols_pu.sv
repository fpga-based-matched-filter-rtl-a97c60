// ols_pu: one Fourier-domain overlap-save (FD-OLS) filter processing unit.
//
// A dot product (point-wise complex multiply of the Fourier-transformed input chunk with
// the Fourier-transformed coefficients of this unit's filter) feeds an N-point inverse
// FFT engine; the result is the circular convolution of the chunk with the filter, from
// which the overlap-save method keeps the last N - overlap points. P points per cycle
// flow through both parts without stalls.
//
// Interface and timing: `in_valid` qualifies `x` (shared by all units) and `h`; frames
// of N/P beats may follow each other back to back. Results leave in natural order with
// `out_valid` and the beat number `out_beat`; the first beat of a chunk leaves
// log2(N)*(N/P+1) + 3 cycles after the chunk's last input beat.
// The two-part structure (dot product, FFT engine) is the paper's.
module ols_pu
  import mfg_pkg::*;
#(
  parameter int unsigned N = 4096,  // N_OLS-FT
  parameter int unsigned P = 4      // points per cycle
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  cplx_t                   x[P],
  input  cplx_t                   h[P],
  output logic                    out_valid,
  output logic [$clog2(N/P)-1:0]  out_beat,
  output cplx_t                   out_data[P]
);

  logic  dp_valid;
  cplx_t dp[P];

  dot_product #(.P(P)) u_dot (
    .clk, .rst_n, .in_valid, .x, .h, .out_valid(dp_valid), .y(dp)
  );

  fft_engine #(.N(N), .P(P), .INVERSE(1'b1)) u_fft (
    .clk, .rst_n, .in_valid(dp_valid), .in_data(dp), .out_valid, .out_beat, .out_data
  );

endmodule
