// ola_fir: one time-domain overlap-add (TD-OLA) filter processor.
//
// Filters one sub-filter of L = N_OLA_TAP complex taps over a stream of complex
// single-precision samples and adds the result to the matching sample of the
// intermediate array read back from off-chip memory:
//     y[n] = acc[n] + sum_{k=0}^{L-1} c[k] * x[n-k]
// A long filter is cut into ceil(Tap/L) such sub-filters; launching the processor once
// per sub-filter and carrying the partial sums through the intermediate arrays yields
// the full convolution (overlap-add). The filter is written in transposed form: every
// tap owns one complex multiplier and one complex adder, so one sample is accepted
// every clock cycle (initiation interval 1), as the stream-mode kernels require.
//
// Interface: `coef_we/coef_idx/coef_in` load tap coefficients between launches;
// `clear` empties the tap pipeline at the start of a launch, so the samples before
// the first one count as zero. `in_valid` qualifies `x_in` and `acc_in`, which belong
// to the same output position. Timing: `y_out` is registered and appears with
// `out_valid` one cycle after the sample that produced it.
//
// The tap count and the intermediate-array accumulation follow the paper; the
// transposed form and the one-cycle latency are this design's own choices.
module ola_fir
  import mfg_pkg::*;
#(
  parameter int unsigned L = 32  // N_OLA-tap, taps per sub-filter
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 coef_we,
  input  logic [$clog2(L)-1:0] coef_idx,
  input  cplx_t                coef_in,
  input  logic                 in_valid,
  input  cplx_t                x_in,
  input  cplx_t                acc_in,
  output logic                 out_valid,
  output cplx_t                y_out
);

  cplx_t coef[L];
  cplx_t st[L];     // st[k]: partial sum waiting for tap k; st[0] is unused
  cplx_t y_next;

  always_ff @(posedge clk) begin
    if (coef_we) coef[coef_idx] <= coef_in;
  end

  always_comb begin
    y_next = c_add(acc_in, c_add(c_mul(coef[0], x_in), (L > 1) ? st[1 % L] : CZERO));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < L; k++) st[k] <= CZERO;
      out_valid <= 1'b0;
      y_out     <= CZERO;
    end else begin
      out_valid <= in_valid & ~clear;
      if (clear) begin
        for (int k = 0; k < L; k++) st[k] <= CZERO;
      end else if (in_valid) begin
        for (int k = 1; k < L - 1; k++) st[k] <= c_add(c_mul(coef[k], x_in), st[k+1]);
        st[L-1] <= c_mul(coef[L-1], x_in);
        y_out   <= y_next;
      end
    end
  end

endmodule
