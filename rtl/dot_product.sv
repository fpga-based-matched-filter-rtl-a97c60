// dot_product: element-wise complex product of the two Fourier-domain operands.
//
// In a Fourier-domain overlap-save (FD-OLS) unit the Fourier-transformed input chunk is
// multiplied point by point with the Fourier-transformed coefficients of the unit's
// filter; the inverse transform of the product is the circular convolution of the
// chunk with the filter. P points arrive per clock cycle (the FFT engine's width), so
// P complex single-precision multipliers work in parallel.
//
// Interface and timing: `in_valid` qualifies `x` and `h`; `y = x .* h` is registered
// and leaves with `out_valid` one cycle later. The block is the paper's "dot product";
// its width P and the one-cycle latency are this design's choices.
module dot_product
  import mfg_pkg::*;
#(
  parameter int unsigned P = 4  // points per cycle (4-point FFT engine)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t x[P],
  input  cplx_t h[P],
  output logic  out_valid,
  output cplx_t y[P]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int q = 0; q < P; q++) y[q] <= CZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int q = 0; q < P; q++) y[q] <= c_mul(x[q], h[q]);
      end
    end
  end

endmodule
