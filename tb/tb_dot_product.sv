// tb_dot_product: self-checking test of the Fourier-domain point-wise product.
//
// Drives random complex operands on all P lanes, with and without gaps in `in_valid`,
// and compares each registered product with one computed in double precision here;
// also checks the one-cycle latency.
module tb_dot_product;
  import mfg_pkg::*;
  import tb_fp_pkg::*;

  localparam int P = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  cplx_t x[P], h[P], y[P];

  dot_product #(.P(P)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xr[P], xi[P], hr[P], hi[P];
    in_valid = 0;
    for (int q = 0; q < P; q++) begin x[q] = CZERO; h[q] = CZERO; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      for (int q = 0; q < P; q++) begin
        xr[q] = rnd() * 8.0; xi[q] = rnd(); hr[q] = rnd(); hi[q] = rnd() * 0.125;
        x[q] = '{re: r2f(xr[q]), im: r2f(xi[q])};
        h[q] = '{re: r2f(hr[q]), im: r2f(hi[q])};
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid != in_valid) begin
        failures++;
        $display("cycle %0d: out_valid %b, expected %b", t, out_valid, in_valid);
      end
      if (in_valid) begin
        for (int q = 0; q < P; q++) begin
          real er, ei, sc;
          er = xr[q] * hr[q] - xi[q] * hi[q];
          ei = xr[q] * hi[q] + xi[q] * hr[q];
          sc = rabs(xr[q] * hr[q]) + rabs(xi[q] * hi[q]) + rabs(xr[q] * hi[q]) + rabs(xi[q] * hr[q]);
          checks++;
          if (!close(f2r(y[q].re), er, sc, 1e-6) || !close(f2r(y[q].im), ei, sc, 1e-6)) begin
            failures++;
            $display("cycle %0d lane %0d: got %f %f expected %f %f", t, q, f2r(y[q].re), f2r(y[q].im), er, ei);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
