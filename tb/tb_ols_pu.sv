// tb_ols_pu: self-checking test of one FD-OLS processing unit.
//
// Streams three Fourier-domain chunks back to back into a 32-point, 4-points-per-cycle
// unit: a random input spectrum X and a random filter spectrum H per chunk. Every
// output point is compared with the inverse DFT of X .* H computed in double precision
// here, and the latency of the first output beat (log2 N * (N/P + 1) + 3 cycles after
// the last input beat) is checked.
module tb_ols_pu;
  import mfg_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 32, P = 4, NF = 3, LOGN = 5;
  localparam int BEATS = N / P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  cplx_t x[P], h[P], out_data[P];
  logic [$clog2(N/P)-1:0] out_beat;

  ols_pu #(.N(N), .P(P)) dut (.*);

  int checks = 0, failures = 0;
  real xr[NF][N], xi[NF][N], hr[NF][N], hi[NF][N];
  int cyc = 0, last_in = 0, first_out = -1;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    for (int q = 0; q < P; q++) begin x[q] = CZERO; h[q] = CZERO; end
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = rnd(); xi[f][n] = rnd(); hr[f][n] = rnd(); hi[f][n] = rnd();
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int b = 0; b < BEATS; b++) begin
        in_valid = 1;
        for (int q = 0; q < P; q++) begin
          x[q] = '{re: r2f(xr[f][b*P+q]), im: r2f(xi[f][b*P+q])};
          h[q] = '{re: r2f(hr[f][b*P+q]), im: r2f(hi[f][b*P+q])};
        end
        if (f == 0 && b == BEATS - 1) last_in = cyc;
        @(negedge clk);
      end
    in_valid = 0;
  end

  initial begin
    int f, b, bad;
    f = 0; b = 0; bad = 0;
    while (f < NF) begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (first_out < 0) first_out = cyc;
        for (int q = 0; q < P; q++) begin
          int m;
          real er, ei;
          m = b * P + q;
          er = 0.0; ei = 0.0;
          for (int n = 0; n < N; n++) begin
            real a, pr, pi;
            pr = xr[f][n] * hr[f][n] - xi[f][n] * hi[f][n];
            pi = xr[f][n] * hi[f][n] + xi[f][n] * hr[f][n];
            a = 2.0 * 3.14159265358979323846 * real'((m * n) % N) / real'(N);
            er += pr * $cos(a) - pi * $sin(a);
            ei += pr * $sin(a) + pi * $cos(a);
          end
          checks++;
          if (!close(f2r(out_data[q].re), er, 2.0 * real'(N), 1e-5) || !close(f2r(out_data[q].im), ei, 2.0 * real'(N), 1e-5)) begin
            failures++;
            if (bad++ < 8) $display("chunk %0d y[%0d]: got %f %f expected %f %f", f, m, f2r(out_data[q].re), f2r(out_data[q].im), er, ei);
          end
        end
        b++;
        if (b == BEATS) begin b = 0; f++; end
      end
    end
    checks++;
    if (first_out - last_in != LOGN * (BEATS + 1) + 3) begin
      failures++;
      $display("latency %0d cycles, expected %0d", first_out - last_in, LOGN * (BEATS + 1) + 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
