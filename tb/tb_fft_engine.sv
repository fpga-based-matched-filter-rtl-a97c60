// tb_fft_engine: self-checking test of the streaming FFT engine.
//
// Sends four random frames back to back (one beat per cycle, no gaps) into a 64-point,
// 4-points-per-cycle inverse engine and compares every output point with a direct
// double-precision inverse DFT. Also checks the latency stated by the engine (first
// output beat log2(N)*(N/P+1)+2 cycles after the last input beat of the frame) and that
// output frames follow each other without gaps (one frame per N/P cycles).
module tb_fft_engine;
  import mfg_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 64, P = 4, NF = 4, LOGN = 6;
  localparam int BEATS = N / P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  cplx_t in_data[P], out_data[P];
  logic [$clog2(N/P)-1:0] out_beat;

  fft_engine #(.N(N), .P(P), .INVERSE(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  real xr[NF][N], xi[NF][N];
  int cyc = 0;
  int last_in_cyc[NF];
  int first_out_cyc[NF];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    in_valid = 0;
    for (int q = 0; q < P; q++) in_data[q] = CZERO;
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = rnd(); xi[f][n] = rnd();
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int b = 0; b < BEATS; b++) begin
        in_valid = 1;
        for (int q = 0; q < P; q++) in_data[q] = '{re: r2f(xr[f][b*P+q]), im: r2f(xi[f][b*P+q])};
        if (b == BEATS - 1) last_in_cyc[f] = cyc;
        @(negedge clk);
      end
    in_valid = 0;
  end

  // checker
  initial begin
    int f, b, bad;
    f = 0; b = 0; bad = 0;
    while (f < NF) begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (b == 0) first_out_cyc[f] = cyc;
        checks++;
        if (int'(out_beat) != b) begin
          failures++;
          $display("frame %0d: out_beat %0d expected %0d", f, out_beat, b);
        end
        for (int q = 0; q < P; q++) begin
          int m;
          real er, ei;
          m = b * P + q;
          er = 0.0; ei = 0.0;
          for (int n = 0; n < N; n++) begin
            real a;
            a = 2.0 * 3.14159265358979323846 * real'((m * n) % N) / real'(N);
            er += xr[f][n] * $cos(a) - xi[f][n] * $sin(a);
            ei += xr[f][n] * $sin(a) + xi[f][n] * $cos(a);
          end
          checks++;
          if (!close(f2r(out_data[q].re), er, real'(N), 1e-5) || !close(f2r(out_data[q].im), ei, real'(N), 1e-5)) begin
            failures++;
            if (bad++ < 8) $display("frame %0d X[%0d]: got %f %f expected %f %f", f, m, f2r(out_data[q].re), f2r(out_data[q].im), er, ei);
          end
        end
        b++;
        if (b == BEATS) begin
          b = 0;
          f++;
        end
      end
    end
    for (int i = 0; i < NF; i++) begin
      checks++;
      if (first_out_cyc[i] - last_in_cyc[i] != LOGN * (BEATS + 1) + 2) begin
        failures++;
        $display("frame %0d: latency %0d cycles, expected %0d", i, first_out_cyc[i] - last_in_cyc[i], LOGN * (BEATS + 1) + 2);
      end
      if (i > 0) begin
        checks++;
        if (first_out_cyc[i] - first_out_cyc[i-1] != BEATS) begin
          failures++;
          $display("frame %0d: follows the previous one after %0d cycles, expected %0d", i, first_out_cyc[i] - first_out_cyc[i-1], BEATS);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
