// tb_ola_fir: self-checking test of the TD-OLA sub-filter processor.
//
// Loads random complex taps, streams random complex samples together with random
// intermediate-array values at one sample per cycle, and compares every output with a
// double-precision convolution computed here. Checks the one-cycle latency, that
// `clear` restarts the tap pipeline (a second launch with gaps in `in_valid`), and
// that a sample stream with gaps gives the same result as a dense one.
module tb_ola_fir;
  import mfg_pkg::*;
  import tb_fp_pkg::*;

  localparam int L = 32;
  localparam int NS = 120;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, coef_we, in_valid, out_valid;
  logic [$clog2(L)-1:0] coef_idx;
  cplx_t coef_in, x_in, acc_in, y_out;

  ola_fir #(.L(L)) dut (.*);

  int checks = 0, failures = 0;
  real cr[L], ci[L], xr[NS], xi[NS], ar[NS], ai[NS];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_launch(input bit gaps);
    int n_out;
    int cyc;
    // clear the pipeline
    @(negedge clk);
    clear = 1; in_valid = 0;
    @(negedge clk);
    clear = 0;
    for (int n = 0; n < NS; n++) begin
      xr[n] = rnd(); xi[n] = rnd(); ar[n] = rnd(); ai[n] = rnd();
    end
    n_out = 0;
    fork
      begin
        for (int n = 0; n < NS; n++) begin
          if (gaps && ($urandom_range(0, 3) == 0)) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          x_in = '{re: r2f(xr[n]), im: r2f(xi[n])};
          acc_in = '{re: r2f(ar[n]), im: r2f(ai[n])};
          @(posedge clk);
          // latency: the output of this sample must be visible right after this edge
          #1;
          checks++;
          if (!out_valid) begin
            failures++;
            $display("sample %0d: out_valid low one cycle after input", n);
          end else begin
            real er, ei, sc;
            er = ar[n]; ei = ai[n]; sc = rabs(ar[n]) + rabs(ai[n]);
            for (int k = 0; k < L; k++) begin
              if (n - k >= 0) begin
                er += cr[k] * xr[n-k] - ci[k] * xi[n-k];
                ei += cr[k] * xi[n-k] + ci[k] * xr[n-k];
                sc += rabs(cr[k] * xr[n-k]) + rabs(ci[k] * xi[n-k]) + rabs(cr[k] * xi[n-k]) + rabs(ci[k] * xr[n-k]);
              end
            end
            checks++;
            if (!close(f2r(y_out.re), er, sc, 1e-5) || !close(f2r(y_out.im), ei, sc, 1e-5)) begin
              failures++;
              if (failures < 10)
                $display("sample %0d: got %f %f expected %f %f", n, f2r(y_out.re), f2r(y_out.im), er, ei);
            end
          end
          @(negedge clk);
        end
        in_valid = 0;
      end
    join
  endtask

  initial begin
    clear = 0; coef_we = 0; in_valid = 0; coef_idx = '0;
    coef_in = CZERO; x_in = CZERO; acc_in = CZERO;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < L; k++) begin
      cr[k] = rnd(); ci[k] = rnd();
      @(negedge clk);
      coef_we = 1; coef_idx = k[$clog2(L)-1:0];
      coef_in = '{re: r2f(cr[k]), im: r2f(ci[k])};
    end
    @(negedge clk);
    coef_we = 0;
    run_launch(0);
    // second launch with new taps (last taps zero, as in a padded last sub-filter)
    for (int k = 0; k < L; k++) begin
      cr[k] = (k < L - 5) ? rnd() : 0.0;
      ci[k] = (k < L - 5) ? rnd() : 0.0;
      @(negedge clk);
      coef_we = 1; coef_idx = k[$clog2(L)-1:0];
      coef_in = '{re: r2f(cr[k]), im: r2f(ci[k])};
    end
    @(negedge clk);
    coef_we = 0;
    run_launch(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
