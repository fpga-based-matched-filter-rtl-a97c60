// tb_ols_controller: end-to-end test of the FD-OLS chunk sequencer with its units.
//
// The testbench plays the host: it cuts a random input signal into overlapping chunks
// (overlap = the longest filter of the sub-group), Fourier transforms every chunk and
// every filter (with the 1/N of the inverse transform folded into the filter spectra)
// in double precision, and stores them in behavioural memories that answer on the next
// cycle. The controller with N_PU ols_pu units then runs the launch, and every output
// point written is compared with the direct time-domain convolution y = x * h_f. The
// sub-group shares one padded input set over two launches (N_share = 2) with fewer
// active units in the second. Also checked: the number of discarded points and the
// launch time (chunks streamed back to back).
module tb_ols_controller;
  import mfg_pkg::*;
  import tb_fp_pkg::*;

  localparam int N_PU = 2, N = 32, P = 4, FILT_W = 10, LOGN = 5;
  localparam int BEATS = N / P;
  localparam int MAXF = 4, MAXIN = 128, MAXCH = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, in_rd_en;
  logic [ADDR_W-1:0] in_base, n_chunk, in_rd_addr, out_wr_addr, n_discard;
  logic [$clog2(N)-1:0] ovl;
  logic [FILT_W-1:0] filt_base;
  logic [$clog2(N_PU+1)-1:0] n_active;
  cplx_t in_rd_data[P], pu_x[P];
  logic [N_PU-1:0] coef_rd_en, pu_in_valid, out_wr_en, pu_ov;
  logic [ADDR_W-1:0] coef_rd_addr[N_PU];
  cplx_t coef_rd_data[N_PU][P], pu_h[N_PU][P], pu_y[N_PU][P];
  logic pu_out_valid;
  logic [$clog2(N/P)-1:0] pu_out_beat, pu_beat[N_PU];
  logic [P-1:0] out_wr_mask;
  logic [FILT_W-1:0] out_wr_filter[N_PU];

  ols_controller #(.N_PU(N_PU), .N(N), .P(P), .FILT_W(FILT_W)) dut (.*);

  for (genvar u = 0; u < N_PU; u++) begin : g_pu
    ols_pu #(.N(N), .P(P)) u_pu (
      .clk, .rst_n, .in_valid(pu_in_valid[0]), .x(pu_x), .h(pu_h[u]),
      .out_valid(pu_ov[u]), .out_beat(pu_beat[u]), .out_data(pu_y[u])
    );
  end
  assign pu_out_valid = pu_ov[0];
  assign pu_out_beat  = pu_beat[0];

  // behavioural memories (point addressed)
  cplx_t imem[MAXCH * N];
  cplx_t cmem[MAXF * N];
  cplx_t omem[MAXF + 1][MAXIN];
  bit    owritten[MAXF + 1][MAXIN];

  always_ff @(posedge clk) begin
    for (int q = 0; q < P; q++) in_rd_data[q] <= imem[(in_rd_addr + q) % (MAXCH * N)];
    for (int u = 0; u < N_PU; u++)
      for (int q = 0; q < P; q++) coef_rd_data[u][q] <= cmem[(coef_rd_addr[u] + q) % (MAXF * N)];
    for (int u = 0; u < N_PU; u++)
      if (out_wr_en[u])
        for (int q = 0; q < P; q++)
          if (out_wr_mask[q]) begin
            omem[out_wr_filter[u]][(out_wr_addr + q) % MAXIN] <= pu_y[u][q];
            owritten[out_wr_filter[u]][(out_wr_addr + q) % MAXIN] <= 1'b1;
          end
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xr[MAXIN], xi[MAXIN];
  real hr[MAXF + 1][N], hi[MAXF + 1][N];
  int  taps[MAXF + 1];

  // forward DFT of a time-domain block, scaled by s, into binary32
  task automatic dft_store(input real tr[N], input real ti[N], input real s, input int base, input bit to_coef);
    for (int k = 0; k < N; k++) begin
      real er, ei;
      er = 0.0; ei = 0.0;
      for (int n = 0; n < N; n++) begin
        real a;
        a = -2.0 * 3.14159265358979323846 * real'((k * n) % N) / real'(N);
        er += tr[n] * $cos(a) - ti[n] * $sin(a);
        ei += tr[n] * $sin(a) + ti[n] * $cos(a);
      end
      if (to_coef) cmem[base + k] = '{re: r2f(er * s), im: r2f(ei * s)};
      else         imem[base + k] = '{re: r2f(er * s), im: r2f(ei * s)};
    end
  endtask

  task automatic launch(input int fbase, input int nact, input int nch, input int ov, output int cycles);
    @(negedge clk);
    in_base = '0; n_chunk = ADDR_W'(nch); ovl = ($clog2(N))'(ov);
    filt_base = FILT_W'(fbase); n_active = ($clog2(N_PU+1))'(nact);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  initial begin
    int nin, ov, nch, cyc, bad, nf;
    start = 0; in_base = '0; n_chunk = '0; ovl = '0; filt_base = '0; n_active = '0;
    nin = 70; nf = 3;
    for (int f = 0; f <= MAXF; f++)
      for (int n = 0; n < MAXIN; n++) owritten[f][n] = 1'b0;
    // sub-group of three filters (lengths 3, 5, 7) sharing one padded input set
    for (int f = 1; f <= nf; f++) taps[f] = 1 + 2 * f;
    ov = taps[nf];
    nch = (nin + (N - ov) - 1) / (N - ov);
    for (int n = 0; n < MAXIN; n++) begin
      xr[n] = (n < nin) ? rnd() : 0.0; xi[n] = (n < nin) ? rnd() : 0.0;
    end
    for (int f = 1; f <= nf; f++) begin
      real tr[N], ti[N];
      for (int k = 0; k < N; k++) begin
        hr[f][k] = (k < taps[f]) ? rnd() : 0.0; hi[f][k] = (k < taps[f]) ? rnd() : 0.0;
        tr[k] = hr[f][k]; ti[k] = hi[f][k];
      end
      dft_store(tr, ti, 1.0 / real'(N), (f - 1) * N, 1'b1);
    end
    for (int c = 0; c < nch; c++) begin
      real tr[N], ti[N];
      for (int i = 0; i < N; i++) begin
        int n;
        n = c * (N - ov) - ov + i;
        tr[i] = (n >= 0 && n < nin) ? xr[n] : 0.0;
        ti[i] = (n >= 0 && n < nin) ? xi[n] : 0.0;
      end
      dft_store(tr, ti, 1.0, c * N, 1'b0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // launch 1: filters 1 and 2; launch 2: filter 3 alone, same input set
    launch(1, 2, nch, ov, cyc);
    checks++;
    if (cyc != nch * BEATS + 1 + LOGN * (BEATS + 1) + 3 + BEATS) begin
      failures++;
      $display("launch took %0d cycles, expected %0d", cyc, nch * BEATS + 1 + LOGN * (BEATS + 1) + 3 + BEATS);
    end
    checks++;
    if (int'(n_discard) != nch * ov) begin
      failures++;
      $display("%0d points discarded, expected %0d", n_discard, nch * ov);
    end
    launch(3, 1, nch, ov, cyc);

    bad = 0;
    for (int f = 1; f <= nf; f++)
      for (int n = 0; n < nch * (N - ov); n++) begin
        real er, ei, sc;
        er = 0.0; ei = 0.0; sc = 0.0;
        for (int k = 0; k < taps[f]; k++)
          if (n - k >= 0) begin
            er += hr[f][k] * xr[n-k] - hi[f][k] * xi[n-k];
            ei += hr[f][k] * xi[n-k] + hi[f][k] * xr[n-k];
          end
        checks++;
        if (!owritten[f][n] || !close(f2r(omem[f][n].re), er, real'(2 * taps[f]), 2e-5)
            || !close(f2r(omem[f][n].im), ei, real'(2 * taps[f]), 2e-5)) begin
          failures++;
          if (bad++ < 8) $display("filter %0d y[%0d]: written %0d got %f %f expected %f %f", f, n, owritten[f][n],
                                  f2r(omem[f][n].re), f2r(omem[f][n].im), er, ei);
        end
      end
    // filter 4 was never active: nothing may have been written for it
    for (int n = 0; n < MAXIN; n++) begin
      if (owritten[4][n]) begin
        checks++;
        failures++;
        $display("write to inactive filter 4 at %0d", n);
        break;
      end
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
