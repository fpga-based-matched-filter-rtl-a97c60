// tb_ola_controller: self-checking test of the TD-OLA launch sequencer.
//
// The controller is connected to N_PU ola_fir processors and to behavioural memories
// (input array, coefficient array, two intermediate arrays per unit, output plane),
// which answer a read on the next cycle. Several small matched filter groups are run;
// every output of every filter is compared with a double-precision convolution
// computed here, and the number of launch rounds and of clock cycles are compared
// with the LPT makespan and the timing stated by the controller.
module tb_ola_controller;
  import mfg_pkg::*;
  import tb_fp_pkg::*;

  localparam int N_PU = 3, L = 4, FILT_W = 10, TAP_W = 14, MAX_FILT = 16, TAP_STRIDE = 64;
  localparam int MAXLEN = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [FILT_W-1:0] n_filter;
  logic [3:0] n_inc;
  logic [TAP_W-1:0] tap1;
  logic [ADDR_W-1:0] n_input;
  logic [15:0] rounds, n_pad_launch, n_idle_slot;
  logic x_rd_en;
  logic [ADDR_W-1:0] x_rd_addr, acc_rd_addr, wr_addr;
  cplx_t x_rd_data, pu_x;
  logic [N_PU-1:0] coef_rd_en, acc_rd_en, acc_rd_buf, pu_coef_we, pu_in_valid, wr_en, wr_final, wr_buf;
  logic [ADDR_W-1:0] coef_rd_addr[N_PU];
  cplx_t coef_rd_data[N_PU], acc_rd_data[N_PU], pu_coef[N_PU], pu_acc[N_PU], y[N_PU];
  logic pu_clear;
  logic [$clog2(L)-1:0] pu_coef_idx;
  logic [FILT_W-1:0] wr_filter[N_PU];
  logic [N_PU-1:0] y_valid;

  ola_controller #(.N_PU(N_PU), .L(L), .MAX_FILT(MAX_FILT), .TAP_STRIDE(TAP_STRIDE)) dut (.*);

  for (genvar u = 0; u < N_PU; u++) begin : g_pu
    ola_fir #(.L(L)) u_fir (
      .clk, .rst_n, .clear(pu_clear), .coef_we(pu_coef_we[u]), .coef_idx(pu_coef_idx),
      .coef_in(pu_coef[u]), .in_valid(pu_in_valid[u]), .x_in(pu_x), .acc_in(pu_acc[u]),
      .out_valid(y_valid[u]), .y_out(y[u])
    );
  end

  // behavioural memories
  cplx_t xmem[MAXLEN];
  cplx_t cmem[MAX_FILT * TAP_STRIDE];
  cplx_t amem[N_PU][2][MAXLEN];
  cplx_t omem[MAX_FILT + 1][MAXLEN];

  always_ff @(posedge clk) begin
    x_rd_data <= xmem[x_rd_addr % MAXLEN];
    for (int u = 0; u < N_PU; u++) begin
      coef_rd_data[u] <= cmem[coef_rd_addr[u] % (MAX_FILT * TAP_STRIDE)];
      acc_rd_data[u]  <= amem[u][acc_rd_buf[u]][acc_rd_addr % MAXLEN];
      if (wr_en[u]) begin
        if (wr_final[u]) omem[wr_filter[u]][wr_addr % MAXLEN] <= y[u];
        else amem[u][wr_buf[u]][wr_addr % MAXLEN] <= y[u];
      end
    end
  end

  int checks = 0, failures = 0;
  int idle_total = 0, pad_total = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tb-side assertion: processor output and write tag must coincide
  always @(posedge clk) if (rst_n && (y_valid != wr_en)) begin
    failures++;
    $display("processor output valid %b but write enable %b", y_valid, wr_en);
  end

  real xr[MAXLEN], xi[MAXLEN];
  real hr[MAX_FILT + 1][TAP_STRIDE], hi[MAX_FILT + 1][TAP_STRIDE];

  task automatic run_group(input int nf, input int ninc, input int t1, input int nin);
    int load[N_PU];
    int ms, cyc, tapmax, len, bad;
    for (int n = 0; n < MAXLEN; n++) begin
      xr[n] = (n < nin) ? rnd() : 0.0; xi[n] = (n < nin) ? rnd() : 0.0;
      xmem[n] = '{re: r2f(xr[n]), im: r2f(xi[n])};
      for (int u = 0; u < N_PU; u++) begin
        amem[u][0][n] = '{re: r2f(7.0), im: r2f(7.0)};  // garbage that must never be read
        amem[u][1][n] = '{re: r2f(7.0), im: r2f(7.0)};
      end
    end
    for (int f = 1; f <= nf; f++) begin
      int tap;
      tap = t1 + ninc * (f - 1);
      for (int t = 0; t < TAP_STRIDE; t++) begin
        hr[f][t] = (t < tap) ? rnd() : 0.0; hi[f][t] = (t < tap) ? rnd() : 0.0;
        // beyond Tap_j the memory holds garbage: the controller must pad with zero
        cmem[(f-1)*TAP_STRIDE + t] = (t < tap) ? '{re: r2f(hr[f][t]), im: r2f(hi[f][t])}
                                               : '{re: r2f(3.0), im: r2f(-3.0)};
      end
    end
    // LPT reference for the round count
    for (int u = 0; u < N_PU; u++) load[u] = 0;
    for (int f = nf; f >= 1; f--) begin
      int mi;
      mi = 0;
      for (int u = 1; u < N_PU; u++) if (load[u] < load[mi]) mi = u;
      load[mi] += (t1 + ninc * (f - 1) + L - 1) / L;
    end
    ms = 0;
    for (int u = 0; u < N_PU; u++) if (load[u] > ms) ms = load[u];
    tapmax = t1 + ninc * (nf - 1);
    len = nin + ((tapmax + L - 1) / L) * L - 1;

    @(negedge clk);
    n_filter = FILT_W'(nf); n_inc = 4'(ninc); tap1 = TAP_W'(t1); n_input = ADDR_W'(nin);
    start = 1;
    cyc = 0;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (int'(rounds) != ms) begin
      failures++;
      $display("MF(%0d,%0d,%0d): %0d rounds, LPT makespan %0d", nf, ninc, t1, rounds, ms);
    end
    checks++;
    if (cyc != nf + 2 + ms * (L + len + 5) + 1) begin
      failures++;
      $display("MF(%0d,%0d,%0d): %0d cycles, expected %0d", nf, ninc, t1, cyc, nf + 2 + ms * (L + len + 5) + 1);
    end
    bad = 0;
    for (int f = 1; f <= nf; f++) begin
      int tap;
      tap = t1 + ninc * (f - 1);
      for (int n = 0; n < nin + tap - 1; n++) begin
        real er, ei, sc;
        er = 0.0; ei = 0.0; sc = 0.0;
        for (int k = 0; k < tap; k++) begin
          if (n - k >= 0 && n - k < nin) begin
            er += hr[f][k] * xr[n-k] - hi[f][k] * xi[n-k];
            ei += hr[f][k] * xi[n-k] + hi[f][k] * xr[n-k];
            sc += rabs(hr[f][k]) + rabs(hi[f][k]);
          end
        end
        checks++;
        if (!close(f2r(omem[f][n].re), er, sc, 1e-5) || !close(f2r(omem[f][n].im), ei, sc, 1e-5)) begin
          failures++;
          if (bad++ < 5)
            $display("MF(%0d,%0d,%0d) filter %0d y[%0d]: got %f %f expected %f %f", nf, ninc, t1, f, n,
                     f2r(omem[f][n].re), f2r(omem[f][n].im), er, ei);
        end
      end
    end
    $display("MF(%0d,%0d,%0d) N_input=%0d: %0d rounds, %0d padded launches, %0d idle unit-rounds",
             nf, ninc, t1, nin, rounds, n_pad_launch, n_idle_slot);
    idle_total += int'(n_idle_slot);
    pad_total += int'(n_pad_launch);
  endtask

  initial begin
    start = 0; n_filter = '0; n_inc = '0; tap1 = '0; n_input = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_group(5, 3, 2, 40);
    run_group(7, 2, 1, 33);
    run_group(1, 1, 4, 20);
    run_group(6, 4, 9, 50);
    checks++;
    if (idle_total == 0 || pad_total == 0) begin
      failures++;
      $display("idle unit-rounds %0d, padded launches %0d: both should occur", idle_total, pad_total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
